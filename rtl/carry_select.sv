// carry_select -- carry-in selection of one peripheral circuit (PC).
//
// Operands may span several neighbouring columns and several rows. Within a
// row the 1-bit adders of an operand's columns are chained; from row to row
// the chain alternates direction (left-to-right, then right-to-left, ...)
// so that carries only ever move between direct neighbours, and the carry
// leaving one row is kept in the carry register (C_REG) of the column where
// that row ended, which is where the next row starts. The PC state
// {ctrl#1, ctrl#2} says where the operand begins (LEFT) and ends (RIGHT).
//   SEL=11 first row, L->R : LEFT takes 0,      others take C_LEFT
//   SEL=01 R->L row        : RIGHT takes C_REG, others take C_RIGHT
//   SEL=00 later L->R row  : LEFT takes C_REG,  others take C_LEFT
//   SEL=10 bit-serial      : SEQ=0 takes 0, SEQ=1 takes C_REG
//   INACTIVE columns       : carry-in 0
// C_LEFT is the carry-out of the column to the left (lower index), C_RIGHT
// that of the column to the right. Purely combinational. The codes, the
// use of ctrl#1 for SEL=00/11 and ctrl#2 for SEL=01, and the per-row
// behaviour follow the paper's carry-select examples; giving 0 for SEQ=0 in
// bit-serial mode is this design's reading of the first bit-serial cycle.
module carry_select
  import flexspim_pkg::*;
(
  input  csel_e     sel,
  input  logic      seq,
  input  pc_state_e state,
  input  logic      c_left,
  input  logic      c_right,
  input  logic      c_reg,
  output logic      c_in
);

  logic ctrl1, ctrl2;
  assign {ctrl1, ctrl2} = state;

  always_comb begin
    unique case (sel)
      SEL_LR_NEXT:  c_in = ctrl1 ? c_reg : c_left;
      SEL_RL:       c_in = ctrl2 ? c_reg : c_right;
      SEL_SERIAL:   c_in = seq ? c_reg : 1'b0;
      SEL_LR_FIRST: c_in = ctrl1 ? 1'b0 : c_left;
      default:      c_in = 1'b0;
    endcase
    if (state == ST_INACTIVE) c_in = 1'b0;
  end

endmodule
