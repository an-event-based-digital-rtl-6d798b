// pc -- peripheral circuit (PC) of one column of the CIM macro.
//
// Reading: a dual sense amplifier latches BL and BLB in the read phase.
// With two wordlines raised these are A AND B and NOT(A OR B); the adder
// forms A XOR B = NOT(AND OR NOR), S = A XOR B XOR C_IN and
// C_OUT = AND OR (C_IN AND (A XOR B)), the full-adder equations of the
// paper. C_IN comes from carry_select. In the compute phase the PC latches
// S and C_OUT (C_REG). In the write phase it drives the new bit back into
// the potential row (wr_en/wr_bit).
// Flags: on the most significant row ('last') the column that holds the
// operand's MSB (its END column: the RIGHT column after an odd number of
// rows, the LEFT one after an even number, every column in bit-serial mode)
// records one flag:
//   ADD : overflow, (A=B=1 and S=0) or (A=B=0 and S=1); fsign = operand sign
//   CMP : spike, potential - threshold >= 0 taking overflow into account
//   SIGNCAP: the stored bit (single wordline read of the weight's MSB row)
// The END column's flag is passed column to column across the operand
// (bc_* chain) so every column of the operand sees it, and used by:
//   FIX_SAT: write the saturated value (sign bit at the END column of the
//            MSB row, inverted sign elsewhere) into each row
//   FIX_CLR: write 0 into each row (potential reset after a spike)
//   SIGNCAP: write the sign into this column's EB (weight sign extension)
// External communication: WRROW writes din where wmask is set; RDROW
// latches the stored bit into dq (in every column). INACTIVE columns are
// otherwise in standby: no SA latch, no write, carry 0, no flag. All
// registers update on the strobes of the timing generator. The adder
// equations, carry selection, standby state and list of PC modules follow
// the published design; the flag chain, the
// overflow/spike formulas and the saturating fix-up pass are this design's
// realisation of the over/under-flow protection and comparison modules.
module pc
  import flexspim_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  phase_t    ph,
  input  mctrl_t    ctl,
  input  pc_state_e state,
  // bitlines
  input  logic      bl,
  input  logic      blb,
  // carry chain
  input  logic      c_left,     // from the left neighbour's c_to_right
  input  logic      c_right,    // from the right neighbour's c_to_left
  output logic      c_to_right,
  output logic      c_to_left,
  // flag chain
  input  logic      bcf_left,
  input  logic      bcs_left,
  input  logic      bcf_right,
  input  logic      bcs_right,
  output logic      bcf_to_right,
  output logic      bcs_to_right,
  output logic      bcf_to_left,
  output logic      bcs_to_left,
  // write drivers
  output logic      wr_en,
  output logic      wr_bit,
  output logic      eb_we,
  output logic      eb_bit,
  // external communication
  input  logic      din,
  input  logic      wmask,
  output logic      dq,
  output logic      flag_end
);

  logic sa_and, sa_nor;        // dual sense amplifier latches
  logic c_reg, s_reg;          // carry register, sum latch
  logic f, fsign;              // END-column flag and sign
  logic active, is_end;
  logic a_xor_b, c_in, c_in_lr, c_in_rl, s, ovf, bcf_out, bcs_out;

  assign active  = (state != ST_INACTIVE);
  assign is_end  = active && (ctl.serial ||
                   (ctl.end_left ? (state == ST_LEFT) : (state == ST_RIGHT)));
  assign a_xor_b = ~(sa_and | sa_nor);

  // The carry selection is evaluated once per chain direction so that the
  // left-to-right and right-to-left carry nets are separate and acyclic;
  // SEL picks the one in use, which gives the same carry-in as a single
  // selector would.
  carry_select u_csel_lr (
    .sel(ctl.sel), .seq(ctl.seq), .state(state),
    .c_left(c_left), .c_right(1'b0), .c_reg(c_reg), .c_in(c_in_lr)
  );
  carry_select u_csel_rl (
    .sel(ctl.sel), .seq(ctl.seq), .state(state),
    .c_left(1'b0), .c_right(c_right), .c_reg(c_reg), .c_in(c_in_rl)
  );

  assign c_in       = (ctl.sel == SEL_RL) ? c_in_rl : c_in_lr;
  assign s          = a_xor_b ^ c_in;
  assign ovf        = (sa_and & ~s) | (sa_nor & s);
  assign c_to_right = active & (sa_and | (c_in_lr & a_xor_b));
  assign c_to_left  = active & (sa_and | (c_in_rl & a_xor_b));

  // sense amplifiers
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sa_and <= 1'b0;
      sa_nor <= 1'b0;
    end else if (ph.read && (active || ctl.op == MOP_RDROW)) begin
      sa_and <= bl;
      sa_nor <= blb;
    end
  end

  // adder results, flags, readout
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c_reg <= 1'b0;
      s_reg <= 1'b0;
      f     <= 1'b0;
      fsign <= 1'b0;
      dq    <= 1'b0;
    end else if (ph.comp) begin
      unique case (ctl.op)
        MOP_ADD: begin
          c_reg <= active & (sa_and | (c_in & a_xor_b));
          s_reg <= s;
          if (ctl.last) begin
            f     <= active & ovf;
            fsign <= sa_and;
          end
        end
        MOP_CMP: begin
          c_reg <= active & (sa_and | (c_in & a_xor_b));
          s_reg <= s;
          if (ctl.last) f <= active & ~(s ^ ovf);
        end
        MOP_SIGNCAP: f <= active & sa_and;
        MOP_RDROW:   dq <= sa_and;
        default: ;
      endcase
    end
  end

  // flag chain: the END column sources the flag, the others pass it on
  // from the side the END column is on (one net per direction).
  assign bcf_to_right = active & (is_end ? f     : bcf_left);
  assign bcs_to_right = active & (is_end ? fsign : bcs_left);
  assign bcf_to_left  = active & (is_end ? f     : bcf_right);
  assign bcs_to_left  = active & (is_end ? fsign : bcs_right);
  assign bcf_out      = ctl.end_left ? bcf_to_right : bcf_to_left;
  assign bcs_out      = ctl.end_left ? bcs_to_right : bcs_to_left;

  // write drivers
  always_comb begin
    wr_en  = 1'b0;
    wr_bit = 1'b0;
    eb_we  = 1'b0;
    eb_bit = 1'b0;
    unique case (ctl.op)
      MOP_ADD: begin
        wr_en  = active;
        wr_bit = s_reg;
      end
      MOP_FIX_SAT: begin
        wr_en  = active & bcf_out;
        wr_bit = (ctl.last && is_end) ? bcs_out : ~bcs_out;
      end
      MOP_FIX_CLR: begin
        wr_en  = active & bcf_out;
        wr_bit = 1'b0;
      end
      MOP_WRROW: begin
        wr_en  = wmask;
        wr_bit = din;
      end
      MOP_SIGNCAP: begin
        eb_we  = active;
        eb_bit = bcf_out;
      end
      default: ;
    endcase
  end

  assign flag_end = is_end & f;

endmodule
