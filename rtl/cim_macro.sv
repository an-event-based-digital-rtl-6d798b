// cim_macro -- the FlexSpIM digital CIM-SRAM macro.
//
// One unified 512 x 256 6T SRAM array holds weights, membrane potentials and
// thresholds in any shape: an operand of N bits occupies N_C neighbouring
// columns and N_R rows (N_R x N_C >= N), with the bits numbered from the
// LSB along the first row left to right, back along the second row right to
// left, and so on. Each column has a peripheral circuit (pc); two control
// bitcells per column (ctrl_bitcells) mark the LEFT and RIGHT ends of each
// operand or switch the column to INACTIVE standby, and one row of emulation
// bits (eb_row) can replace a stored operand row. A CIM operation reads two
// rows at once (dual_addr_decoder, cim_sram_array), adds them bit-parallel
// across all columns and writes the result back, one operand row per
// operation; a multi-row addition is a sequence of operations issued by the
// controller with the carry-select code of each row.
// Interface: op_valid/op_accept hand over one mctrl_t (plus a data row and
// column mask for writes); the control register holds them for the whole
// operation. Timing: one operation every SUBCYC_P clocks of the fast clock
// (timing_generator); done pulses in its last sub-cycle; rdata (RDROW) and
// flags_end/any_flag (after ADD/CMP on the last row, SIGNCAP) are valid
// from done on. The block list, sizes and the dual-row AND/NOR scheme follow
// the paper; the operation set and handshake are this design's.
// The carry and flag chains have one net per direction (c_lr/c_rl,
// f_lr/f_rl), so neither forms a combinational loop.
module cim_macro
  import flexspim_pkg::*;
#(
  parameter int unsigned ROWS_P   = ROWS,
  parameter int unsigned COLS_P   = COLS,
  parameter int unsigned SUBCYC_P = SUBCYC
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              op_valid,
  input  mctrl_t            op_ctl,
  input  logic [COLS_P-1:0] op_wdata,
  input  logic [COLS_P-1:0] op_wmask,
  output logic              op_accept,
  output logic              busy,
  output logic              done,
  output logic [COLS_P-1:0] rdata,
  output logic [COLS_P-1:0] flags_end,
  output logic              any_flag,
  output pc_state_e         state [COLS_P]
);

  // ---- control register ---------------------------------------------------
  mctrl_t            ctl;
  logic [COLS_P-1:0] wdata_q, wmask_q;
  phase_t            ph;

  timing_generator #(.SUBCYC_P(SUBCYC_P)) u_tg (
    .clk, .rst_n, .start(op_valid), .accept(op_accept), .busy, .done, .ph
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ctl     <= '0;
      wdata_q <= '0;
      wmask_q <= '0;
    end else if (op_accept) begin
      ctl     <= op_ctl;
      wdata_q <= op_wdata;
      wmask_q <= op_wmask;
    end
  end

  // ---- wordlines --------------------------------------------------------------
  logic              en1, en2, eb_wl, wl_on;
  logic [ROWS_P-1:0] wl1, wl2;

  always_comb begin
    wl_on = ph.read || ph.write;
    en1   = 1'b0;
    en2   = 1'b0;
    eb_wl = 1'b0;
    unique case (ctl.op)
      MOP_ADD, MOP_CMP: begin
        en1   = wl_on;
        en2   = ph.read && !ctl.src2_eb;
        eb_wl = ph.read && ctl.src2_eb;
      end
      MOP_FIX_SAT, MOP_FIX_CLR, MOP_WRROW: en1 = ph.write;
      MOP_RDROW:   en1 = ph.read;
      MOP_SIGNCAP: en2 = ph.read;
      default: ;
    endcase
  end

  dual_addr_decoder #(.ROWS_P(ROWS_P)) u_dec (
    .addr1(ctl.addr1), .addr2(ctl.addr2), .en1, .en2, .wl1, .wl2
  );

  // ---- storage ---------------------------------------------------------------
  logic [COLS_P-1:0] bl, blb, eb;
  logic [COLS_P-1:0] wr_en, wr_bit, eb_we, eb_bit;
  logic              arr_we, ctrl_we, eb_row_we;
  logic [COLS_P-1:0] eb_wcol, eb_wbit;

  assign arr_we = ph.write && (ctl.op inside {MOP_ADD, MOP_FIX_SAT, MOP_FIX_CLR, MOP_WRROW});

  cim_sram_array #(.ROWS_P(ROWS_P), .COLS_P(COLS_P)) u_array (
    .clk, .wl1, .wl2, .eb_wl, .eb, .we(arr_we), .wcol(wr_en), .wbit(wr_bit), .bl, .blb
  );

  assign ctrl_we = ph.write && (ctl.op == MOP_WRCTRL);

  ctrl_bitcells #(.COLS_P(COLS_P)) u_ctrl (
    .clk, .rst_n, .we(ctrl_we), .sel(ctl.addr1[0]), .wcol(wmask_q), .wbit(wdata_q), .state
  );

  assign eb_row_we = ph.write && (ctl.op inside {MOP_WREB, MOP_SIGNCAP});
  assign eb_wcol   = (ctl.op == MOP_WREB) ? wmask_q : eb_we;
  assign eb_wbit   = (ctl.op == MOP_WREB) ? wdata_q : eb_bit;

  eb_row #(.COLS_P(COLS_P)) u_eb (
    .clk, .rst_n, .we(eb_row_we), .wcol(eb_wcol), .wbit(eb_wbit), .eb
  );

  // ---- 1 x 256 peripheral circuits -------------------------------------------
  logic [COLS_P-1:0] c_lr, c_rl, f_lr, f_rl, s_lr, s_rl;

  for (genvar c = 0; c < int'(COLS_P); c++) begin : g_pc
    logic cl, cr, fl, sl, fr, sr;
    if (c == 0) begin : g_l0
      assign cl = 1'b0;
      assign fl = 1'b0;
      assign sl = 1'b0;
    end else begin : g_l
      assign cl = c_lr[c-1];
      assign fl = f_lr[c-1];
      assign sl = s_lr[c-1];
    end
    if (c == int'(COLS_P) - 1) begin : g_rn
      assign cr = 1'b0;
      assign fr = 1'b0;
      assign sr = 1'b0;
    end else begin : g_r
      assign cr = c_rl[c+1];
      assign fr = f_rl[c+1];
      assign sr = s_rl[c+1];
    end

    pc u_pc (
      .clk, .rst_n, .ph, .ctl, .state(state[c]),
      .bl(bl[c]), .blb(blb[c]),
      .c_left(cl), .c_right(cr), .c_to_right(c_lr[c]), .c_to_left(c_rl[c]),
      .bcf_left(fl), .bcs_left(sl), .bcf_right(fr), .bcs_right(sr),
      .bcf_to_right(f_lr[c]), .bcs_to_right(s_lr[c]),
      .bcf_to_left(f_rl[c]), .bcs_to_left(s_rl[c]),
      .wr_en(wr_en[c]), .wr_bit(wr_bit[c]), .eb_we(eb_we[c]), .eb_bit(eb_bit[c]),
      .din(wdata_q[c]), .wmask(wmask_q[c]), .dq(rdata[c]), .flag_end(flags_end[c])
    );
  end

  assign any_flag = |flags_end;

endmodule
