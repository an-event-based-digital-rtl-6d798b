// tb_flexspim_top -- end-to-end testbench of the accelerator through its SPI
// port, at 32 CIM columns (COLS_P override) to keep the build short.
//
// The host loads the buffer (control-bitcell rows, potentials, weights,
// negated thresholds), a program and a timestep of input events, starts the
// program and waits for ack. Layer 1 runs output-stationary in a 3x4 shape
// (12-bit potentials, 8-bit weights, so each ADD needs sign extension):
// the events add one of two kernels to the potentials, then FIRE, then the
// potentials are stored to the buffer. Layer 2 switches the macro to
// bit-serial shape (6-bit potentials, 4-bit weights in single columns),
// loads its potentials from the buffer next to stationary weights, adds,
// fires and stores. The host reads back spike vectors and potentials and
// compares them with a saturating signed model. The test counts the
// mechanisms it must see: sign capture, right-to-left (ping-pong) rows,
// saturation fix-up, spikes with reset, bit-serial rows, buffer loads and
// stores; each must happen at least once.
module tb_flexspim_top;
  import flexspim_pkg::*;
  timeunit 1ns;
  timeprecision 100ps;

  localparam int unsigned NCOL = 32;

  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;

  logic sck = 1'b0, cs_n = 1'b1, mosi = 1'b0, miso;
  logic ack, spike_valid, sat_event;
  logic [NCOL-1:0] spike_vec;

  flexspim_top #(.COLS_P(NCOL)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // ---- mechanism counters ----------------------------------------------------
  int n_signcap = 0, n_rl = 0, n_sat = 0, n_spk = 0, n_serial = 0, n_ld = 0, n_st = 0, n_clr = 0;
  always @(posedge clk) if (dut.u_macro.op_accept) begin
    unique case (dut.u_macro.op_ctl.op)
      MOP_SIGNCAP: n_signcap++;
      MOP_WRROW, MOP_WRCTRL: n_ld++;
      MOP_RDROW: n_st++;
      MOP_FIX_CLR: n_clr++;
      default: ;
    endcase
    if (dut.u_macro.op_ctl.op == MOP_ADD && dut.u_macro.op_ctl.sel == SEL_RL) n_rl++;
    if (dut.u_macro.op_ctl.op == MOP_ADD && dut.u_macro.op_ctl.sel == SEL_SERIAL) n_serial++;
  end
  always @(posedge clk) begin
    if (sat_event) n_sat++;
    if (spike_valid && spike_vec != '0) n_spk++;
  end

  // ---- SPI host ------------------------------------------------------------
  task automatic spi_frame(input logic [7:0] cmd, input logic [15:0] addr,
                           input logic [31:0] data, output logic [31:0] rd);
    logic [55:0] f = {cmd, addr, data};
    rd = '0;
    cs_n = 1'b0;
    repeat (4) @(posedge clk);
    for (int i = 55; i >= 0; i--) begin
      mosi = f[i];
      repeat (4) @(posedge clk);
      sck = 1'b1;
      if (i < 32) rd = {rd[30:0], miso};
      repeat (4) @(posedge clk);
      sck = 1'b0;
    end
    repeat (4) @(posedge clk);
    cs_n = 1'b1;
    repeat (8) @(posedge clk);
  endtask

  task automatic spi_wr(input logic [7:0] cmd, input int addr, input logic [31:0] data);
    logic [31:0] d;
    spi_frame(cmd, 16'(addr), data, d);
  endtask

  function automatic logic [31:0] instr(opcode_e op, logic [27:0] f);
    return {op, f};
  endfunction

  // ---- operand layout ------------------------------------------------------------
  function automatic longint sext(longint v, int bits);
    return (v << (64 - bits)) >>> (64 - bits);
  endfunction

  function automatic int col_of(int nc, int op, int k);
    int r = k / nc, j = k % nc;
    return (r % 2 == 0) ? op * nc + j : op * nc + nc - 1 - j;
  endfunction

  function automatic logic [31:0] row_word(longint vals[], int nc, int r);
    logic [31:0] v = '0;
    for (int i = 0; i < NCOL / nc; i++)
      for (int j = 0; j < nc; j++) v[col_of(nc, i, r * nc + j)] = vals[i][r * nc + j];
    return v;
  endfunction

  function automatic longint from_rows(logic [31:0] rows[], int nc, int op, int nrows);
    longint v = 0;
    for (int k = 0; k < nrows * nc; k++) v[k] = rows[k / nc][col_of(nc, op, k)];
    return sext(v, nrows * nc);
  endfunction

  // ---- test ----------------------------------------------------------------------
  localparam int NC1 = 4, NP1 = 3, NW1 = 2, NOPS1 = NCOL / NC1;  // layer 1
  localparam int NP2 = 6, NW2 = 4, NOPS2 = NCOL;                 // layer 2, bit-serial
  localparam int NEV = 5;

  longint pot1[], w1a[], w1b[], thr1[], pot2[], w2[], thr2[];
  logic [31:0] prog[$];

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] rd, rows[];
    longint m1max, m1min, m2max, m2min, nthr[];
    int wsel[NEV];
    logic [31:0] c1, c2;
    int ba;

    pot1 = new[NOPS1]; w1a = new[NOPS1]; w1b = new[NOPS1]; thr1 = new[NOPS1];
    pot2 = new[NOPS2]; w2 = new[NOPS2]; thr2 = new[NOPS2];
    m1max = 2047; m1min = -2048; m2max = 31; m2min = -32;
    for (int i = 0; i < NOPS1; i++) begin
      pot1[i] = sext($urandom, 12) / 4;
      w1a[i]  = sext($urandom, 8);
      w1b[i]  = sext($urandom, 8);
      thr1[i] = $urandom_range(0, 600);
    end
    pot1[0] = 2000; w1a[0] = 100; w1b[0] = 90;     // saturates high
    pot1[1] = -2000; w1a[1] = -100; w1b[1] = -90;  // saturates low
    for (int i = 0; i < NOPS2; i++) begin
      pot2[i] = sext($urandom, 6);
      w2[i]   = sext($urandom, 4);
      thr2[i] = $urandom_range(0, 20);
    end
    pot2[3] = 30; w2[3] = 7;

    repeat (4) @(posedge clk);
    rst_n = 1'b1;
    repeat (4) @(posedge clk);

    // ---- buffer image -----------------------------------------------------------
    // 0,1 ctrl rows layer 1; 2..4 pot1; 5,6 w1a; 7,8 w1b; 9..11 -thr1
    // 12,13 ctrl rows layer 2; 14..19 pot2; 40..43 w2; 44..49 -thr2
    c1 = '0; c2 = '0;
    for (int i = 0; i < NOPS1; i++) begin
      {c1[i*NC1], c2[i*NC1]} = ST_LEFT;
      {c1[i*NC1+NC1-1], c2[i*NC1+NC1-1]} = ST_RIGHT;
    end
    spi_wr(8'h03, 0, c1);
    spi_wr(8'h03, 1, c2);
    for (int r = 0; r < NP1; r++) spi_wr(8'h03, 2 + r, row_word(pot1, NC1, r));
    for (int r = 0; r < NW1; r++) spi_wr(8'h03, 5 + r, row_word(w1a, NC1, r));
    for (int r = 0; r < NW1; r++) spi_wr(8'h03, 7 + r, row_word(w1b, NC1, r));
    nthr = new[NOPS1];
    for (int i = 0; i < NOPS1; i++) nthr[i] = -thr1[i];
    for (int r = 0; r < NP1; r++) spi_wr(8'h03, 9 + r, row_word(nthr, NC1, r));
    spi_wr(8'h03, 12, '1);   // all LEFT: {1,0}
    spi_wr(8'h03, 13, '0);
    for (int r = 0; r < NP2; r++) spi_wr(8'h03, 14 + r, row_word(pot2, 1, r));
    for (int r = 0; r < NW2; r++) spi_wr(8'h03, 40 + r, row_word(w2, 1, r));
    nthr = new[NOPS2];
    for (int i = 0; i < NOPS2; i++) nthr[i] = -thr2[i];
    for (int r = 0; r < NP2; r++) spi_wr(8'h03, 44 + r, row_word(nthr, 1, r));

    // ---- events: layer 1, potentials at row 100, kernels at rows 10 / 12 ----
    for (int e = 0; e < NEV; e++) begin
      wsel[e] = $urandom_range(0, 1);
      spi_wr(8'h02, e, 32'((wsel[e] ? 12 : 10) << 9 | 100));
    end

    // ---- program ------------------------------------------------------------------
    prog.push_back(instr(OP_CFG2, 28'(1 << 21 | 0 << 13 | 300)));         // 1 word, offset 0, spikes -> 300
    prog.push_back(instr(OP_LD,   28'(1 << 22 | 0 << 13 | 0)));           // ctrl #1
    prog.push_back(instr(OP_LD,   28'(2 << 22 | 0 << 13 | 1)));           // ctrl #2
    for (int r = 0; r < NP1; r++) prog.push_back(instr(OP_LD, 28'((100 + r) << 13 | (2 + r))));
    for (int r = 0; r < NW1; r++) prog.push_back(instr(OP_LD, 28'((10 + r) << 13 | (5 + r))));
    for (int r = 0; r < NW1; r++) prog.push_back(instr(OP_LD, 28'((12 + r) << 13 | (7 + r))));
    for (int r = 0; r < NP1; r++) prog.push_back(instr(OP_LD, 28'((40 + r) << 13 | (9 + r))));
    prog.push_back(instr(OP_CFG, 28'(NW1 << 9 | NP1)));
    prog.push_back(instr(OP_EVLOOP, 28'(NEV << 12 | 0)));
    prog.push_back(instr(OP_FIRE, 28'(40 << 9 | 100)));
    for (int r = 0; r < NP1; r++) prog.push_back(instr(OP_ST, 28'((100 + r) << 13 | (20 + r))));
    // layer 2: bit-serial, weights stationary at rows 50.., potentials loaded
    prog.push_back(instr(OP_CFG2, 28'(1 << 21 | 0 << 13 | 301)));
    prog.push_back(instr(OP_LD,   28'(1 << 22 | 0 << 13 | 12)));
    prog.push_back(instr(OP_LD,   28'(2 << 22 | 0 << 13 | 13)));
    for (int r = 0; r < NW2; r++) prog.push_back(instr(OP_LD, 28'((50 + r) << 13 | (40 + r))));
    for (int r = 0; r < NP2; r++) prog.push_back(instr(OP_LD, 28'((200 + r) << 13 | (14 + r))));
    for (int r = 0; r < NP2; r++) prog.push_back(instr(OP_LD, 28'((60 + r) << 13 | (44 + r))));
    prog.push_back(instr(OP_CFG, 28'(1 << 18 | NW2 << 9 | NP2)));
    prog.push_back(instr(OP_ADD, 28'(50 << 9 | 200)));
    prog.push_back(instr(OP_FIRE, 28'(60 << 9 | 200)));
    for (int r = 0; r < NP2; r++) prog.push_back(instr(OP_ST, 28'((200 + r) << 13 | (30 + r))));
    prog.push_back(instr(OP_HALT, 28'd0));
    foreach (prog[i]) spi_wr(8'h01, i, prog[i]);

    // ---- run ------------------------------------------------------------------------
    spi_wr(8'h05, 0, 32'd0);
    ba = 0;
    while (!ack && ba < 200000) begin
      @(posedge clk);
      ba++;
    end
    check(ack, "program did not finish");
    spi_frame(8'h06, 16'd0, 32'd0, rd);
    check(rd[0], "status done bit");

    // ---- reference model -----------------------------------------------------------
    for (int e = 0; e < NEV; e++)
      for (int i = 0; i < NOPS1; i++) begin
        longint s;
        s = pot1[i] + (wsel[e] ? w1b[i] : w1a[i]);
        pot1[i] = s > m1max ? m1max : s < m1min ? m1min : s;
      end
    for (int i = 0; i < NOPS2; i++) begin
      longint s;
      s = pot2[i] + w2[i];
      pot2[i] = s > m2max ? m2max : s < m2min ? m2min : s;
    end

    // ---- read back -------------------------------------------------------------------
    spi_frame(8'h04, 16'd300, 32'd0, rd);
    for (int i = 0; i < NOPS1; i++) begin
      bit sp;
      sp = (pot1[i] >= thr1[i]);
      check(rd[i * NC1 + (NP1 % 2 == 0 ? 0 : NC1 - 1)] == sp,
            $sformatf("layer 1 spike %0d: pot %0d thr %0d", i, pot1[i], thr1[i]));
      if (sp) pot1[i] = 0;
    end
    rows = new[NP1];
    for (int r = 0; r < NP1; r++) spi_frame(8'h04, 16'(20 + r), 32'd0, rows[r]);
    for (int i = 0; i < NOPS1; i++)
      check(from_rows(rows, NC1, i, NP1) == pot1[i],
            $sformatf("layer 1 potential %0d: %0d expected %0d", i, from_rows(rows, NC1, i, NP1), pot1[i]));

    spi_frame(8'h04, 16'd301, 32'd0, rd);
    for (int i = 0; i < NOPS2; i++) begin
      bit sp;
      sp = (pot2[i] >= thr2[i]);
      check(rd[i] == sp, $sformatf("layer 2 spike %0d", i));
      if (sp) pot2[i] = 0;
    end
    rows = new[NP2];
    for (int r = 0; r < NP2; r++) spi_frame(8'h04, 16'(30 + r), 32'd0, rows[r]);
    for (int i = 0; i < NOPS2; i++)
      check(from_rows(rows, 1, i, NP2) == pot2[i],
            $sformatf("layer 2 potential %0d: %0d expected %0d", i, from_rows(rows, 1, i, NP2), pot2[i]));

    // ---- mechanisms ------------------------------------------------------------------
    $display("signcap=%0d rl_rows=%0d saturations=%0d spike_fires=%0d resets=%0d serial_rows=%0d loads=%0d stores=%0d",
             n_signcap, n_rl, n_sat, n_spk, n_clr, n_serial, n_ld, n_st);
    check(n_signcap > 0, "sign extension never happened");
    check(n_rl > 0, "no right-to-left row");
    check(n_sat > 0, "no saturation");
    check(n_spk > 0, "no spike");
    check(n_clr > 0, "no potential reset");
    check(n_serial > 0, "no bit-serial row");
    check(n_ld > 0 && n_st > 0, "no buffer transfer");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
