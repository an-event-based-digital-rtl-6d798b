// tb_cim_macro -- self-checking testbench of the CIM macro.
//
// For several operand shapes (N_C columns, np potential rows, nw weight
// rows: 3x4 potential with 2x4 weight, 2x5 with 1x5, 3x3 with 2x3, 8x2 with
// 8x2, a bit-serial 6x1 with 4x1, and a 1x8 weight broadcast from the EB
// row) it tiles all the columns (32 here) with operands, writes random potentials,
// weights and negated thresholds in the ping-pong bit order, and drives the
// macro operation by operation as the controller does: sign capture, one
// ADD per row with the carry-select code of that row, saturation fix-up,
// compare, clear of spiking neurons. Reads every row back and checks the
// values against a saturating signed-arithmetic model, checks the spike
// vector, that leftover INACTIVE columns are untouched, and that operations
// issued back to back complete one per 6 clocks.
module tb_cim_macro;
  import flexspim_pkg::*;
  timeunit 1ns;
  timeprecision 100ps;

  // 32 columns keep the build short; the rows stay at 512.
  localparam int unsigned NCOL = 32;

  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;

  logic              op_valid = 1'b0;
  mctrl_t            op_ctl;
  logic [NCOL-1:0]   op_wdata, op_wmask;
  logic              op_accept, busy, done, any_flag;
  logic [NCOL-1:0]   rdata, flags_end;
  pc_state_e         state [NCOL];

  cim_macro #(.COLS_P(NCOL)) dut (.*);

  int checks = 0, failures = 0;
  int n_sat = 0, n_spk = 0, n_signcap = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // ---- one macro operation ------------------------------------------------
  task automatic do_op(input mop_e op, input int a1, input int a2, input bit eb,
                       input csel_e sel, input bit seq, input bit last,
                       input bit end_left, input bit serial,
                       input logic [NCOL-1:0] wd, input logic [NCOL-1:0] wm);
    op_ctl = '0;
    op_ctl.op = op;
    op_ctl.addr1 = A1W'(a1);
    op_ctl.addr2 = A2W'(a2);
    op_ctl.src2_eb = eb;
    op_ctl.sel = sel;
    op_ctl.seq = seq;
    op_ctl.last = last;
    op_ctl.end_left = end_left;
    op_ctl.serial = serial;
    op_wdata = wd;
    op_wmask = wm;
    op_valid = 1'b1;
    do @(posedge clk); while (!op_accept);
    #0.1 op_valid = 1'b0;
    do @(posedge clk); while (!done);
    #0.1;
  endtask

  // ---- operand layout --------------------------------------------------------
  int nc, np, nw, nops;
  bit ser;
  localparam int PB = 100, WB = 10, TB = 40, SPARE = 200;

  function automatic int col_of(int op, int k);
    int r = k / nc, j = k % nc;
    return (r % 2 == 0) ? op * nc + j : op * nc + nc - 1 - j;
  endfunction

  // row r of the operands in vals (bits = rows*nc)
  function automatic logic [NCOL-1:0] row_bits(longint vals[], int r);
    logic [NCOL-1:0] v = '0;
    for (int i = 0; i < nops; i++)
      for (int j = 0; j < nc; j++) begin
        int k = r * nc + j;
        v[col_of(i, k)] = vals[i][k];
      end
    return v;
  endfunction

  task automatic write_operands(longint vals[], int base, int rows);
    logic [NCOL-1:0] m = '0;
    for (int i = 0; i < nops * nc; i++) m[i] = 1'b1;
    for (int r = 0; r < rows; r++)
      do_op(MOP_WRROW, base + r, 0, 0, SEL_LR_FIRST, 0, 0, 0, 0, row_bits(vals, r), m);
  endtask

  task automatic read_operands(ref longint vals[], input int base, input int rows);
    for (int i = 0; i < nops; i++) vals[i] = 0;
    for (int r = 0; r < rows; r++) begin
      do_op(MOP_RDROW, base + r, 0, 0, SEL_LR_FIRST, 0, 0, 0, 0, '0, '0);
      for (int i = 0; i < nops; i++)
        for (int j = 0; j < nc; j++) begin
          int k = r * nc + j;
          vals[i][k] = rdata[col_of(i, k)];
        end
    end
  endtask

  function automatic longint sext(longint v, int bits);
    return (v << (64 - bits)) >>> (64 - bits);
  endfunction

  function automatic csel_e sel_of(int r);
    if (ser) return SEL_SERIAL;
    if (r == 0) return SEL_LR_FIRST;
    return (r % 2 == 1) ? SEL_RL : SEL_LR_NEXT;
  endfunction

  // ---- one shape ---------------------------------------------------------------
  task automatic run_shape(int nc_i, int np_i, int nw_i, bit ser_i, bit use_eb);
    longint pot[], wt[], thr[], got[];
    logic [NCOL-1:0] c1, c2, m, spare_before, spare_after;
    int pbits, wbits;
    longint pmax, pmin;
    nc = nc_i; np = np_i; nw = nw_i; ser = ser_i;
    nops = NCOL / nc;
    pbits = np * nc; wbits = nw * nc;
    pmax = (64'sd1 <<< (pbits - 1)) - 1;
    pmin = -(64'sd1 <<< (pbits - 1));
    pot = new[nops]; wt = new[nops]; thr = new[nops]; got = new[nops];

    // control bitcells: tile operands, leftover columns INACTIVE
    c1 = '1; c2 = '1; m = '1;
    for (int i = 0; i < nops; i++)
      for (int j = 0; j < nc; j++) begin
        pc_state_e s = ser ? ST_LEFT : (j == 0) ? ST_LEFT : (j == nc - 1) ? ST_RIGHT : ST_MIDDLE;
        {c1[i*nc+j], c2[i*nc+j]} = s;
      end
    do_op(MOP_WRCTRL, 0, 0, 0, SEL_LR_FIRST, 0, 0, 0, 0, c1, m);
    do_op(MOP_WRCTRL, 1, 0, 0, SEL_LR_FIRST, 0, 0, 0, 0, c2, m);
    for (int c = 0; c < NCOL; c++) check(state[c] == pc_state_e'({c1[c], c2[c]}), "ctrl state");

    // random operands; spare pattern in the potential rows of unused columns
    for (int i = 0; i < nops; i++) begin
      pot[i] = sext({$urandom, $urandom}, pbits);
      if (i % 3 == 0) pot[i] = (i % 2) ? pmax - 2 : pmin + 2;   // force overflows
      wt[i]  = sext({$urandom, $urandom}, wbits);
      if (i % 3 == 0) wt[i] = (i % 2) ? (wbits > 2 ? 3 : 1) : -3;
      thr[i] = sext({$urandom, $urandom}, pbits - 1);
      if (thr[i] < 0) thr[i] = -thr[i];
    end
    for (int r = 0; r < np; r++) begin
      logic [NCOL-1:0] pat = NCOL'({8{$urandom}});
      logic [NCOL-1:0] um = '0;
      for (int c = nops * nc; c < NCOL; c++) um[c] = 1'b1;
      do_op(MOP_WRROW, PB + r, 0, 0, SEL_LR_FIRST, 0, 0, 0, 0, pat, um);
      if (r == 0) spare_before = pat;
    end
    write_operands(pot, PB, np);
    if (use_eb) begin
      logic [NCOL-1:0] em = '1;
      do_op(MOP_WREB, 0, 0, 0, SEL_LR_FIRST, 0, 0, 0, 0, row_bits(wt, 0), em);
    end else begin
      write_operands(wt, WB, nw);
    end
    begin
      longint nthr[] = new[nops];
      for (int i = 0; i < nops; i++) nthr[i] = -thr[i];
      write_operands(nthr, TB, np);
    end

    // ---- ADD, as the controller sequences it ----
    if (np > nw && !use_eb) begin
      do_op(MOP_SIGNCAP, 0, WB + nw - 1, 0, sel_of(0), 0, 0, (nw % 2 == 0), ser, '0, '0);
      n_signcap++;
    end
    begin
      int t0, t1;
      t0 = 0;
      for (int r = 0; r < np; r++) begin
        op_ctl = '0;
        op_ctl.op = MOP_ADD;
        op_ctl.addr1 = A1W'(PB + r);
        op_ctl.addr2 = A2W'(WB + r);
        op_ctl.src2_eb = use_eb || (r >= nw);
        op_ctl.sel = sel_of(r);
        op_ctl.seq = (r != 0);
        op_ctl.last = (r == np - 1);
        op_ctl.end_left = (np % 2 == 0);
        op_ctl.serial = ser;
        op_valid = 1'b1;
        do begin @(posedge clk); t1++; end while (!op_accept);
        if (r == 0) t1 = 0;
        #0.1;
      end
      op_valid = 1'b0;
      do begin @(posedge clk); t1++; end while (!done);
      #0.1;
      check(t1 == 6 * np, $sformatf("ADD of %0d rows took %0d clocks, expected %0d", np, t1, 6 * np));
    end
    if (any_flag) begin
      n_sat++;
      for (int r = 0; r < np; r++)
        do_op(MOP_FIX_SAT, PB + r, 0, 0, sel_of(r), 0, r == np - 1, (np % 2 == 0), ser, '0, '0);
    end
    read_operands(got, PB, np);
    for (int i = 0; i < nops; i++) begin
      longint s = pot[i] + wt[i];
      if (s > pmax) s = pmax;
      if (s < pmin) s = pmin;
      check(sext(got[i], pbits) == s,
            $sformatf("shape %0dx%0d op %0d: %0d + %0d gave %0d, expected %0d",
                      np, nc, i, pot[i], wt[i], sext(got[i], pbits), s));
      pot[i] = s;
    end

    // ---- FIRE ----
    for (int r = 0; r < np; r++)
      do_op(MOP_CMP, PB + r, TB + r, 0, sel_of(r), r != 0, r == np - 1, (np % 2 == 0), ser, '0, '0);
    for (int i = 0; i < nops; i++) begin
      int ec = ser ? i : (np % 2 == 0) ? i * nc : i * nc + nc - 1;
      bit exp_spk = (pot[i] >= thr[i]);
      check(flags_end[ec] == exp_spk, $sformatf("spike op %0d: %0d vs thr %0d", i, pot[i], thr[i]));
      if (exp_spk) begin
        pot[i] = 0;
        n_spk++;
      end
    end
    if (any_flag)
      for (int r = 0; r < np; r++)
        do_op(MOP_FIX_CLR, PB + r, 0, 0, sel_of(r), 0, r == np - 1, (np % 2 == 0), ser, '0, '0);
    read_operands(got, PB, np);
    for (int i = 0; i < nops; i++)
      check(sext(got[i], pbits) == pot[i], $sformatf("after reset op %0d: %0d vs %0d", i, sext(got[i], pbits), pot[i]));
    do_op(MOP_RDROW, PB, 0, 0, SEL_LR_FIRST, 0, 0, 0, 0, '0, '0);
    spare_after = rdata;
    for (int c = nops * nc; c < NCOL; c++)
      check(spare_after[c] == spare_before[c], "inactive column changed");
  endtask

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    op_ctl = '0; op_wdata = '0; op_wmask = '0;
    repeat (3) @(posedge clk);
    #0.1 rst_n = 1'b1;
    run_shape(4, 3, 2, 0, 0);   // 3x4 potential, 2x4 weight
    run_shape(5, 2, 1, 0, 0);   // 10b / 5b
    run_shape(3, 3, 2, 0, 0);   // 9b / 6b
    run_shape(2, 8, 8, 0, 0);   // 16b, 8x2 shape, equal rows
    run_shape(1, 6, 4, 1, 0);   // bit-serial
    run_shape(8, 1, 1, 0, 1);   // weight broadcast from the EB row
    check(n_sat > 0, "saturation never happened");
    check(n_spk > 0, "no spike");
    check(n_signcap > 0, "no sign extension");
    $display("saturations=%0d spikes=%0d signcaps=%0d", n_sat, n_spk, n_signcap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
