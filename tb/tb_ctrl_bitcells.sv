// tb_ctrl_bitcells -- checks the two control-bitcell rows: after reset all
// columns are INACTIVE (11), a write to row #1 or #2 changes only the
// selected bits of the masked columns, one clock later the per-column state
// {ctrl#1, ctrl#2} reflects it (write latency 1), and idle cycles hold.
module tb_ctrl_bitcells;
  import flexspim_pkg::*;
  timeunit 1ns;
  timeprecision 100ps;

  logic clk = 1'b0, rst_n = 1'b0, we = 1'b0, sel = 1'b0;
  logic [COLS-1:0] wcol = '0, wbit = '0, m1, m2;
  pc_state_e state [COLS];
  int checks = 0, failures = 0;
  always #1 clk = ~clk;

  ctrl_bitcells dut (.*);

  task automatic compare(input string what);
    for (int c = 0; c < COLS; c++) begin
      checks++;
      if (state[c] !== pc_state_e'({m1[c], m2[c]})) begin
        failures++;
        if (failures < 10) $display("FAIL %s col %0d", what, c);
      end
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    m1 = '1;
    m2 = '1;
    repeat (2) @(posedge clk);
    compare("reset");
    rst_n <= 1'b1;
    for (int t = 0; t < 200; t++) begin
      @(negedge clk);
      we = $urandom_range(0, 3) != 0;
      sel = 1'($urandom_range(0, 1));
      for (int i = 0; i < COLS / 32; i++) begin
        wcol[i*32 +: 32] = $urandom;
        wbit[i*32 +: 32] = $urandom;
      end
      @(posedge clk);
      if (we && !sel) m1 = (m1 & ~wcol) | (wbit & wcol);
      if (we && sel)  m2 = (m2 & ~wcol) | (wbit & wcol);
      #0.5;
      compare("write");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
