// tb_eb_row -- checks the emulation-bit row: it resets to zero, a write
// changes only the columns selected by wcol, the new value is visible one
// clock after the write (write latency 1), and without we the row holds.
// Compared against a model row over random masked writes.
module tb_eb_row;
  import flexspim_pkg::*;
  timeunit 1ns;
  timeprecision 100ps;

  logic clk = 1'b0, rst_n = 1'b0, we = 1'b0;
  logic [COLS-1:0] wcol = '0, wbit = '0, eb, model;
  int checks = 0, failures = 0;
  always #1 clk = ~clk;

  eb_row dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    checks++;
    if (eb !== '0) failures++;
    rst_n <= 1'b1;
    model = '0;
    for (int t = 0; t < 500; t++) begin
      @(negedge clk);
      we = 1'($urandom_range(0, 1));
      for (int i = 0; i < COLS / 32; i++) begin
        wcol[i*32 +: 32] = $urandom;
        wbit[i*32 +: 32] = $urandom;
      end
      @(posedge clk);
      if (we) model = (model & ~wcol) | (wbit & wcol);
      #0.5;
      checks++;
      if (eb !== model) begin
        failures++;
        if (failures < 10) $display("FAIL at write %0d", t);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
