// tb_input_mem -- checks the 1088 x 32-bit (4.25 kB) input memory that
// holds one timestep of input events: every word is written, then read back
// in random order with a one-clock read latency, and a read with re low
// keeps the previous output.
module tb_input_mem;
  import flexspim_pkg::*;
  timeunit 1ns;
  timeprecision 100ps;

  localparam int unsigned AW = $clog2(INMEM_WORDS);

  logic clk = 1'b0, we = 1'b0, re = 1'b0;
  logic [AW-1:0]   waddr = '0, raddr = '0;
  logic [WORD-1:0] wdata = '0, rdata;
  logic [WORD-1:0] model [INMEM_WORDS];
  int checks = 0, failures = 0;
  always #1 clk = ~clk;

  input_mem dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    logic [WORD-1:0] last;
    for (int a = 0; a < INMEM_WORDS; a++) begin
      @(negedge clk);
      we = 1'b1;
      waddr = AW'(a);
      wdata = $urandom;
      model[a] = wdata;
    end
    @(negedge clk);
    we = 1'b0;
    for (int t = 0; t < 3000; t++) begin
      re = 1'b1;
      raddr = AW'($urandom_range(0, INMEM_WORDS - 1));
      @(posedge clk);
      @(negedge clk);
      checks++;
      if (rdata !== model[raddr]) begin
        failures++;
        if (failures < 10) $display("FAIL addr %0d", raddr);
      end
      last = rdata;
      re = 1'b0;
      raddr = raddr + 1'b1;
      @(posedge clk);
      @(negedge clk);
      checks++;
      if (rdata !== last) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
