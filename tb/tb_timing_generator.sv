// tb_timing_generator -- checks the sub-cycle sequencer of the CIM macro.
// An accepted start begins a 6-clock operation (942 MHz internal clock,
// 157 MHz operation rate): precharge, read, compute, precharge, write,
// done. The test checks the phase pattern clock by clock, that exactly one
// phase is active per clock, that done comes 6 clocks after accept, that a
// start held high chains operations back to back (accepted in the done
// clock) and that starts with gaps return the generator to idle.
module tb_timing_generator;
  import flexspim_pkg::*;
  timeunit 1ns;
  timeprecision 100ps;

  logic   clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic   accept, busy, done;
  phase_t ph;
  int checks = 0, failures = 0;
  always #1 clk = ~clk;

  timing_generator dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  // expected phase per sub-cycle index: {prech, read, comp, write, done}
  function automatic logic [4:0] pattern(int k);
    unique case (k)
      0: return 5'b10000;
      1: return 5'b01000;
      2: return 5'b00100;
      3: return 5'b10000;
      4: return 5'b00010;
      default: return 5'b00001;
    endcase
  endfunction

  initial begin
    repeat (3) @(negedge clk);
    check(!busy && !done && ph == '0, "idle after reset");
    rst_n = 1'b1;
    // single operations separated by gaps
    for (int op = 0; op < 4; op++) begin
      repeat (op + 1) @(negedge clk);
      start = 1'b1;
      #0.1 check(accept, "start accepted when idle");
      @(negedge clk);
      start = 1'b0;
      for (int k = 0; k < SUBCYC; k++) begin
        check({ph.prech, ph.read, ph.comp, ph.write, done} == pattern(k),
              $sformatf("single op: phase at sub-cycle %0d", k));
        check(busy, "busy during operation");
        @(negedge clk);
      end
      check(!busy && !done && ph == '0, "idle 6 clocks after accept");
    end
    // start held high: operations chain back to back, accepted in done clock
    @(negedge clk);
    start = 1'b1;
    @(negedge clk);
    for (int op = 0; op < 4; op++) begin
      for (int k = 0; k < SUBCYC; k++) begin
        check({ph.prech, ph.read, ph.comp, ph.write, done} == pattern(k),
              $sformatf("chained op %0d: phase at sub-cycle %0d", op, k));
        check(accept == (k == SUBCYC - 1), "accept only in the done clock");
        @(negedge clk);
      end
    end
    start = 1'b0;
    for (int k = 0; k < SUBCYC; k++) @(negedge clk);
    check(!busy, "idle after start released");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
