// tb_dual_addr_decoder -- checks the two row decoders of the CIM array:
// ADDR#1 (9 bits) reaches all 512 rows, ADDR#2 (8 bits) the lower 256 rows,
// each enable gates its wordline vector, and each vector is one-hot. All
// addresses are swept; outputs are checked 1 ns after the inputs change.
module tb_dual_addr_decoder;
  import flexspim_pkg::*;
  timeunit 1ns;
  timeprecision 100ps;

  logic [A1W-1:0]  addr1;
  logic [A2W-1:0]  addr2;
  logic            en1, en2;
  logic [ROWS-1:0] wl1, wl2;
  int checks = 0, failures = 0;

  dual_addr_decoder dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    #100000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    for (int a = 0; a < 512; a++) begin
      addr1 = A1W'(a);
      addr2 = A2W'(a);
      {en1, en2} = 2'b11;
      #1;
      check(wl1 == (ROWS'(1) << a), $sformatf("wl1 addr %0d", a));
      check(wl2 == (ROWS'(1) << (a % 256)), $sformatf("wl2 addr %0d", a));
      {en1, en2} = 2'(a);
      #1;
      check(en1 ? $onehot(wl1) : wl1 == '0, "en1 gating");
      check(en2 ? $onehot(wl2) : wl2 == '0, "en2 gating");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
