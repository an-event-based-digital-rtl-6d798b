// tb_cim_sram_array -- checks the CIM SRAM array (64 rows x 32 columns here
// to keep the model small): masked row writes through wordline 1 with one
// clock of write latency, single-wordline reads (BL = data, BLB = ~data),
// dual-wordline reads (BL = A AND B, BLB = NOT(A OR B)) and reads that
// include the emulation-bit row. Reads are combinational from the
// wordlines and checked 1 ns after they change.
module tb_cim_sram_array;
  import flexspim_pkg::*;
  timeunit 1ns;
  timeprecision 100ps;

  localparam int unsigned R = 64, C = 32;

  logic clk = 1'b0, eb_wl = 1'b0, we = 1'b0;
  logic [R-1:0] wl1 = '0, wl2 = '0;
  logic [C-1:0] eb = '0, wcol = '0, wbit = '0, bl, blb;
  logic [C-1:0] model [R];
  int checks = 0, failures = 0;
  always #1 clk = ~clk;

  cim_sram_array #(.ROWS_P(R), .COLS_P(C)) dut (.*);

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

  initial begin
    int a, b, kind;
    logic [C-1:0] ea, eb_exp;
    // fill every row with a full write
    for (int r = 0; r < R; r++) begin
      @(negedge clk);
      wl1 = R'(1) << r;
      we = 1'b1;
      wcol = '1;
      wbit = $urandom;
      model[r] = wbit;
    end
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      a = $urandom_range(0, R - 1);
      b = $urandom_range(0, R - 1);
      kind = $urandom_range(0, 3);
      unique case (kind)
        0: begin  // masked write
          wl1 = R'(1) << a; wl2 = '0; eb_wl = 1'b0; we = 1'b1;
          wcol = $urandom; wbit = $urandom;
          @(posedge clk);
          model[a] = (model[a] & ~wcol) | (wbit & wcol);
          @(negedge clk);
          we = 1'b0;
          #1 check(bl == model[a] && blb == ~model[a], "read after write");
        end
        1: begin  // single read
          we = 1'b0; wl1 = R'(1) << a; wl2 = '0; eb_wl = 1'b0;
          #1 check(bl == model[a] && blb == ~model[a], "single read");
        end
        2: begin  // dual read
          we = 1'b0; wl1 = R'(1) << a; wl2 = R'(1) << b; eb_wl = 1'b0;
          #1 check(bl == (model[a] & model[b]) && blb == ~(model[a] | model[b]), "dual read");
        end
        default: begin  // one stored row with the EB row
          we = 1'b0; wl1 = R'(1) << a; wl2 = '0; eb_wl = 1'b1; eb = $urandom;
          ea = model[a];
          eb_exp = eb;
          #1 check(bl == (ea & eb_exp) && blb == ~(ea | eb_exp), "read with EB row");
        end
      endcase
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
