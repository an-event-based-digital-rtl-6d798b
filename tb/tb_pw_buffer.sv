// tb_pw_buffer -- checks the 16 x 2 kB interleaved potential/weight buffer:
// random multi-word writes (1-8 consecutive words starting at any address,
// crossing bank boundaries) update a model of the 8192-word space; random
// multi-word reads must return the consecutive words, lowest address in the
// lowest 32 bits, one clock after the request (read latency 1).
module tb_pw_buffer;
  import flexspim_pkg::*;
  timeunit 1ns;
  timeprecision 100ps;

  localparam int unsigned NW = NBANKS * BANK_WORDS;

  logic clk = 1'b0, en = 1'b0, we = 1'b0;
  logic [BUF_AW-1:0]    addr = '0;
  logic [3:0]           nwords = 4'd1;
  logic [MAXW*WORD-1:0] wdata = '0, rdata;
  logic [WORD-1:0] model [NW];
  bit              valid [NW];
  int checks = 0, failures = 0;
  always #1 clk = ~clk;

  pw_buffer dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    int n, a0;
    for (int t = 0; t < 6000; t++) begin
      @(negedge clk);
      n = $urandom_range(1, 8);
      a0 = $urandom_range(0, 255) + (t % 2) * $urandom_range(0, NW - 264);
      en = 1'b1;
      we = (t < 600) || ($urandom_range(0, 1) == 1);
      addr = BUF_AW'(a0);
      nwords = 4'(n);
      for (int i = 0; i < MAXW; i++) wdata[i*WORD +: WORD] = $urandom;
      @(posedge clk);
      if (we) begin
        for (int i = 0; i < n; i++) begin
          model[a0 + i] = wdata[i*WORD +: WORD];
          valid[a0 + i] = 1'b1;
        end
      end else begin
        @(negedge clk);
        en = 1'b0;
        for (int i = 0; i < n; i++) if (valid[a0 + i]) begin
          checks++;
          if (rdata[i*WORD +: WORD] !== model[a0 + i]) begin
            failures++;
            if (failures < 10) $display("FAIL read addr %0d word %0d", a0, i);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
