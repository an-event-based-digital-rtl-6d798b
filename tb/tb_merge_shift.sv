// tb_merge_shift -- checks the merge-and-shift unit between the 32-bit
// buffer words and a 256-bit macro row: for random word counts (1-8) and
// column offsets, the loaded row must hold the merged words starting at the
// offset with a matching write mask, and the stored words must be the row
// bits taken back from the same position. Combinational; checked 1 ns after
// each input change.
module tb_merge_shift;
  import flexspim_pkg::*;
  timeunit 1ns;
  timeprecision 100ps;

  logic [3:0]           nwords;
  logic [7:0]           offset;
  logic [MAXW*WORD-1:0] buf_words, store_words;
  logic [COLS-1:0]      row_data, row_mask, macro_row;
  int checks = 0, failures = 0;

  merge_shift dut (.*);

  initial begin
    #100000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    logic [COLS-1:0] em, ed;
    logic [MAXW*WORD-1:0] es;
    int nb;
    for (int t = 0; t < 2000; t++) begin
      nwords = 4'($urandom_range(1, 8));
      nb = int'(nwords) * WORD;
      offset = 8'($urandom_range(0, COLS - nb));
      for (int i = 0; i < MAXW; i++) buf_words[i*WORD +: WORD] = $urandom;
      for (int i = 0; i < COLS / WORD; i++) macro_row[i*WORD +: WORD] = $urandom;
      #1;
      em = '0;
      ed = '0;
      es = '0;
      for (int b = 0; b < nb; b++) begin
        em[offset + b] = 1'b1;
        ed[offset + b] = buf_words[b];
        es[b] = macro_row[offset + b];
      end
      checks++;
      if (row_mask !== em || (row_data & em) !== ed || store_words !== es) begin
        failures++;
        if (failures < 10) $display("FAIL nwords=%0d offset=%0d", nwords, offset);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
