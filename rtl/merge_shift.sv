// merge_shift -- 32-to-256-bit bandwidth-adaptive merge-and-shift unit.
//
// Aligns buffer words with the CIM columns their operands occupy, whatever
// the operand shape. Load direction (buffer -> macro): the first nwords
// 32-bit words of the buffer read (1 to 8, i.e. 32 to 256 bits) are merged
// into one row and shifted left by 'offset' columns; row_mask marks the
// columns the row covers, so a write leaves the other columns of the macro
// row untouched. Store direction (macro -> buffer): the macro row is shifted
// right by 'offset' so that column 'offset' lands in bit 0 of word 0;
// words beyond nwords are zero. Purely combinational. The function (32 to
// 256 bits, alignment for arbitrary configurations) follows the paper; the
// offset/word-count interface is this design's.
module merge_shift
  import flexspim_pkg::*;
#(
  parameter int unsigned COLS_P = COLS
) (
  input  logic [3:0]            nwords,   // 1..8
  input  logic [7:0]            offset,   // first column
  // load direction
  input  logic [MAXW*WORD-1:0]  buf_words,
  output logic [COLS_P-1:0]     row_data,
  output logic [COLS_P-1:0]     row_mask,
  // store direction
  input  logic [COLS_P-1:0]     macro_row,
  output logic [MAXW*WORD-1:0]  store_words
);

  logic [MAXW*WORD-1:0] wmask;
  logic [COLS_P-1:0]    shifted;

  always_comb begin
    wmask = '0;
    for (int k = 0; k < int'(MAXW); k++)
      if (k < int'(nwords)) wmask[WORD*k +: WORD] = '1;
    row_data    = COLS_P'(buf_words & wmask) << offset;
    row_mask    = COLS_P'(wmask) << offset;
    shifted     = macro_row >> offset;
    store_words = (MAXW*WORD)'(shifted) & wmask;
  end

endmodule
