// sram_bank -- generic single-port synchronous SRAM bank (helper).
//
// WORDS_P words of WIDTH_P bits. One access per clock: with en high, a write
// (we high) stores wdata at addr, a read returns the word at addr on rdata
// in the next cycle. Used for the buffer banks and as storage inside the
// instruction and input memories. The contents are not reset.
module sram_bank #(
  parameter int unsigned WORDS_P = 512,
  parameter int unsigned WIDTH_P = 32,
  localparam int unsigned AW     = $clog2(WORDS_P)
) (
  input  logic               clk,
  input  logic               en,
  input  logic               we,
  input  logic [AW-1:0]      addr,
  input  logic [WIDTH_P-1:0] wdata,
  output logic [WIDTH_P-1:0] rdata
);

  logic [WIDTH_P-1:0] mem [WORDS_P];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) mem[addr] <= wdata;
      else    rdata     <= mem[addr];
    end
  end

endmodule
