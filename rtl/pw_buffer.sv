// pw_buffer -- potential/weight buffer: 4 x 4 banks of 2 kB SRAM.
//
// Holds the operands that are not stationary in the CIM macro: weights of
// layers run output-stationary, membrane potentials of layers run
// weight-stationary. 16 banks of 512 x 32-bit words give 8192 word
// addresses; consecutive addresses are interleaved over the banks
// (bank = addr mod 16, word = addr / 16), so one access can move 1 to 8
// consecutive words (32 to 256 bits) in one clock, each from its own bank.
// Word k of wdata/rdata is bits [32k+31:32k] and belongs to address addr+k.
// Reads return data one clock after the request. Bank count and size follow
// the paper; the interleaving and port are this design's.
module pw_buffer
  import flexspim_pkg::*;
#(
  parameter int unsigned NBANKS_P = NBANKS,
  parameter int unsigned BWORDS_P = BANK_WORDS,
  localparam int unsigned BW      = $clog2(NBANKS_P),
  localparam int unsigned IW      = $clog2(BWORDS_P),
  localparam int unsigned AW      = BW + IW
) (
  input  logic                  clk,
  input  logic                  en,
  input  logic                  we,
  input  logic [AW-1:0]         addr,
  input  logic [3:0]            nwords,   // 1..8
  input  logic [MAXW*WORD-1:0]  wdata,
  output logic [MAXW*WORD-1:0]  rdata
);

  logic [NBANKS_P-1:0] b_en;
  logic [IW-1:0]       b_idx   [NBANKS_P];
  logic [WORD-1:0]     b_wdata [NBANKS_P];
  logic [WORD-1:0]     b_rdata [NBANKS_P];
  logic [BW-1:0]       base_q;

  // route word k of the access to bank (addr + k) mod NBANKS_P
  always_comb begin
    for (int b = 0; b < int'(NBANKS_P); b++) begin
      logic [BW-1:0] k;
      logic [AW-1:0] a;
      k          = BW'(b) - addr[BW-1:0];
      a          = addr + AW'(k);
      b_en[b]    = en && (int'(k) < int'(nwords)) && (int'(k) < int'(MAXW));
      b_idx[b]   = a[AW-1:BW];
      b_wdata[b] = wdata[WORD*(int'(k) % int'(MAXW)) +: WORD];
    end
  end

  for (genvar b = 0; b < int'(NBANKS_P); b++) begin : g_bank
    sram_bank #(.WORDS_P(BWORDS_P), .WIDTH_P(WORD)) u_bank (
      .clk, .en(b_en[b]), .we, .addr(b_idx[b]), .wdata(b_wdata[b]), .rdata(b_rdata[b])
    );
  end

  always_ff @(posedge clk) if (en && !we) base_q <= addr[BW-1:0];

  always_comb begin
    for (int k = 0; k < int'(MAXW); k++) rdata[WORD*k +: WORD] = b_rdata[BW'(k) + base_q];
  end

endmodule
