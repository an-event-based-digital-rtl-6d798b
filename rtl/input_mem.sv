// input_mem -- 4.25 kB input memory buffering one timestep of input events.
//
// 1088 words of 32 bits (4.25 kB, the size given for the chip). The host
// writes the events of a timestep through the SPI port; the controller's
// EVLOOP instruction reads them back one per event. Each word is one event
// prepared by the host: bits [8:0] give the base row of the membrane
// potentials it updates and bits [16:9] the base row of the weights to add.
// Writes and reads are synchronous, read data one clock after the address.
// Size and purpose follow the paper; the event format is this design's.
module input_mem
  import flexspim_pkg::*;
#(
  parameter int unsigned WORDS_P = INMEM_WORDS,
  localparam int unsigned AW     = $clog2(WORDS_P)
) (
  input  logic            clk,
  input  logic            we,
  input  logic [AW-1:0]   waddr,
  input  logic [WORD-1:0] wdata,
  input  logic            re,
  input  logic [AW-1:0]   raddr,
  output logic [WORD-1:0] rdata
);

  logic [WORD-1:0] mem [WORDS_P];

  always_ff @(posedge clk) begin
    if (we && int'(waddr) < int'(WORDS_P)) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end

endmodule
