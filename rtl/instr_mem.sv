// instr_mem -- 11.5 kB instruction memory of the controller.
//
// Holds the program that the controller FSM executes: 2944 words of 32 bits
// (11.5 kB, the size given for the chip). It has one write port, fed from
// the SPI port while the controller is idle, and one read port for
// instruction fetch; both are synchronous, the read data appears one clock
// after the address. Size follows the paper; the 32-bit word and the
// two-port organisation are this design's choices.
module instr_mem
  import flexspim_pkg::*;
#(
  parameter int unsigned WORDS_P = IMEM_WORDS,
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
