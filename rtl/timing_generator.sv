// timing_generator -- splits each CIM operation into its phases.
//
// One CIM operation lasts one system clock period, which is SUBCYC_P = 6
// periods of the fast internal clock (942 MHz / 157 MHz in the paper). This
// block runs on the fast clock and counts the six sub-cycles of an
// operation, raising one phase strobe per sub-cycle:
//   sub-cycle 0  prech  1) BL/BLB precharge
//   sub-cycle 1  read   2) both wordlines on, sense amplifiers latch AND/NOR
//   sub-cycle 2  comp   3) sum and carry-out, carry register update
//   sub-cycle 3  prech  4) half-select-prevention precharge
//   sub-cycle 4  write  5) write-back of the new bit
//   sub-cycle 5  -      operation ends (done), next one may start
// Handshake: start requests an operation; accept is high in the clock
// cycle in which the request is taken (the requester latches its control
// then). A request that arrives in sub-cycle 5 of a running operation
// starts the next one with no gap, so a stream of requests runs at one
// operation per SUBCYC_P clocks. The five phases and their order are the
// paper's; the one-sub-cycle-per-phase schedule is this design's choice.
module timing_generator
  import flexspim_pkg::*;
#(
  parameter int unsigned SUBCYC_P = SUBCYC
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   start,
  output logic   accept,
  output logic   busy,
  output logic   done,
  output phase_t ph
);

  localparam int unsigned CW = $clog2(SUBCYC_P);
  logic [CW-1:0] cnt;

  assign done   = busy && (cnt == CW'(SUBCYC_P - 1));
  assign accept = start && (!busy || done);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      cnt  <= '0;
    end else if (accept) begin
      busy <= 1'b1;
      cnt  <= '0;
    end else if (done) begin
      busy <= 1'b0;
      cnt  <= '0;
    end else if (busy) begin
      cnt <= cnt + 1'b1;
    end
  end

  always_comb begin
    ph.prech = busy && (cnt == CW'(0) || cnt == CW'(3));
    ph.read  = busy && (cnt == CW'(1));
    ph.comp  = busy && (cnt == CW'(2));
    ph.write = busy && (cnt == CW'(4));
  end

  initial assert (SUBCYC_P >= 6) else $error("timing_generator needs at least 6 sub-cycles");

endmodule
