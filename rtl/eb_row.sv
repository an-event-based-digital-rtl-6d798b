// eb_row -- the 1 x 256 row of emulation bits (EBs) of the CIM macro.
//
// The EB row can replace a stored operand row during a CIM read (see
// cim_sram_array, input eb_wl). Two uses follow from the paper: sign-bit
// extension of a weight that has fewer rows than the membrane potential
// (the PCs write each weight's sign into the EBs of its columns), and
// broadcasting an operand from outside without writing it into the array.
// Writes take one clock and touch only columns whose wcol bit is set.
// Reset clears the row. The row is this design's reading of a block the
// paper names and states the purpose of; its write interface is our own.
module eb_row
  import flexspim_pkg::*;
#(
  parameter int unsigned COLS_P = COLS
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              we,
  input  logic [COLS_P-1:0] wcol,
  input  logic [COLS_P-1:0] wbit,
  output logic [COLS_P-1:0] eb
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  eb <= '0;
    else if (we) eb <= (eb & ~wcol) | (wbit & wcol);
  end

endmodule
