// dual_addr_decoder -- the macro's dual address decoder.
//
// Turns the two row addresses of a CIM operation, ADDR#1 (9 bits) and
// ADDR#2 (8 bits), into two one-hot wordline vectors over the 512 rows, so
// that two wordlines can be raised together for a dual-row boolean read.
// Each wordline vector has its own enable; a disabled vector is all zero.
// ADDR#2 is zero-extended, so the second operand lives in rows 0..255.
// Purely combinational. The address widths follow the macro figure; the
// zero extension of ADDR#2 is a choice of this design.
module dual_addr_decoder
  import flexspim_pkg::*;
#(
  parameter int unsigned ROWS_P = ROWS,
  parameter int unsigned A1W_P  = A1W,
  parameter int unsigned A2W_P  = A2W
) (
  input  logic [A1W_P-1:0] addr1,
  input  logic [A2W_P-1:0] addr2,
  input  logic             en1,
  input  logic             en2,
  output logic [ROWS_P-1:0] wl1,
  output logic [ROWS_P-1:0] wl2
);

  always_comb begin
    wl1 = '0;
    wl2 = '0;
    for (int r = 0; r < int'(ROWS_P); r++) begin
      wl1[r] = en1 && (int'(addr1) == r);
      wl2[r] = en2 && (int'(addr2) == r);
    end
  end

endmodule
