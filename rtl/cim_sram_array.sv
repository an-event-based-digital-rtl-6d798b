// cim_sram_array -- 512 x 256 6T SRAM array of the CIM macro, holding
// weights and membrane potentials in one storage.
//
// Read: every row whose wordline is high pulls on the bitlines of its
// columns. A bitline (BL) stays high only if all selected cells hold 1, so
// with two wordlines raised BL = A AND B; the complementary bitline (BLB)
// stays high only if all selected cells hold 0, so BLB = NOT(A OR B). With
// one wordline raised BL is the stored bit and BLB its complement. The
// emulation-bit (EB) row sits on the same bitlines and joins the read when
// eb_wl is high, which lets it stand in for a stored operand row.
// Write: on a clock edge with we high, the row selected by wl1 takes
// wbit in every column whose wcol bit is set; other columns keep their data.
// The read is combinational from the wordlines (the sense amplifiers in the
// PCs do the latching); the write takes one clock. The wired-AND/NOR read
// follows the paper's boolean CIM description; the cells are not reset, as
// an SRAM is not.
module cim_sram_array
  import flexspim_pkg::*;
#(
  parameter int unsigned ROWS_P = ROWS,
  parameter int unsigned COLS_P = COLS
) (
  input  logic              clk,
  input  logic [ROWS_P-1:0] wl1,
  input  logic [ROWS_P-1:0] wl2,
  input  logic              eb_wl,
  input  logic [COLS_P-1:0] eb,
  input  logic              we,
  input  logic [COLS_P-1:0] wcol,
  input  logic [COLS_P-1:0] wbit,
  output logic [COLS_P-1:0] bl,
  output logic [COLS_P-1:0] blb
);

  localparam int unsigned RW = $clog2(ROWS_P);

  logic [COLS_P-1:0] mem [ROWS_P];
  logic [RW-1:0]     idx1, idx2;
  logic              on1, on2;

  // Each wordline vector has at most one active line (dual_addr_decoder),
  // so the cells that discharge a bitline are those of row idx1 and/or idx2.
  always_comb begin
    idx1 = '0;
    idx2 = '0;
    for (int r = 0; r < int'(ROWS_P); r++) begin
      if (wl1[r]) idx1 = idx1 | RW'(r);
      if (wl2[r]) idx2 = idx2 | RW'(r);
    end
    on1 = |wl1;
    on2 = |wl2;
  end

  always_comb begin
    bl  = '1;
    blb = '1;
    if (on1) begin
      bl  = bl & mem[idx1];
      blb = blb & ~mem[idx1];
    end
    if (on2) begin
      bl  = bl & mem[idx2];
      blb = blb & ~mem[idx2];
    end
    if (eb_wl) begin
      bl  = bl & eb;
      blb = blb & ~eb;
    end
  end

  always_ff @(posedge clk) begin
    if (we && on1) mem[idx1] <= (mem[idx1] & ~wcol) | (wbit & wcol);
  end

  always_comb begin
    assert ($onehot0(wl1) && $onehot0(wl2)) else $error("more than one wordline per port");
  end

endmodule
