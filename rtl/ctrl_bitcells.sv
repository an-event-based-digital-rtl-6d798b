// ctrl_bitcells -- the 2 x 256 control bitcells of the CIM macro and their
// driver.
//
// Each column holds two bits, control bitcell #1 and #2, that give its
// peripheral circuit (PC) a state: MIDDLE (00), RIGHT (01), LEFT (10) or
// INACTIVE (11), written {#1,#2}. The states mark where each multi-column
// operand begins and ends and switch unused columns to standby. A row is
// written in one clock: sel picks bitcell row #1 (0) or #2 (1), and only
// columns whose wcol bit is set change. The state is read continuously.
// Reset puts every column in INACTIVE. The state codes follow the paper's
// table; the reset value and the masked write are choices of this design.
module ctrl_bitcells
  import flexspim_pkg::*;
#(
  parameter int unsigned COLS_P = COLS
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              we,
  input  logic              sel,
  input  logic [COLS_P-1:0] wcol,
  input  logic [COLS_P-1:0] wbit,
  output pc_state_e         state [COLS_P]
);

  logic [COLS_P-1:0] ctrl1, ctrl2;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ctrl1 <= '1;
      ctrl2 <= '1;
    end else if (we) begin
      if (!sel) ctrl1 <= (ctrl1 & ~wcol) | (wbit & wcol);
      else      ctrl2 <= (ctrl2 & ~wcol) | (wbit & wcol);
    end
  end

  always_comb begin
    for (int c = 0; c < int'(COLS_P); c++) state[c] = pc_state_e'({ctrl1[c], ctrl2[c]});
  end

endmodule
