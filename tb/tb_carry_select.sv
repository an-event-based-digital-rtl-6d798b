// tb_carry_select -- exhaustive check of the carry-input multiplexer of a
// peripheral circuit: every SEL code, SEQ, control state and carry source
// combination is applied and compared with the selection table (first row,
// right-to-left rows, later left-to-right rows, bit-serial). The mux is
// combinational, so each result is checked 1 ns after the inputs change.
module tb_carry_select;
  import flexspim_pkg::*;
  timeunit 1ns;
  timeprecision 100ps;

  csel_e     sel;
  logic      seq, c_left, c_right, c_reg, c_in;
  pc_state_e state;
  int checks = 0, failures = 0;

  carry_select dut (.*);

  initial begin
    #100000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  function automatic logic model(csel_e s, logic q, pc_state_e st, logic l, logic r, logic g);
    if (st == ST_INACTIVE) return 1'b0;
    unique case (s)
      SEL_LR_FIRST: return (st == ST_LEFT) ? 1'b0 : l;
      SEL_RL:       return (st == ST_RIGHT) ? g : r;
      SEL_LR_NEXT:  return (st == ST_LEFT) ? g : l;
      default:      return q ? g : 1'b0;
    endcase
  endfunction

  initial begin
    for (int v = 0; v < 256; v++) begin
      sel = csel_e'(v[1:0]);
      seq = v[2];
      state = pc_state_e'(v[4:3]);
      {c_left, c_right, c_reg} = v[7:5];
      #1;
      checks++;
      if (c_in !== model(sel, seq, state, c_left, c_right, c_reg)) begin
        failures++;
        $display("FAIL sel=%b seq=%b state=%b l=%b r=%b g=%b got %b", sel, seq, state,
                 c_left, c_right, c_reg, c_in);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
