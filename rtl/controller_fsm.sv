// controller_fsm -- the accelerator's controller.
//
// Runs a program from the instruction memory and turns each instruction
// into a sequence of CIM operations of the macro (ADDR#1, ADDR#2 and the
// control word of every operation), plus the transfers between the
// potential/weight buffer and the macro. It carries out the event-driven,
// layer-first flow: for a timestep the host fills the input memory with
// events, and the program, layer by layer, adds the weights of every event
// to the membrane potentials (EVLOOP/ADD), fires (FIRE) and moves
// non-stationary operands in and out of the macro (LD/ST). Whether a layer
// is weight- or output-stationary is decided by the program: the
// stationary operand stays in the macro, the other one is loaded from the
// buffer before use (and stored back, for potentials).
// Instructions (32 bits, opcode in [31:28], see flexspim_pkg):
//   CFG   np, nw rows of potential and weight, bit-serial flag, EB operand
//   CFG2  spike buffer address, column offset and word count of transfers
//   LD    buffer -> array row / control bitcell row / EB row
//   ST    array row -> buffer
//   ADD   potentials += weights over np rows: sign capture into the EBs
//         first if nw < np, then one CIM operation per row with the
//         ping-pong carry-select code (11, 01, 00, 01, 00, ...; 10 for
//         bit-serial), then a saturating fix-up pass if any operand overflowed
//   FIRE  compare potentials with thresholds (stored negated) without
//         write-back, clear the potentials of the neurons that spiked, and
//         store the 256-bit spike vector (one bit per END column) to the
//         buffer
//   EVLOOP an ADD for every event word in a range of the input memory
//   HALT  stop and raise done
// Timing: one macro operation per 6 clocks when back to back; an ADD of np
// rows with no overflow takes np operations (+1 for the sign capture).
// The paper names the FSM and the flow it runs; the instruction set,
// the operation sequences and the fix-up passes are this design's.
module controller_fsm
  import flexspim_pkg::*;
#(
  parameter int unsigned COLS_P  = COLS,
  parameter int unsigned IMEM_AW = $clog2(IMEM_WORDS),
  parameter int unsigned INM_AW  = $clog2(INMEM_WORDS)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  logic [IMEM_AW-1:0]    start_pc,
  output logic                  busy,
  output logic                  done,
  // instruction memory
  output logic                  im_re,
  output logic [IMEM_AW-1:0]    im_addr,
  input  logic [WORD-1:0]       im_rdata,
  // input memory
  output logic                  in_re,
  output logic [INM_AW-1:0]     in_addr,
  input  logic [WORD-1:0]       in_rdata,
  // potential/weight buffer
  output logic                  bf_en,
  output logic                  bf_we,
  output logic [BUF_AW-1:0]     bf_addr,
  output logic [3:0]            bf_nwords,
  output logic [MAXW*WORD-1:0]  bf_wdata,
  // merge-and-shift unit
  output logic [3:0]            ms_nwords,
  output logic [7:0]            ms_offset,
  input  logic [COLS_P-1:0]     ms_row_data,
  input  logic [COLS_P-1:0]     ms_row_mask,
  input  logic [MAXW*WORD-1:0]  ms_store_words,
  // CIM macro
  output logic                  m_valid,
  output mctrl_t                m_ctl,
  output logic [COLS_P-1:0]     m_wdata,
  output logic [COLS_P-1:0]     m_wmask,
  input  logic                  m_accept,
  input  logic                  m_done,
  input  logic [COLS_P-1:0]     m_flags,
  input  logic                  m_any,
  // spikes of the last FIRE
  output logic                  spike_valid,
  output logic [COLS_P-1:0]     spike_vec,
  output logic                  sat_event
);

  typedef enum logic [4:0] {
    S_IDLE, S_FETCH, S_DEC, S_LD_RD, S_LD_ISSUE, S_ST_ISSUE, S_ST_WR,
    S_ADD_START, S_PASS, S_WAIT, S_ADD_CHK, S_ADD_DONE, S_FIRE_CHK,
    S_FIRE_ST, S_EV_FETCH, S_EV_DEC, S_NEXT
  } state_e;

  state_e          st, after;
  logic [IMEM_AW-1:0] pc;
  logic [WORD-1:0] ir;
  // configuration
  logic [8:0]      np, nw;
  logic            serial, use_eb;
  logic [BUF_AW-1:0] spk_addr;
  logic [7:0]      offset;
  logic [3:0]      nwords;
  // operation
  logic [8:0]      pbase;
  logic [7:0]      wbase;
  logic [8:0]      row, nrows;
  mop_e            pop;
  logic            in_ev;
  logic [INM_AW-1:0] ev_ptr;
  logic [11:0]     ev_cnt;
  ld_target_e      ldt;

  opcode_e opc;
  assign opc = opcode_e'(ir[31:28]);

  assign busy      = (st != S_IDLE);
  assign ms_nwords = nwords;
  assign ms_offset = offset;

  // ---- control word of row 'row' of the current pass ----------------------
  always_comb begin
    m_ctl          = '0;
    m_ctl.op       = pop;
    m_ctl.serial   = serial;
    m_ctl.addr1    = pbase + row;
    m_ctl.addr2    = wbase + row[7:0];
    m_ctl.last     = (row == np - 9'd1);
    m_ctl.end_left = ~np[0];
    m_ctl.seq      = (row != 9'd0);
    if (serial)              m_ctl.sel = SEL_SERIAL;
    else if (row == 9'd0)    m_ctl.sel = SEL_LR_FIRST;
    else if (row[0])         m_ctl.sel = SEL_RL;
    else                     m_ctl.sel = SEL_LR_NEXT;
    unique case (pop)
      MOP_ADD:     m_ctl.src2_eb = use_eb || (row >= nw);
      MOP_SIGNCAP: begin
        m_ctl.addr2    = wbase + nw[7:0] - 8'd1;
        m_ctl.end_left = ~nw[0];
        m_ctl.last     = 1'b0;
      end
      MOP_WRROW, MOP_WREB, MOP_RDROW: m_ctl.addr1 = ir[21:13];
      MOP_WRCTRL: m_ctl.addr1 = {8'd0, ldt == LDT_CTRL2};
      default: ;
    endcase
  end

  assign m_wdata = ms_row_data;
  assign m_wmask = ms_row_mask;
  assign m_valid = (st == S_PASS) || (st == S_LD_ISSUE) || (st == S_ST_ISSUE);

  // ---- memories -------------------------------------------------------------
  always_comb begin
    im_re     = (st == S_FETCH);
    im_addr   = pc;
    in_re     = (st == S_EV_FETCH);
    in_addr   = ev_ptr;
    bf_en     = 1'b0;
    bf_we     = 1'b0;
    bf_addr   = ir[12:0];
    bf_nwords = nwords;
    bf_wdata  = ms_store_words;
    unique case (st)
      S_NEXT:    bf_en = (opc == OP_LD);
      S_ST_WR: begin
        bf_en = 1'b1;
        bf_we = 1'b1;
      end
      S_FIRE_ST: begin
        bf_en     = 1'b1;
        bf_we     = 1'b1;
        bf_addr   = spk_addr;
        bf_nwords = 4'(MAXW);
        bf_wdata  = (MAXW*WORD)'(spike_vec);
      end
      default: ;
    endcase
  end

  // ---- sequencing ---------------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st          <= S_IDLE;
      after       <= S_IDLE;
      pc          <= '0;
      ir          <= '0;
      np          <= 9'd1;
      nw          <= 9'd1;
      serial      <= 1'b0;
      use_eb      <= 1'b0;
      spk_addr    <= '0;
      offset      <= '0;
      nwords      <= 4'd8;
      pbase       <= '0;
      wbase       <= '0;
      row         <= '0;
      nrows       <= '0;
      pop         <= MOP_NOP;
      in_ev       <= 1'b0;
      ev_ptr      <= '0;
      ev_cnt      <= '0;
      ldt         <= LDT_ARRAY;
      done        <= 1'b0;
      spike_valid <= 1'b0;
      spike_vec   <= '0;
      sat_event   <= 1'b0;
    end else begin
      spike_valid <= 1'b0;
      sat_event   <= 1'b0;
      unique case (st)
        S_IDLE: if (start) begin
          pc   <= start_pc;
          done <= 1'b0;
          st   <= S_FETCH;
        end
        S_FETCH: st <= S_DEC;
        S_DEC: begin
          ir <= im_rdata;
          st <= S_NEXT;
        end
        S_NEXT: begin
          // ir holds the instruction fetched at pc
          unique case (opc)
            OP_HALT: begin
              done <= 1'b1;
              st   <= S_IDLE;
            end
            OP_CFG: begin
              np     <= (ir[8:0] == 9'd0) ? 9'd1 : ir[8:0];
              nw     <= (ir[17:9] == 9'd0) ? 9'd1 : ir[17:9];
              serial <= ir[18];
              use_eb <= ir[19];
              pc     <= pc + 1'b1;
              st     <= S_FETCH;
            end
            OP_CFG2: begin
              spk_addr <= ir[12:0];
              offset   <= ir[20:13];
              nwords   <= (ir[24:21] == 4'd0 || ir[24:21] > 4'(MAXW)) ? 4'(MAXW) : ir[24:21];
              pc       <= pc + 1'b1;
              st       <= S_FETCH;
            end
            OP_LD: begin
              ldt <= ld_target_e'(ir[23:22]);
              st  <= S_LD_RD;
            end
            OP_ST: begin
              pop <= MOP_RDROW;
              st  <= S_ST_ISSUE;
            end
            OP_ADD: begin
              pbase <= ir[8:0];
              wbase <= ir[16:9];
              in_ev <= 1'b0;
              pop   <= MOP_NOP;
              st    <= S_ADD_START;
            end
            OP_FIRE: begin
              pbase <= ir[8:0];
              wbase <= ir[16:9];
              pop   <= MOP_CMP;
              row   <= '0;
              nrows <= np;
              after <= S_FIRE_CHK;
              st    <= S_PASS;
            end
            OP_EVLOOP: begin
              ev_ptr <= INM_AW'(ir[11:0]);
              ev_cnt <= ir[23:12];
              if (ir[23:12] == 12'd0) begin
                pc <= pc + 1'b1;
                st <= S_FETCH;
              end else begin
                st <= S_EV_FETCH;
              end
            end
            default: begin
              pc <= pc + 1'b1;
              st <= S_FETCH;
            end
          endcase
        end
        // ---- buffer -> macro ---------------------------------------------
        S_LD_RD: begin   // buffer read issued in S_NEXT, data valid now
          unique case (ldt)
            LDT_ARRAY: pop <= MOP_WRROW;
            LDT_EB:    pop <= MOP_WREB;
            default:   pop <= MOP_WRCTRL;
          endcase
          st <= S_LD_ISSUE;
        end
        S_LD_ISSUE: if (m_accept) begin
          after <= S_ADD_DONE;
          in_ev <= 1'b0;
          st    <= S_WAIT;
        end
        // ---- macro -> buffer ---------------------------------------------
        S_ST_ISSUE: if (m_accept) begin
          after <= S_ST_WR;
          st    <= S_WAIT;
        end
        S_ST_WR: begin
          pc <= pc + 1'b1;
          st <= S_FETCH;
        end
        // ---- accumulate --------------------------------------------------
        S_ADD_START: begin
          // entered with pop = NOP, and again with pop = SIGNCAP once the
          // weight signs are in the EBs
          row <= '0;
          st  <= S_PASS;
          if (pop != MOP_SIGNCAP && np > nw && !use_eb) begin
            pop   <= MOP_SIGNCAP;
            nrows <= 9'd1;
            after <= S_ADD_START;
          end else begin
            pop   <= MOP_ADD;
            nrows <= np;
            after <= S_ADD_CHK;
          end
        end
        S_PASS: if (m_accept) begin
          if (row == nrows - 9'd1) st <= S_WAIT;
          else                     row <= row + 9'd1;
        end
        S_WAIT: if (m_done) begin
          row <= '0;
          st  <= after;
        end
        S_ADD_CHK: begin
          if (m_any) begin
            pop       <= MOP_FIX_SAT;
            nrows     <= np;
            after     <= S_ADD_DONE;
            sat_event <= 1'b1;
            st        <= S_PASS;
          end else begin
            st <= S_ADD_DONE;
          end
        end
        S_ADD_DONE: begin
          pop <= MOP_NOP;
          if (in_ev && ev_cnt > 12'd1) begin
            ev_ptr <= ev_ptr + 1'b1;
            ev_cnt <= ev_cnt - 12'd1;
            st     <= S_EV_FETCH;
          end else begin
            in_ev <= 1'b0;
            pc    <= pc + 1'b1;
            st    <= S_FETCH;
          end
        end
        // ---- fire ----------------------------------------------------------
        S_FIRE_CHK: begin
          spike_vec   <= m_flags;
          spike_valid <= 1'b1;
          if (m_any) begin
            pop   <= MOP_FIX_CLR;
            nrows <= np;
            after <= S_FIRE_ST;
            st    <= S_PASS;
          end else begin
            st <= S_FIRE_ST;
          end
        end
        S_FIRE_ST: begin
          pop <= MOP_NOP;
          pc  <= pc + 1'b1;
          st  <= S_FETCH;
        end
        // ---- event loop ----------------------------------------------------
        S_EV_FETCH: st <= S_EV_DEC;
        S_EV_DEC: begin
          pbase <= in_rdata[8:0];
          wbase <= in_rdata[16:9];
          in_ev <= 1'b1;
          pop   <= MOP_NOP;
          st    <= S_ADD_START;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

endmodule
