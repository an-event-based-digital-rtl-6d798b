// flexspim_top -- the FlexSpIM event-based CIM accelerator for spiking CNNs.
//
// Blocks: the 16 kB CIM-SRAM macro (cim_macro), the 11.5 kB instruction
// memory, the 4.25 kB input memory for one timestep of input events, the
// controller FSM, the 4 x 4 x 2 kB potential/weight buffer, the 32-to-256-bit
// merge-and-shift unit between buffer and macro, and the SPI host port. The
// timing generator sits inside the macro. The internal clock generator and
// the pads are not modelled: clk is the fast internal clock (942 MHz in the
// paper; one CIM operation takes 6 of its periods), supplied from outside.
// Host protocol (see spi_slave): load programs, events and buffer data, start
// the program, poll status or watch ack, read results (spike vectors and
// potentials) from the buffer. spike_valid/spike_vec/sat_event are the debug
// outputs: the spike vector of each FIRE and a pulse for every saturation
// fix-up. While the controller runs, it owns the buffer; SPI buffer accesses
// are meant for when it is idle. The block set and sizes follow the paper's
// system figure; the wiring of the host port and debug pins is this design's.
module flexspim_top
  import flexspim_pkg::*;
#(
  parameter int unsigned SUBCYC_P = SUBCYC,
  parameter int unsigned COLS_P   = COLS
) (
  input  logic              clk,
  input  logic              rst_n,
  // SPI
  input  logic              sck,
  input  logic              cs_n,
  input  logic              mosi,
  output logic              miso,
  // ACK / DEBUG
  output logic              ack,
  output logic              spike_valid,
  output logic [COLS_P-1:0]   spike_vec,
  output logic              sat_event
);

  localparam int unsigned IMEM_AW = $clog2(IMEM_WORDS);
  localparam int unsigned INM_AW  = $clog2(INMEM_WORDS);

  // ---- SPI -----------------------------------------------------------------
  logic            s_wr, s_rd, s_start;
  logic [7:0]      s_cmd;
  logic [15:0]     s_addr;
  logic [WORD-1:0] s_wdata;
  logic [MAXW*WORD-1:0] bf_rdata;
  logic            ctl_busy, ctl_done;

  spi_slave u_spi (
    .clk, .rst_n, .sck, .cs_n, .mosi, .miso,
    .wr_valid(s_wr), .wr_cmd(s_cmd), .addr(s_addr), .wr_data(s_wdata),
    .rd_req(s_rd), .rd_data(bf_rdata[WORD-1:0]), .start(s_start),
    .status_done(ctl_done)
  );

  assign ack = ctl_done;

  // ---- instruction and input memories ------------------------------------------
  logic                  im_re, in_re;
  logic [IMEM_AW-1:0]    im_addr;
  logic [INM_AW-1:0]     in_addr;
  logic [WORD-1:0]       im_rdata, in_rdata;

  instr_mem u_imem (
    .clk, .we(s_wr && s_cmd == 8'h01), .waddr(s_addr[IMEM_AW-1:0]), .wdata(s_wdata),
    .re(im_re), .raddr(im_addr), .rdata(im_rdata)
  );

  input_mem u_inmem (
    .clk, .we(s_wr && s_cmd == 8'h02), .waddr(s_addr[INM_AW-1:0]), .wdata(s_wdata),
    .re(in_re), .raddr(in_addr), .rdata(in_rdata)
  );

  // ---- potential/weight buffer, shared by controller and SPI ------------------
  logic                 c_bf_en, c_bf_we;
  logic [BUF_AW-1:0]    c_bf_addr;
  logic [3:0]           c_bf_nwords;
  logic [MAXW*WORD-1:0] c_bf_wdata;
  logic                 bf_en, bf_we;
  logic [BUF_AW-1:0]    bf_addr;
  logic [3:0]           bf_nwords;
  logic [MAXW*WORD-1:0] bf_wdata;

  always_comb begin
    if (ctl_busy) begin
      bf_en     = c_bf_en;
      bf_we     = c_bf_we;
      bf_addr   = c_bf_addr;
      bf_nwords = c_bf_nwords;
      bf_wdata  = c_bf_wdata;
    end else begin
      bf_en     = s_rd || (s_wr && s_cmd == 8'h03);
      bf_we     = s_wr;
      bf_addr   = s_addr[BUF_AW-1:0];
      bf_nwords = 4'd1;
      bf_wdata  = (MAXW*WORD)'(s_wdata);
    end
  end

  pw_buffer u_buf (
    .clk, .en(bf_en), .we(bf_we), .addr(bf_addr), .nwords(bf_nwords),
    .wdata(bf_wdata), .rdata(bf_rdata)
  );

  // ---- merge and shift ----------------------------------------------------------
  logic [3:0]           ms_nwords;
  logic [7:0]           ms_offset;
  logic [COLS_P-1:0]      ms_row_data, ms_row_mask, m_rdata;
  logic [MAXW*WORD-1:0] ms_store_words;

  merge_shift #(.COLS_P(COLS_P)) u_ms (
    .nwords(ms_nwords), .offset(ms_offset), .buf_words(bf_rdata),
    .row_data(ms_row_data), .row_mask(ms_row_mask),
    .macro_row(m_rdata), .store_words(ms_store_words)
  );

  // ---- controller -------------------------------------------------------------
  logic            m_valid, m_accept, m_busy, m_done, m_any;
  mctrl_t          m_ctl;
  logic [COLS_P-1:0] m_wdata, m_wmask, m_flags;
  pc_state_e       m_state [COLS_P];

  controller_fsm #(.COLS_P(COLS_P)) u_ctl (
    .clk, .rst_n, .start(s_start), .start_pc(s_addr[IMEM_AW-1:0]),
    .busy(ctl_busy), .done(ctl_done),
    .im_re, .im_addr, .im_rdata, .in_re, .in_addr, .in_rdata,
    .bf_en(c_bf_en), .bf_we(c_bf_we), .bf_addr(c_bf_addr), .bf_nwords(c_bf_nwords),
    .bf_wdata(c_bf_wdata),
    .ms_nwords, .ms_offset, .ms_row_data, .ms_row_mask, .ms_store_words,
    .m_valid, .m_ctl, .m_wdata, .m_wmask, .m_accept, .m_done, .m_flags, .m_any,
    .spike_valid, .spike_vec, .sat_event
  );

  // ---- CIM macro --------------------------------------------------------------
  cim_macro #(.SUBCYC_P(SUBCYC_P), .COLS_P(COLS_P)) u_macro (
    .clk, .rst_n, .op_valid(m_valid), .op_ctl(m_ctl), .op_wdata(m_wdata),
    .op_wmask(m_wmask), .op_accept(m_accept), .busy(m_busy), .done(m_done),
    .rdata(m_rdata), .flags_end(m_flags), .any_flag(m_any), .state(m_state)
  );

endmodule
