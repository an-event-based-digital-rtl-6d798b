// flexspim_pkg -- types and constants shared by the FlexSpIM accelerator RTL.
//
// The macro geometry (512 rows x 256 columns of 6T SRAM, 9-bit ADDR#1 and
// 8-bit ADDR#2), the four PC states and their control-bitcell codes, the
// carry-select codes SEL=00/01/10/11 and the 942 MHz / 157 MHz clock ratio
// (6 internal clocks per CIM operation) are the published numbers. The
// macro operation set, the instruction encoding and the 32-bit memory word
// width are choices of this implementation and are documented where used.
package flexspim_pkg;

  // ---- CIM macro geometry ------------------------------------------------
  localparam int unsigned ROWS   = 512;   // 6T SRAM rows
  localparam int unsigned COLS   = 256;   // columns = peripheral circuits
  localparam int unsigned A1W    = 9;     // ADDR#1 width
  localparam int unsigned A2W    = 8;     // ADDR#2 width
  localparam int unsigned SUBCYC = 6;     // 942 MHz internal / 157 MHz system clock

  // ---- system memories (32-bit words chosen here) -----------------------
  localparam int unsigned WORD        = 32;
  localparam int unsigned IMEM_WORDS  = 2944;  // 11.5 kB / 4 B
  localparam int unsigned INMEM_WORDS = 1088;  // 4.25 kB / 4 B
  localparam int unsigned NBANKS      = 16;    // 4 x 4 banks
  localparam int unsigned BANK_WORDS  = 512;   // 2 kB / 4 B
  localparam int unsigned BUF_AW      = 13;    // 16 banks x 512 words
  localparam int unsigned MAXW        = 8;     // 8 words x 32 bits = 256 bits

  // ---- PC state, stored in the two control bitcells: {ctrl#1, ctrl#2} ---
  typedef enum logic [1:0] {
    ST_MIDDLE   = 2'b00,
    ST_RIGHT    = 2'b01,
    ST_LEFT     = 2'b10,
    ST_INACTIVE = 2'b11
  } pc_state_e;

  // ---- carry-select code ---------------------------------------------------
  typedef enum logic [1:0] {
    SEL_LR_NEXT  = 2'b00,  // left-to-right row after the first
    SEL_RL       = 2'b01,  // right-to-left row
    SEL_SERIAL   = 2'b10,  // bit-serial: each column is an operand
    SEL_LR_FIRST = 2'b11   // first (LSB) row, left to right
  } csel_e;

  // ---- one CIM operation of the macro -------------------------------------
  typedef enum logic [3:0] {
    MOP_NOP     = 4'd0,
    MOP_ADD     = 4'd1,  // potential row += operand row, written back
    MOP_CMP     = 4'd2,  // potential row + (-threshold) row, no write-back
    MOP_SIGNCAP = 4'd3,  // read weight MSB row alone, broadcast its sign into EB
    MOP_FIX_SAT = 4'd4,  // saturate rows of operands flagged as overflowed
    MOP_FIX_CLR = 4'd5,  // clear rows of operands flagged as spiking
    MOP_WRROW   = 4'd6,  // write external data into an array row
    MOP_RDROW   = 4'd7,  // read an array row out
    MOP_WRCTRL  = 4'd8,  // write a control bitcell row (addr1[0] selects #1/#2)
    MOP_WREB    = 4'd9   // write the EB row
  } mop_e;

  typedef struct packed {
    mop_e            op;
    logic [A1W-1:0]  addr1;     // potential row / written row
    logic [A2W-1:0]  addr2;     // second operand row
    logic            src2_eb;   // second operand comes from the EB row
    csel_e           sel;
    logic            seq;
    logic            last;      // most significant row of the operand
    logic            end_left;  // the operand ends in its LEFT PC
    logic            serial;    // bit-serial shape, every column its own operand
  } mctrl_t;

  // ---- timing phases of one CIM operation ----------------------------------
  typedef struct packed {
    logic prech;   // 1) and 4) bitline precharge
    logic read;    // 2) wordlines on, sense amplifiers latch AND / NOR
    logic comp;    // 3) sum and carry-out, carry register update
    logic write;   // 5) write-back
  } phase_t;

  // ---- instruction encoding of the controller ------------------------------
  typedef enum logic [3:0] {
    OP_HALT   = 4'h0,
    OP_CFG    = 4'h1,  // [8:0] np, [17:9] nw, [18] serial, [19] use_eb
    OP_CFG2   = 4'h2,  // [12:0] spike buffer addr, [20:13] col offset, [24:21] words
    OP_LD     = 4'h3,  // [12:0] buffer addr, [21:13] row, [23:22] target
    OP_ST     = 4'h4,  // [12:0] buffer addr, [21:13] row
    OP_ADD    = 4'h5,  // [8:0] potential base row, [16:9] weight base row
    OP_FIRE   = 4'h6,  // [8:0] potential base row, [16:9] -threshold base row
    OP_EVLOOP = 4'h7   // [11:0] first input word, [23:12] event count
  } opcode_e;

  typedef enum logic [1:0] {
    LDT_ARRAY = 2'd0, LDT_CTRL1 = 2'd1, LDT_CTRL2 = 2'd2, LDT_EB = 2'd3
  } ld_target_e;

endpackage
