// spi_slave -- host SPI port (SCK, MOSI, MISO, plus a chip select).
//
// Lets a host load the instruction memory, the input memory and the
// potential/weight buffer, start the controller and read results back.
// SPI mode 0 (data sampled on the rising SCK edge, changed on the falling
// one), MSB first, SCK oversampled by the system clock (at least 4 system
// clocks per SCK half period). A frame is 56 bits while cs_n is low:
//   cmd[7:0] addr[15:0] data[31:0]
//   0x01 write instruction memory   0x02 write input memory
//   0x03 write buffer word          0x04 read buffer word (data on MISO)
//   0x05 start the program at addr  0x06 read status (bit 0 = done)
// Writes and start are issued as one-clock pulses after the last bit; a
// read is requested after the 24th bit and the word (rd_data, valid one
// clock after rd_req) is shifted out during the data phase. The pins are
// the paper's; the frame format, commands and chip select are this
// design's choices, since the paper does not give the protocol.
module spi_slave
  import flexspim_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  input  logic            sck,
  input  logic            cs_n,
  input  logic            mosi,
  output logic            miso,
  // requests
  output logic            wr_valid,
  output logic [7:0]      wr_cmd,
  output logic [15:0]     addr,
  output logic [WORD-1:0] wr_data,
  output logic            rd_req,
  input  logic [WORD-1:0] rd_data,
  output logic            start,
  input  logic            status_done
);

  localparam logic [7:0] CMD_RD_BUF = 8'h04, CMD_START = 8'h05, CMD_STATUS = 8'h06;

  logic [2:0]  sck_s, cs_s, mosi_s;
  logic        sck_rise, sck_fall, cs_act;
  logic [55:0] rx;
  logic [5:0]  nbit;
  logic [WORD-1:0] tx;
  logic        rd_pend;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sck_s  <= '0;
      cs_s   <= '1;
      mosi_s <= '0;
    end else begin
      sck_s  <= {sck_s[1:0], sck};
      cs_s   <= {cs_s[1:0], cs_n};
      mosi_s <= {mosi_s[1:0], mosi};
    end
  end

  assign sck_rise = sck_s[1] && !sck_s[2];
  assign sck_fall = !sck_s[1] && sck_s[2];
  assign cs_act   = !cs_s[1];
  assign miso     = tx[WORD-1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rx       <= '0;
      nbit     <= '0;
      tx       <= '0;
      wr_valid <= 1'b0;
      wr_cmd   <= '0;
      addr     <= '0;
      wr_data  <= '0;
      rd_req   <= 1'b0;
      rd_pend  <= 1'b0;
      start    <= 1'b0;
    end else begin
      wr_valid <= 1'b0;
      rd_req   <= 1'b0;
      start    <= 1'b0;
      rd_pend  <= rd_req;
      if (rd_pend) tx <= rd_data;
      if (!cs_act) begin
        nbit <= '0;
      end else if (sck_rise) begin
        rx   <= {rx[54:0], mosi_s[1]};
        nbit <= nbit + 1'b1;
        if (nbit == 6'd23) begin
          wr_cmd <= rx[22:15];
          addr   <= {rx[14:0], mosi_s[1]};
          if (rx[22:15] == CMD_RD_BUF) rd_req <= 1'b1;
          if (rx[22:15] == CMD_STATUS) tx <= {{(WORD-1){1'b0}}, status_done};
        end
        if (nbit == 6'd55) begin
          nbit    <= '0;
          wr_data <= {rx[30:0], mosi_s[1]};
          if (wr_cmd == CMD_START) start <= 1'b1;
          else if (wr_cmd != CMD_RD_BUF && wr_cmd != CMD_STATUS) wr_valid <= 1'b1;
        end
      end else if (sck_fall && nbit > 6'd24) begin
        tx <= {tx[WORD-2:0], 1'b0};
      end
    end
  end

endmodule
