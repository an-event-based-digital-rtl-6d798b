// tb_spi_slave -- checks the host SPI port with a bit-banged mode-0 master
// (4 system clocks per SCK half period): write frames for the instruction
// memory, input memory and buffer must produce one wr_valid pulse with the
// right command, address and data within 8 clocks of the last SCK edge;
// read frames must raise rd_req once and shift out the word returned on
// rd_data; start frames pulse start with the address; status frames return
// status_done in bit 0.
module tb_spi_slave;
  import flexspim_pkg::*;
  timeunit 1ns;
  timeprecision 100ps;

  logic clk = 1'b0, rst_n = 1'b0;
  logic sck = 1'b0, cs_n = 1'b1, mosi = 1'b0, miso;
  logic wr_valid, rd_req, start, status_done = 1'b0;
  logic [7:0] wr_cmd;
  logic [15:0] addr;
  logic [WORD-1:0] wr_data, rd_data = '0;
  int checks = 0, failures = 0;
  int n_wr = 0, n_rd = 0, n_start = 0, last_edge = 0, cyc = 0, lat = 0;
  always #1 clk = ~clk;

  spi_slave dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  // a simple memory behind the read port, one clock read latency
  logic [WORD-1:0] mem [256];
  always @(posedge clk) begin
    cyc++;
    if (rd_req) begin
      rd_data <= mem[addr[7:0]];
      n_rd++;
    end
    if (wr_valid) begin
      n_wr++;
      lat = cyc - last_edge;
    end
    if (start) begin
      n_start++;
      lat = cyc - last_edge;
    end
  end

  task automatic frame(input logic [7:0] cmd, input logic [15:0] a,
                       input logic [31:0] d, output logic [31:0] rd);
    logic [55:0] f;
    f = {cmd, a, d};
    rd = '0;
    cs_n = 1'b0;
    repeat (4) @(posedge clk);
    for (int i = 55; i >= 0; i--) begin
      mosi = f[i];
      repeat (4) @(posedge clk);
      sck = 1'b1;
      if (i < 32) rd = {rd[30:0], miso};
      if (i == 0) last_edge = cyc;
      repeat (4) @(posedge clk);
      sck = 1'b0;
    end
    repeat (4) @(posedge clk);
    cs_n = 1'b1;
    repeat (4) @(posedge clk);
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    logic [31:0] d, r;
    logic [15:0] a;
    logic [7:0]  c;
    int w0, r0, s0;
    for (int i = 0; i < 256; i++) mem[i] = $urandom;
    repeat (4) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 300; t++) begin
      c = 8'($urandom_range(1, 6));
      a = 16'($urandom);
      d = $urandom;
      status_done = 1'($urandom_range(0, 1));
      w0 = n_wr; r0 = n_rd; s0 = n_start;
      frame(c, a, d, r);
      unique case (c)
        8'h04: begin
          check(n_rd == r0 + 1 && n_wr == w0, "one read request");
          check(r == mem[a[7:0]], $sformatf("read data addr %0d", a[7:0]));
        end
        8'h05: begin
          check(n_start == s0 + 1 && addr == a, "start with address");
          check(lat <= 8, "start latency");
        end
        8'h06: check(r == {31'd0, status_done} && n_wr == w0, "status");
        default: begin
          check(n_wr == w0 + 1, "one write pulse");
          check(wr_cmd == c && addr == a && wr_data == d, "write fields");
          check(lat <= 8, "write latency");
        end
      endcase
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
