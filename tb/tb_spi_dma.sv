// tb_spi_dma: runs the SPI DMA against the serial flash model and a
// behavioural write slot that refuses grants at random. Checks every
// word written (address and little-endian byte order), that no other
// write happens, that the flash saw only READ commands, and that an
// ungranted transfer takes 2 x 32 CPU cycles per word plus the
// 32-bit command header.
module tb_spi_dma;
  import tinbinn_pkg::*;
  logic clk = 1'b0, rst_n = 1'b1;
  logic [1:0] ph = 0;
  logic ce, start, busy, done, sclk, cs_n, mosi, miso, wr_gnt;
  logic [23:0] flash_addr;
  baddr_t spad_addr;
  logic [15:0] nwords;
  spad_wr_t wr;
  int bad_cmd;
  int checks = 0, failures = 0, writes = 0, denied = 0;
  bit deny_en = 0;

  spi_dma dut (.*);
  spi_flash_model u_flash (.sclk(sclk), .cs_n(cs_n), .mosi(mosi), .miso(miso), .bad_cmd(bad_cmd));

  always #5 clk = ~clk;
  initial #1 rst_n = 1'b0;   // an edge, so the asynchronous reset acts
  always @(posedge clk) ph <= (ph == 2) ? 0 : ph + 1;
  assign ce = (ph == 2);

  function automatic logic [7:0] fb(int a);
    return 8'(a * 37 + (a >> 7) * 11 + 3);
  endfunction

  always @(negedge clk) if (ce) wr_gnt = !(deny_en && $urandom_range(0, 1) == 0);

  // check each granted write
  always @(posedge clk) if (ce && wr.req) begin
    if (!wr_gnt) denied++;
    else begin
      automatic int fa = int'(flash_addr) + 4 * writes;
      automatic logic [31:0] e = {fb(fa + 3), fb(fa + 2), fb(fa + 1), fb(fa)};
      checks += 2;
      if (wr.data !== e) begin failures++; $display("word %0d: got %h exp %h", writes, wr.data, e); end
      if (wr.addr !== waddr_t'(spad_addr[BADDR_W-1:2] + writes)) begin failures++; $display("word %0d: bad address", writes); end
      writes++;
    end
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc;
    start = 0; flash_addr = '0; spad_addr = '0; nwords = '0; wr_gnt = 1;
    repeat (4) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 6; t++) begin
      deny_en    = (t >= 3);
      flash_addr = 24'($urandom_range(0, 100000));
      spad_addr  = baddr_t'(4 * $urandom_range(0, 30000));
      nwords     = 16'($urandom_range(1, 40));
      writes     = 0;
      @(negedge clk); while (!ce) @(negedge clk);
      start = 1;
      @(negedge clk); while (!ce) @(negedge clk);
      start = 0;
      cyc = 1;
      while (!done) begin
        @(negedge clk); while (!ce) @(negedge clk);
        cyc++;
      end
      checks++;
      if (writes != int'(nwords)) begin failures++; $display("test %0d: %0d writes of %0d", t, writes, nwords); end
      if (!deny_en) begin
        // 64 header cycles + 64 per word + one write cycle per word + done
        automatic int e = 64 + 65 * int'(nwords) + 1;
        checks++;
        if (cyc != e) begin failures++; $display("test %0d: %0d cycles, expected %0d", t, cyc, e); end
      end
      checks++;
      if (cs_n !== 1'b1) failures++;
    end
    checks += 2;
    if (bad_cmd != 0) failures++;
    if (denied == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
