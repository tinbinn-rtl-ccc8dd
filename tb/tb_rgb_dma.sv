// tb_rgb_dma: drives the RGB DMA with bursts of pixels on the fast clock
// and a write slot that refuses grants at random. Checks that every pixel
// is written once, in order, to consecutive words from the base address,
// that the address restarts with a new frame, that frame_done and the
// frame counter follow the last pixel, and that nothing is written while
// disabled. A run of five back-to-back pixels with the slot refused
// overfills the four-entry queue: exactly one drop must be counted.
module tb_rgb_dma;
  import tinbinn_pkg::*;
  logic clk = 1'b0, rst_n = 1'b1;
  logic [1:0] ph = 0;
  logic ce, enable, frame_start, pix_valid, pix_last, wr_gnt, frame_done;
  baddr_t base;
  logic [31:0] pix_rgba;
  spad_wr_t wr;
  logic [15:0] frames, dropped;
  int checks = 0, failures = 0;
  int sent = 0, written = 0, fdone = 0;
  logic [31:0] q [$];
  bit deny = 0;

  rgb_dma #(.DEPTH(4)) dut (.*);

  always #5 clk = ~clk;
  initial #1 rst_n = 1'b0;   // an edge, so the asynchronous reset acts
  always @(posedge clk) ph <= (ph == 2) ? 0 : ph + 1;
  assign ce = (ph == 2);
  always @(negedge clk) wr_gnt = !(deny && $urandom_range(0, 1) == 0);

  always @(posedge clk) if (ce) begin
    if (frame_done) fdone++;
    if (wr.req && wr_gnt) begin
      automatic logic [31:0] e = q.pop_front();
      checks += 2;
      if (wr.data !== e) begin failures++; $display("write %0d: got %h exp %h", written, wr.data, e); end
      if (wr.addr !== waddr_t'(base[BADDR_W-1:2] + (written % 10))) begin
        failures++; $display("write %0d: addr %0d", written, wr.addr);
      end
      written++;
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send(input logic [31:0] v, input bit last, input bit fs);
    @(negedge clk);
    pix_valid = 1; pix_rgba = v; pix_last = last; frame_start = fs;
    if (enable) q.push_back(v);
    @(negedge clk);
    pix_valid = 0; frame_start = 0; pix_last = 0;
  endtask

  initial begin
    enable = 0; base = 17'h1000; frame_start = 0; pix_valid = 0; pix_last = 0; pix_rgba = 0;
    repeat (4) @(posedge clk);
    rst_n = 1;
    // disabled: nothing written
    send(32'h1234, 0, 1);
    repeat (20) @(posedge clk);
    checks++; if (written != 0) failures++;
    enable = 1;
    for (int f = 0; f < 4; f++) begin
      deny = f[0];
      for (int i = 0; i < 10; i++) begin
        send($urandom, i == 9, i == 0);
        repeat ($urandom_range(3, 30)) @(negedge clk);
      end
      repeat (200) @(posedge clk);
    end
    checks += 4;
    if (written != 40) begin failures++; $display("%0d written", written); end
    if (fdone != 4) failures++;
    if (frames != 4) failures++;
    if (dropped != 0) failures++;
    // overfill: slot refused for a while, five pixels back to back
    deny = 0;
    force wr_gnt = 1'b0;
    @(negedge clk); frame_start = 1; pix_valid = 1; pix_rgba = 32'hAAAA_0000;
    q.push_back(pix_rgba);
    @(negedge clk); frame_start = 0;
    for (int i = 1; i < 5; i++) begin
      pix_rgba = 32'hAAAA_0000 + i;
      if (i < 4) q.push_back(pix_rgba);
      @(negedge clk);
    end
    pix_valid = 0;
    release wr_gnt;
    repeat (60) @(posedge clk);
    checks += 2;
    if (dropped != 1) begin failures++; $display("dropped %0d", dropped); end
    if (written != 44) begin failures++; $display("%0d written", written); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
