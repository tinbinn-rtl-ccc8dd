// tb_tinbinn_top: end-to-end test of the overlay at its default sizes
// (640 x 480 camera, 128 kB scratchpad). The testbench plays the CPU.
//
//  1. configures the camera model over I2C (and checks a NACK from an
//     absent device);
//  2. writes a 40 x 34 byte input map into the scratchpad through the host
//     port, starts the camera with the RGB DMA enabled and starts an SPI
//     DMA of 256 weight words from the flash model;
//  3. while both DMAs run, computes a 32 x 32 binarized convolution of
//     the input map with the vector unit: 8 column groups x 2 passes
//     (byte offsets 0/1, then 2/3), each a 34-row column, and checks all
//     1024 results against a direct convolution;
//  4. runs the quad-16b to 32b add and the 32b-to-8b activation on the
//     results and checks them byte by byte;
//  5. waits for the frame and the SPI transfer and checks all 1200 RGBA
//     pixels and 256 weight words.
// It counts how often each mechanism happened (write-slot stall of the
// vector unit, each convolution pass type, DMA running during vector
// work, ReLU and saturation in the activation, I2C ACK and NACK) and
// counts a failure for any that never happened.
module tb_tinbinn_top;
  import tinbinn_pkg::*;

  logic clk = 1'b0, rst_n = 1'b1;
  logic cpu_tick;
  logic lve_start, lve_busy, lve_done;
  lve_cmd_t lve_cmd;
  logic spi_start, spi_busy, spi_done;
  logic [23:0] spi_flash_addr;
  baddr_t spi_spad_addr, rgb_base;
  logic [15:0] spi_nwords, rgb_frames, rgb_dropped;
  logic rgb_enable, rgb_frame_done;
  logic i2c_start, i2c_busy, i2c_done, i2c_nack;
  logic [6:0] i2c_dev;
  logic [7:0] i2c_reg, i2c_data;
  logic host_req, host_we, host_gnt;
  waddr_t host_addr;
  logic [31:0] host_wdata, host_rdata;
  logic [3:0] host_be;
  logic flash_sclk, flash_cs_n, flash_mosi, flash_miso;
  logic cam_pix_valid, cam_frame_start;
  logic [15:0] cam_pix_data;
  logic i2c_scl, i2c_sda_oe, i2c_sda_in;
  logic cam_run = 1'b0;
  int   frames_sent, bad_cmd, i2c_writes, i2c_proto_err;

  int checks = 0, failures = 0;
  int n_stall = 0, n_pass01 = 0, n_pass23 = 0, n_dma_overlap = 0;
  int n_relu = 0, n_sat = 0, n_ack = 0, n_nack = 0, n_rgb_wr = 0;

  localparam int IN_BASE   = 'h00000;   // 40 x 34 input map, bytes
  localparam int CONV_BASE = 'h01000;   // 32 x 32 16b results, 64 B rows
  localparam int QADD_BASE = 'h02000;   // 512 words
  localparam int ACT_BASE  = 'h03000;   // 512 bytes
  localparam int RGB_BASE  = 'h10000;   // 1200 words
  localparam int WGT_BASE  = 'h18000;   // 256 words
  localparam int FLASH_A   = 'h001000;

  tinbinn_top dut (.*);

  spi_flash_model u_flash (.sclk(flash_sclk), .cs_n(flash_cs_n), .mosi(flash_mosi),
                           .miso(flash_miso), .bad_cmd(bad_cmd));
  cam_model #(.W(640), .H(480), .PIX_DIV(3), .BLANK(300)) u_cam (
    .clk(clk), .run(cam_run), .pix_valid(cam_pix_valid), .frame_start(cam_frame_start),
    .pix_data(cam_pix_data), .frames_sent(frames_sent));
  i2c_target_model #(.ADDR(7'h21)) u_i2c (.scl(i2c_scl), .sda_master_oe(i2c_sda_oe),
                                          .sda(i2c_sda_in), .writes(i2c_writes),
                                          .proto_err(i2c_proto_err));

  always #5 clk = ~clk;
  initial #1 rst_n = 1'b0;   // an edge, so the asynchronous reset acts

  initial begin
    repeat (4000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // mechanism monitors, sampled at each CPU-cycle edge
  always @(posedge clk) if (rst_n && cpu_tick) begin
    if (dut.u_lve.wr.req && !dut.wgnt[2]) n_stall++;
    if (lve_busy && (spi_busy || dut.rgb_wr.req)) n_dma_overlap++;
    if (dut.rgb_wr.req && dut.wgnt[0]) n_rgb_wr++;
  end

  // ---------------- CPU-side helpers ----------------
  task automatic cpu_sync();   // to the start of the next CPU cycle
    @(posedge clk iff cpu_tick);
    @(negedge clk);
  endtask

  task automatic host_write(input int word, input logic [31:0] d, input logic [3:0] be);
    logic g;
    cpu_sync();
    host_req = 1; host_we = 1; host_addr = waddr_t'(word); host_wdata = d; host_be = be;
    do begin
      @(negedge clk iff cpu_tick);
      g = host_gnt;
      @(posedge clk);
    end while (!g);
    @(negedge clk);
    host_req = 0; host_we = 0;
  endtask

  task automatic host_read(input int word, output logic [31:0] d);
    logic g;
    cpu_sync();
    host_req = 1; host_we = 0; host_addr = waddr_t'(word);
    do begin
      @(negedge clk iff cpu_tick);
      g = host_gnt;
      @(posedge clk);
    end while (!g);
    @(negedge clk);
    d = host_rdata;
    host_req = 0;
  endtask

  task automatic lve_run(input lve_cmd_t c);
    cpu_sync();
    lve_cmd = c; lve_start = 1;
    @(posedge clk iff cpu_tick);
    @(negedge clk);
    lve_start = 0;
    while (lve_busy) @(negedge clk);
  endtask

  task automatic i2c_write(input logic [6:0] dev, input logic [7:0] r, input logic [7:0] d);
    cpu_sync();
    i2c_dev = dev; i2c_reg = r; i2c_data = d; i2c_start = 1;
    @(posedge clk iff cpu_tick);
    @(negedge clk);
    i2c_start = 0;
    while (!i2c_done) @(negedge clk);
  endtask

  function automatic logic [7:0] fb(int a);
    return 8'(a * 37 + (a >> 7) * 11 + 3);
  endfunction

  function automatic logic [7:0] ref_act(logic [31:0] v, logic [4:0] sh);
    longint x = longint'($signed(v));
    if (x < 0) return 0;
    x = x >> sh;
    return (x > 255) ? 8'd255 : 8'(x);
  endfunction

  logic [7:0]  inmap [34][40];
  logic [15:0] conv_ref [32][32];
  logic [31:0] qadd_ref [512];

  initial begin
    logic [31:0] d;
    logic [8:0]  w;
    lve_cmd_t    c;
    lve_start = 0; lve_cmd = '0; spi_start = 0; spi_flash_addr = '0; spi_spad_addr = '0;
    spi_nwords = '0; rgb_enable = 0; rgb_base = '0; i2c_start = 0; i2c_dev = '0;
    i2c_reg = '0; i2c_data = '0; host_req = 0; host_we = 0; host_addr = '0;
    host_wdata = '0; host_be = '0;
    repeat (5) @(posedge clk);
    rst_n = 1'b1;

    // 1. camera configuration over I2C
    i2c_write(7'h21, 8'h12, 8'h14);
    checks += 2;
    if (i2c_nack) failures++; else n_ack++;
    if (u_i2c.regs[8'h12] !== 8'h14) begin failures++; $display("I2C register not written"); end
    i2c_write(7'h42, 8'h00, 8'h00);
    checks++;
    if (!i2c_nack) failures++; else n_nack++;

    // 2. input map via the host port, then start both DMAs
    for (int r = 0; r < 34; r++)
      for (int x = 0; x < 40; x++)
        inmap[r][x] = (r == 0 || r == 33) ? 8'd0 : 8'($urandom);
    for (int r = 0; r < 34; r++)
      for (int x = 0; x < 40; x += 4)
        host_write((IN_BASE + r * 40 + x) / 4,
                   {inmap[r][x+3], inmap[r][x+2], inmap[r][x+1], inmap[r][x]}, 4'hF);
    rgb_base = baddr_t'(RGB_BASE);
    rgb_enable = 1;
    cam_run = 1;
    cpu_sync();
    spi_flash_addr = 24'(FLASH_A); spi_spad_addr = baddr_t'(WGT_BASE); spi_nwords = 256;
    spi_start = 1;
    cpu_sync();
    spi_start = 0;

    // 3. 32 x 32 convolution: outputs j = 0..31 use input columns j+4 .. j+6
    w = 9'b101_100_011;
    for (int k = 0; k < 32; k++)
      for (int j = 0; j < 32; j++) begin
        automatic int s = 0;
        for (int r = 0; r < 3; r++)
          for (int cc = 0; cc < 3; cc++)
            s += w[3*r+cc] ? int'(inmap[k+r][j+4+cc]) : -int'(inmap[k+r][j+4+cc]);
        conv_ref[k][j] = 16'(s);
      end
    for (int g = 1; g <= 8; g++)
      for (int p = 0; p < 2; p++) begin
        c = '0;
        c.op = OP_CVI;
        c.src_a = baddr_t'(IN_BASE + 4 * g);     c.stride_a = 40;
        c.src_b = baddr_t'(IN_BASE + 4 * g + 4); c.stride_b = 40;
        c.dst = baddr_t'(CONV_BASE + 2 * (4 * (g - 1) + 2 * p)); c.stride_d = 64;
        c.len = 34; c.weights = w; c.sel23 = p[0];
        lve_run(c);
        if (p == 0) n_pass01++; else n_pass23++;
      end
    for (int k = 0; k < 32; k++)
      for (int j = 0; j < 32; j += 2) begin
        host_read((CONV_BASE + 64 * k + 2 * j) / 4, d);
        checks++;
        if (d !== {conv_ref[k][j+1], conv_ref[k][j]}) begin
          failures++;
          if (failures < 10) $display("conv row %0d col %0d: got %h exp %h", k, j, d,
                                      {conv_ref[k][j+1], conv_ref[k][j]});
        end
      end

    // 4. quad add of result rows k and k+1 (words), then the activation
    for (int i = 0; i < 512; i++) begin
      automatic int k = i / 16, j = 2 * (i % 16);
      automatic int k2 = (k + 1) % 32;
      qadd_ref[i] = 32'($signed(conv_ref[k][j])) + 32'($signed(conv_ref[k][j+1]))
                  + 32'($signed(conv_ref[k2][j])) + 32'($signed(conv_ref[k2][j+1]));
    end
    c = '0;
    c.op = OP_QADD;
    c.src_a = baddr_t'(CONV_BASE);      c.stride_a = 4;
    c.src_b = baddr_t'(CONV_BASE + 64); c.stride_b = 4;
    c.dst = baddr_t'(QADD_BASE);        c.stride_d = 4;
    c.len = 496;                        // rows 0..30 paired with the row below
    lve_run(c);
    c.src_a = baddr_t'(CONV_BASE + 64 * 31); c.src_b = baddr_t'(CONV_BASE);
    c.dst = baddr_t'(QADD_BASE + 4 * 496);   c.len = 16;
    lve_run(c);
    c = '0;
    c.op = OP_ACT;
    c.src_a = baddr_t'(QADD_BASE); c.stride_a = 4;
    c.src_b = baddr_t'(QADD_BASE); c.stride_b = 0;
    c.dst = baddr_t'(ACT_BASE);    c.stride_d = 1;
    c.len = 512; c.act_shift = 2;
    lve_run(c);
    for (int i = 0; i < 512; i += 4) begin
      host_read((ACT_BASE + i) / 4, d);
      for (int b = 0; b < 4; b++) begin
        automatic logic [7:0] e = ref_act(qadd_ref[i + b], 5'd2);
        checks++;
        if ($signed(qadd_ref[i + b]) < 0) n_relu++;
        else if (e == 8'd255) n_sat++;
        if (d[8*b +: 8] !== e) begin
          failures++;
          if (failures < 10) $display("act %0d: got %0d exp %0d", i + b, d[8*b +: 8], e);
        end
      end
    end
    for (int i = 0; i < 512; i += 37) begin
      host_read((QADD_BASE / 4) + i, d);
      checks++;
      if (d !== qadd_ref[i]) begin failures++; $display("qadd %0d: got %h exp %h", i, d, qadd_ref[i]); end
    end

    // 5. camera frame and weights
    while (rgb_frames == 0) @(negedge clk);
    cam_run = 0;
    while (spi_busy) @(negedge clk);
    for (int i = 0; i < 1200; i++) begin
      automatic int bx = i % 40, by = i / 40;
      automatic int sr = 0, sg = 0, sb = 0;
      for (int y = 16 * by; y < 16 * by + 16; y++)
        for (int x = 16 * bx; x < 16 * bx + 16; x++) begin
          automatic logic [15:0] p = u_cam.cam_pixel(x, y, 0);
          sr += int'({p[15:11], p[15:13]});
          sg += int'({p[10:5], p[10:9]});
          sb += int'({p[4:0], p[4:2]});
        end
      host_read(RGB_BASE / 4 + i, d);
      checks++;
      if (d !== {8'd0, 8'(sb / 256), 8'(sg / 256), 8'(sr / 256)}) begin
        failures++;
        if (failures < 10) $display("pixel %0d: got %h", i, d);
      end
    end
    for (int i = 0; i < 256; i++) begin
      automatic int fa = FLASH_A + 4 * i;
      host_read(WGT_BASE / 4 + i, d);
      checks++;
      if (d !== {fb(fa + 3), fb(fa + 2), fb(fa + 1), fb(fa)}) begin
        failures++;
        if (failures < 10) $display("weight word %0d: got %h", i, d);
      end
    end
    checks += 3;
    if (bad_cmd != 0) failures++;
    if (rgb_dropped != 0) failures++;
    if (i2c_proto_err != 0) failures++;

    $display("mechanisms: stall=%0d pass01=%0d pass23=%0d dma_overlap=%0d relu=%0d sat=%0d ack=%0d nack=%0d rgb_writes=%0d",
             n_stall, n_pass01, n_pass23, n_dma_overlap, n_relu, n_sat, n_ack, n_nack, n_rgb_wr);
    checks += 9;
    if (n_stall == 0)       begin failures++; $display("no vector-unit stall"); end
    if (n_pass01 == 0)      failures++;
    if (n_pass23 == 0)      failures++;
    if (n_dma_overlap == 0) begin failures++; $display("no DMA during vector work"); end
    if (n_relu == 0)        begin failures++; $display("no ReLU case"); end
    if (n_sat == 0)         begin failures++; $display("no saturation case"); end
    if (n_ack == 0)         failures++;
    if (n_nack == 0)        failures++;
    if (n_rgb_wr != 1200)   begin failures++; $display("%0d RGB writes", n_rgb_wr); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
