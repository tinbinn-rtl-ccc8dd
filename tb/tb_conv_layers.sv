// tb_conv_layers: the first two convolution layers and the first max-pool
// of the 10-category network, run on the whole overlay at its default
// sizes with the testbench in the role of the CPU software. Layer 1 takes 3 colour planes to 48
// maps, layer 2 takes those 48 maps to 48 more (both 32 x 32, 3x3 binary
// weights, ReLU, 8-bit activations).
//
// Layer 1:
//  1. A 640 x 480 camera frame is captured through the downscaler and the
//     RGB DMA (40 x 30 RGBA words).
//  2. The 144 kernels (9 bits each, stored one per 16-bit halfword) are
//     loaded from the flash model by the SPI DMA.
//  3. Software step, done here through the host port: the RGBA words are
//     split into three colour planes, each padded with black rows to
//     40 x 34 bytes (two rows above, two below).
//  4. For each output map: for each colour plane, 16 convolution passes
//     give 32 x 32 16-bit results; shift operations of the vector unit
//     (SLL 16 then SRA 16 for the low lane, SRA 16 for the high lane)
//     sign-extend them to one 32-bit word per position; two ADD commands
//     sum the three planes; the activation (shift 3) writes 1,024 bytes.
//  5. All 48 x 1,024 activations are read back and compared with a direct
//     computation from the captured pixels and the flash contents.
// Layer 2:
//  6. Software pads each layer-1 map to 40 x 34 bytes (one zero row above
//     and below, map columns at byte 5 .. 36) and lays all 48 out at the
//     bottom of the scratchpad, over the areas layer 1 used.
//  7. For each output map the 48 kernels (96 bytes) come from flash by the
//     SPI DMA into one of two buffers while the previous map is computed.
//     Each input map is convolved and widened as above and added into a
//     32-bit sum, so the sum over 48 maps cannot overflow. The activation
//     (shift 4) of the full 32 x 32 map is written to a scratch area. Then
//     the network's 2 x 2 max-pool runs on the 32-bit sums, before the
//     activation: this gives the same bytes, as the activation never
//     decreases. Each pairwise maximum takes five ALU passes (SLT, SUB from
//     zero, XOR, AND, XOR); horizontal pairs are one 512-element pass
//     group, vertical pairs one group per output row. The 16 x 16 pooled
//     sums are activated into the layer's output.
//  8. Each full-size map is checked as soon as it is made; the 48 pooled
//     16 x 16 maps are checked at the end. The reference is computed
//     directly from the layer-1 activations and the flash contents.
// The network's first stage, (2 x 48 conv 3x3) then 2 x 2 max-pool, is
// thus run in full.
module tb_conv_layers;
  import tinbinn_pkg::*;

  localparam int NOUT = 48;
  localparam int SHIFT = 3;
  localparam int RGB_BASE  = 'h00000;  // 1200 words
  localparam int WGT_BASE  = 'h01400;  // 72 words = 144 kernels
  localparam int PLANE     = 'h01600;  // 3 x 1360 bytes
  localparam int K16       = 'h02600;  // one word holding 16
  localparam int CONV      = 'h02800;  // 3 x 2048 bytes of 16b results
  localparam int TMP       = 'h04000;  // 512 words
  localparam int S32       = 'h05000;  // 3 x 4096 bytes of 32b results
  localparam int ACC       = 'h08000;  // 1024 words
  localparam int OUT       = 'h0A000;  // 48 x 1024 bytes
  localparam int FLASH_W   = 'h002000;
  // layer 2 (the layer-1 areas are free again by then)
  localparam int SHIFT2 = 4;
  localparam int P2        = 'h00000;  // 48 x 1360 bytes of padded maps
  localparam int O2        = 'h10000;  // 48 x 256 bytes of pooled maps
  localparam int O2FULL    = 'h14000;  // 1024 bytes, one map before pooling
  localparam int CONV2     = 'h1C000;
  localparam int TMP2      = 'h1C800;
  localparam int ACC2      = 'h1D000;
  localparam int S32_2     = 'h1E000;
  localparam int K16_2     = 'h1F000;  // 16, then a zero word
  localparam int WB        = 'h1F100;  // two 96-byte kernel buffers
  localparam int FLASH_W2  = 'h004000;

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
  int   checks = 0, failures = 0, n_cmds = 0, n_sat = 0, n_zero = 0;

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
    repeat (200000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic cpu_sync();
    @(posedge clk iff cpu_tick);
    @(negedge clk);
  endtask

  task automatic host_write(input int word, input logic [31:0] d);
    logic g;
    cpu_sync();
    host_req = 1; host_we = 1; host_addr = waddr_t'(word); host_wdata = d; host_be = 4'hF;
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

  longint ticks = 0, lve_ticks = 0;
  always @(posedge clk) if (cpu_tick) ticks <= ticks + 1;

  task automatic lve_run(input lve_cmd_t c);
    longint t0;
    cpu_sync();
    t0 = ticks;
    lve_cmd = c; lve_start = 1;
    @(posedge clk iff cpu_tick);
    @(negedge clk);
    lve_start = 0;
    while (lve_busy) @(negedge clk);
    lve_ticks += ticks - t0;
    n_cmds++;
  endtask

  function automatic logic [7:0] fb(int a);
    return 8'(a * 37 + (a >> 7) * 11 + 3);
  endfunction

  function automatic lve_cmd_t stream(lve_op_e op, int a, int sa, int b, int sb,
                                      int d, int sd, int n);
    lve_cmd_t c = '0;
    c.op = op;
    c.src_a = baddr_t'(a); c.stride_a = baddr_t'(sa);
    c.src_b = baddr_t'(b); c.stride_b = baddr_t'(sb);
    c.dst = baddr_t'(d);   c.stride_d = baddr_t'(sd);
    c.len = 16'(n);
    return c;
  endfunction

  // Element-wise signed maximum of two word streams (a at stride sa, b at
  // a + (b - a), both with stride sa) into d at stride 4, from five ALU
  // passes: t = a < b; t = 0 - t; x = a ^ b; x = x & t; d = a ^ x.
  task automatic vmax(input int a, input int b, input int sa, input int d, input int n);
    lve_run(stream(OP_SLT, a, sa, b, sa, TMP2, 4, n));
    lve_run(stream(OP_SUB, K16_2 + 4, 0, TMP2, 4, TMP2, 4, n));
    lve_run(stream(OP_XOR, a, sa, b, sa, S32_2, 4, n));
    lve_run(stream(OP_AND, S32_2, 4, TMP2, 4, S32_2, 4, n));
    lve_run(stream(OP_XOR, a, sa, S32_2, 4, d, 4, n));
  endtask

  logic [7:0] planes [3][34][40];
  logic [8:0] kern [NOUT][3];
  logic [7:0] act1 [NOUT][32][32];
  logic [8:0] kern2 [NOUT];
  int         sum2 [32][32];
  logic [7:0] pool_exp [NOUT][16][16];

  function automatic int act(int s, int sh);
    return (s < 0) ? 0 : ((s >> sh) > 255 ? 255 : (s >> sh));
  endfunction

  task automatic spi_load(input int faddr, input int saddr, input int nw);
    cpu_sync();
    spi_flash_addr = 24'(faddr); spi_spad_addr = baddr_t'(saddr);
    spi_nwords = 16'(nw);
    spi_start = 1;
    cpu_sync();
    spi_start = 0;
  endtask

  initial begin
    logic [31:0] d;
    lve_cmd_t c;
    lve_start = 0; lve_cmd = '0; spi_start = 0; spi_flash_addr = '0; spi_spad_addr = '0;
    spi_nwords = '0; rgb_enable = 0; rgb_base = '0; i2c_start = 0; i2c_dev = '0;
    i2c_reg = '0; i2c_data = '0; host_req = 0; host_we = 0; host_addr = '0;
    host_wdata = '0; host_be = '0;
    repeat (5) @(posedge clk);
    rst_n = 1'b1;

    // 1-2. capture a frame while the kernels arrive from flash
    rgb_base = baddr_t'(RGB_BASE);
    rgb_enable = 1;
    cam_run = 1;
    cpu_sync();
    spi_flash_addr = 24'(FLASH_W); spi_spad_addr = baddr_t'(WGT_BASE);
    spi_nwords = 16'(NOUT * 3 / 2);
    spi_start = 1;
    cpu_sync();
    spi_start = 0;
    while (rgb_frames == 0) @(negedge clk);
    cam_run = 0;
    rgb_enable = 0;
    while (spi_busy) @(negedge clk);

    // 3. de-interleave and pad (software)
    for (int ch = 0; ch < 3; ch++)
      for (int r = 0; r < 34; r++)
        for (int x = 0; x < 40; x++) planes[ch][r][x] = 8'd0;
    for (int i = 0; i < 1200; i++) begin
      host_read(RGB_BASE / 4 + i, d);
      for (int ch = 0; ch < 3; ch++) planes[ch][2 + i / 40][i % 40] = d[8*ch +: 8];
    end
    for (int ch = 0; ch < 3; ch++)
      for (int r = 0; r < 34; r++)
        for (int x = 0; x < 40; x += 4)
          host_write((PLANE + 1360 * ch + 40 * r + x) / 4,
                     {planes[ch][r][x+3], planes[ch][r][x+2], planes[ch][r][x+1], planes[ch][r][x]});
    host_write(K16 / 4, 32'd16);
    for (int k = 0; k < NOUT * 3; k += 2) begin
      host_read(WGT_BASE / 4 + k / 2, d);
      kern[k / 3][k % 3]             = d[8:0];
      kern[(k + 1) / 3][(k + 1) % 3] = d[24:16];
    end
    // the kernels must be what the flash holds
    for (int k = 0; k < NOUT * 3; k++) begin
      automatic int a = FLASH_W + 2 * k;
      checks++;
      if (kern[k / 3][k % 3] !== {fb(a + 1), fb(a)}[8:0]) failures++;
    end

    // 4. the layer
    for (int o = 0; o < NOUT; o++) begin
      for (int m = 0; m < 3; m++) begin
        for (int g = 1; g <= 8; g++)
          for (int p = 0; p < 2; p++) begin
            c = stream(OP_CVI, PLANE + 1360 * m + 4 * g, 40, PLANE + 1360 * m + 4 * g + 4, 40,
                       CONV + 2048 * m + 2 * (4 * (g - 1) + 2 * p), 64, 34);
            c.weights = kern[o][m];
            c.sel23 = p[0];
            lve_run(c);
          end
        // widen: low lane to even positions, high lane to odd positions
        lve_run(stream(OP_SLL, CONV + 2048 * m, 4, K16, 0, TMP, 4, 512));
        lve_run(stream(OP_SRA, TMP, 4, K16, 0, S32 + 4096 * m, 8, 512));
        lve_run(stream(OP_SRA, CONV + 2048 * m, 4, K16, 0, S32 + 4096 * m + 4, 8, 512));
      end
      lve_run(stream(OP_ADD, S32, 4, S32 + 4096, 4, ACC, 4, 1024));
      lve_run(stream(OP_ADD, ACC, 4, S32 + 8192, 4, ACC, 4, 1024));
      c = stream(OP_ACT, ACC, 4, ACC, 0, OUT + 1024 * o, 1, 1024);
      c.act_shift = 5'(SHIFT);
      lve_run(c);
    end

    // 5. compare
    for (int o = 0; o < NOUT; o++)
      for (int k = 0; k < 32; k++)
        for (int j = 0; j < 32; j += 4) begin
          host_read((OUT + 1024 * o + 32 * k + j) / 4, d);
          for (int b = 0; b < 4; b++) begin
            automatic int s = 0;
            automatic int e;
            act1[o][k][j + b] = d[8*b +: 8];
            for (int m = 0; m < 3; m++)
              for (int r = 0; r < 3; r++)
                for (int cc = 0; cc < 3; cc++) begin
                  automatic int v = int'(planes[m][k + r][j + b + 4 + cc]);
                  s += kern[o][m][3*r+cc] ? v : -v;
                end
            e = (s < 0) ? 0 : ((s >> SHIFT) > 255 ? 255 : (s >> SHIFT));
            if (e == 0) n_zero++;
            if (e == 255) n_sat++;
            checks++;
            if (int'(d[8*b +: 8]) != e) begin
              failures++;
              if (failures < 10) $display("map %0d (%0d,%0d): got %0d exp %0d", o, k, j + b, d[8*b +: 8], e);
            end
          end
        end
    $display("layer 1: %0d output maps, %0d vector commands, %0d zero and %0d saturated activations",
             NOUT, n_cmds, n_zero, n_sat);

    // 6. pad the layer-1 maps for layer 2 (software)
    for (int m = 0; m < NOUT; m++)
      for (int r = 0; r < 34; r++)
        for (int x = 0; x < 40; x += 4) begin
          logic [31:0] w;
          for (int b = 0; b < 4; b++) begin
            automatic int ir = r - 1, ic = x + b - 5;
            w[8*b +: 8] = (ir >= 0 && ir < 32 && ic >= 0 && ic < 32) ? act1[m][ir][ic] : 8'd0;
          end
          host_write((P2 + 1360 * m + 40 * r + x) / 4, w);
        end
    host_write(K16_2 / 4, 32'd16);
    host_write(K16_2 / 4 + 1, 32'd0);

    // 7. layer 2, kernels for map o+1 loading while map o is computed
    $display("layer 1: %0d CPU cycles in vector commands", lve_ticks);
    n_cmds = 0; n_zero = 0; n_sat = 0; lve_ticks = 0;
    spi_load(FLASH_W2, WB, NOUT / 2);
    for (int o = 0; o < NOUT; o++) begin
      automatic int buf_o = WB + 256 * (o % 2);
      while (spi_busy) @(negedge clk);
      if (o + 1 < NOUT) spi_load(FLASH_W2 + 2 * NOUT * (o + 1), WB + 256 * ((o + 1) % 2), NOUT / 2);
      for (int m = 0; m < NOUT; m += 2) begin
        automatic int a = FLASH_W2 + 2 * (NOUT * o + m);
        host_read((buf_o + 2 * m) / 4, d);
        kern2[m] = d[8:0];
        kern2[m + 1] = d[24:16];
        checks += 2;
        if (kern2[m] !== {fb(a + 1), fb(a)}[8:0]) failures++;
        if (kern2[m + 1] !== {fb(a + 3), fb(a + 2)}[8:0]) failures++;
      end
      for (int m = 0; m < NOUT; m++) begin
        automatic int wide = (m == 0) ? ACC2 : S32_2;
        for (int g = 1; g <= 8; g++)
          for (int p = 0; p < 2; p++) begin
            c = stream(OP_CVI, P2 + 1360 * m + 4 * g, 40, P2 + 1360 * m + 4 * g + 4, 40,
                       CONV2 + 2 * (4 * (g - 1) + 2 * p), 64, 34);
            c.weights = kern2[m];
            c.sel23 = p[0];
            lve_run(c);
          end
        lve_run(stream(OP_SLL, CONV2, 4, K16_2, 0, TMP2, 4, 512));
        lve_run(stream(OP_SRA, TMP2, 4, K16_2, 0, wide, 8, 512));
        lve_run(stream(OP_SRA, CONV2, 4, K16_2, 0, wide + 4, 8, 512));
        if (m > 0) lve_run(stream(OP_ADD, ACC2, 4, S32_2, 4, ACC2, 4, 1024));
      end
      c = stream(OP_ACT, ACC2, 4, ACC2, 0, O2FULL, 1, 1024);
      c.act_shift = 5'(SHIFT2);
      lve_run(c);
      // 2x2 max-pool of the 32-bit sums: horizontal pairs into CONV2
      // (16 words per row), then vertical pairs into ACC2 (16 x 16)
      vmax(ACC2, ACC2 + 4, 8, CONV2, 512);
      for (int r = 0; r < 16; r++) vmax(CONV2 + 128 * r, CONV2 + 128 * r + 64, 4, ACC2 + 64 * r, 16);
      c = stream(OP_ACT, ACC2, 4, ACC2, 0, O2 + 256 * o, 1, 256);
      c.act_shift = 5'(SHIFT2);
      lve_run(c);

      // 8. check this map at full size, then (at the end) the pooled maps
      for (int k = 0; k < 32; k++)
        for (int j = 0; j < 32; j++) begin
          automatic int s = 0;
          for (int m = 0; m < NOUT; m++)
            for (int r = 0; r < 3; r++)
              for (int cc = 0; cc < 3; cc++) begin
                automatic int ir = k + r - 1, ic = j + cc - 1;
                automatic int v = (ir >= 0 && ir < 32 && ic >= 0 && ic < 32)
                                  ? int'(act1[m][ir][ic]) : 0;
                s += kern2[m][3*r+cc] ? v : -v;
              end
          sum2[k][j] = s;
        end
      for (int k = 0; k < 32; k++)
        for (int j = 0; j < 32; j += 4) begin
          host_read((O2FULL + 32 * k + j) / 4, d);
          for (int b = 0; b < 4; b++) begin
            automatic int e = act(sum2[k][j + b], SHIFT2);
            if (e == 0) n_zero++;
            if (e == 255) n_sat++;
            checks++;
            if (int'(d[8*b +: 8]) != e) begin
              failures++;
              if (failures < 10) $display("layer 2 map %0d (%0d,%0d): got %0d exp %0d", o, k, j + b, d[8*b +: 8], e);
            end
          end
        end
      for (int k = 0; k < 16; k++)
        for (int j = 0; j < 16; j++) begin
          automatic int mx = sum2[2*k][2*j];
          if (sum2[2*k][2*j+1] > mx) mx = sum2[2*k][2*j+1];
          if (sum2[2*k+1][2*j] > mx) mx = sum2[2*k+1][2*j];
          if (sum2[2*k+1][2*j+1] > mx) mx = sum2[2*k+1][2*j+1];
          pool_exp[o][k][j] = 8'(act(mx, SHIFT2));
        end
    end
    for (int o = 0; o < NOUT; o++)
      for (int k = 0; k < 16; k++)
        for (int j = 0; j < 16; j += 4) begin
          host_read((O2 + 256 * o + 16 * k + j) / 4, d);
          for (int b = 0; b < 4; b++) begin
            checks++;
            if (d[8*b +: 8] !== pool_exp[o][k][j + b]) begin
              failures++;
              if (failures < 10) $display("pooled map %0d (%0d,%0d): got %0d exp %0d", o, k, j + b, d[8*b +: 8], pool_exp[o][k][j + b]);
            end
          end
        end
    $display("layer 2 and pooling: %0d CPU cycles in vector commands (%0d ms at 24 MHz)",
             lve_ticks, lve_ticks / 24000);
    $display("layer 2: %0d output maps, %0d vector commands, %0d zero and %0d saturated activations",
             NOUT, n_cmds, n_zero, n_sat);
    checks += 2;
    if (bad_cmd != 0) failures++;
    if (rgb_dropped != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
