// downscale16: 16 x 16 block-averaging downscaler for the camera stream.
//
// The camera delivers a 640 x 480 frame in raster order, one RGB565 pixel
// per pix_valid, with frame_start high together with the frame's first
// pixel. Each colour is widened to 8 bits by bit replication (R5, G6, B5
// to 8 bits), and summed over its 16 x 16 block: one accumulator per
// colour per output column (40 of them) holds the sums of the current
// band of 16 lines, and is restarted at the first pixel of each block.
// When the last pixel of a block arrives the three sums are divided by
// 256 and sent out as one 40 x 30 output pixel (out_valid for one cycle),
// packed R in bits 7:0, G in 15:8, B in 23:16 and 0 in 31:24 (RGBA).
// out_last marks the frame's last output pixel. The output rate is at
// most one pixel per 16 input pixels.
//
// The input and output sizes and the 16 x 16 factor follow the paper;
// averaging (rather than subsampling), the colour widening and the input
// handshake are this design's choices.
module downscale16 #(
  parameter int unsigned IN_W = 640,
  parameter int unsigned IN_H = 480,
  parameter int unsigned BLK  = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        pix_valid,
  input  logic        frame_start,
  input  logic [15:0] pix_data,     // RGB565
  output logic        out_valid,
  output logic        out_last,
  output logic [31:0] out_rgba
);

  localparam int unsigned OUT_W = IN_W / BLK;
  localparam int unsigned XW    = $clog2(IN_W);
  localparam int unsigned YW    = $clog2(IN_H);
  localparam int unsigned BW    = $clog2(BLK);
  localparam int unsigned SW    = 8 + 2 * BW;     // sum of BLK*BLK bytes

  logic [XW-1:0] x_q, x;
  logic [YW-1:0] y_q, y;
  logic [SW-1:0] acc_r [OUT_W];
  logic [SW-1:0] acc_g [OUT_W];
  logic [SW-1:0] acc_b [OUT_W];
  logic [7:0]    r8, g8, b8;
  logic [SW-1:0] sum_r, sum_g, sum_b;
  logic [XW-BW-1:0] xb;
  logic          blk_first, blk_last, frame_last;

  // position of the current pixel; frame_start forces (0,0)
  assign x = frame_start ? '0 : x_q;
  assign y = frame_start ? '0 : y_q;
  assign xb = x[XW-1:BW];

  assign r8 = {pix_data[15:11], pix_data[15:13]};
  assign g8 = {pix_data[10:5],  pix_data[10:9]};
  assign b8 = {pix_data[4:0],   pix_data[4:2]};

  assign blk_first  = (x[BW-1:0] == '0) && (y[BW-1:0] == '0);
  assign blk_last   = (x[BW-1:0] == BW'(BLK-1)) && (y[BW-1:0] == BW'(BLK-1));
  assign frame_last = (x == XW'(IN_W-1)) && (y == YW'(IN_H-1));

  assign sum_r = (blk_first ? '0 : acc_r[xb]) + SW'(r8);
  assign sum_g = (blk_first ? '0 : acc_g[xb]) + SW'(g8);
  assign sum_b = (blk_first ? '0 : acc_b[xb]) + SW'(b8);

  always_ff @(posedge clk) begin
    if (pix_valid) begin
      acc_r[xb] <= sum_r;
      acc_g[xb] <= sum_g;
      acc_b[xb] <= sum_b;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x_q       <= '0;
      y_q       <= '0;
      out_valid <= 1'b0;
      out_last  <= 1'b0;
      out_rgba  <= '0;
    end else begin
      out_valid <= 1'b0;
      out_last  <= 1'b0;
      if (pix_valid) begin
        if (x == XW'(IN_W-1)) begin
          x_q <= '0;
          y_q <= (y == YW'(IN_H-1)) ? '0 : y + 1'b1;
        end else begin
          x_q <= x + 1'b1;
          y_q <= y;
        end
        if (blk_last) begin
          out_valid <= 1'b1;
          out_last  <= frame_last;
          out_rgba  <= {8'd0, sum_b[SW-1 -: 8], sum_g[SW-1 -: 8], sum_r[SW-1 -: 8]};
        end
      end
    end
  end

endmodule
