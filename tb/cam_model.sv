// cam_model: behavioural model of the camera's pixel output, for
// simulation only. Sends W x H RGB565 pixels per frame in raster order,
// one every PIX_DIV clocks, with frame_start on the first pixel and
// BLANK idle clocks after each frame; a frame once begun is always finished. Pixel (x, y) of frame f is
// cam_pixel(x, y, f) = {R5 = x + 2y + f, G6 = 3x ^ y, B5 = 5y + x/7}
// (each field taken modulo its width), so testbenches can compute what
// they expect. `frames_sent` counts complete frames; `run` gates it.
module cam_model #(
  parameter int W       = 640,
  parameter int H       = 480,
  parameter int PIX_DIV = 3,
  parameter int BLANK   = 100
) (
  input  logic        clk,
  input  logic        run,
  output logic        pix_valid,
  output logic        frame_start,
  output logic [15:0] pix_data,
  output int          frames_sent
);
  function automatic logic [15:0] cam_pixel(int x, int y, int f);
    logic [4:0] r = 5'(x + 2 * y + f);
    logic [5:0] g = 6'((3 * x) ^ y);
    logic [4:0] b = 5'(5 * y + x / 7);
    return {r, g, b};
  endfunction

  int x = 0, y = 0, div = 0, blank = 0;

  initial begin
    pix_valid = 0; frame_start = 0; pix_data = '0; frames_sent = 0;
  end

  always @(posedge clk) begin
    pix_valid   <= 1'b0;
    frame_start <= 1'b0;
    if (blank != 0) blank <= blank - 1;
    else if (div != 0) div <= div - 1;
    else if (run || x != 0 || y != 0) begin
      pix_valid   <= 1'b1;
      frame_start <= (x == 0 && y == 0);
      pix_data    <= cam_pixel(x, y, frames_sent);
      div         <= PIX_DIV - 1;
      if (x == W - 1) begin
        x <= 0;
        if (y == H - 1) begin
          y <= 0;
          frames_sent <= frames_sent + 1;
          blank <= BLANK;
        end else y <= y + 1;
      end else x <= x + 1;
    end
  end
endmodule
