// tb_downscale16: sends two full 640 x 480 frames from the camera model
// through the downscaler and checks all 2 x 1200 output pixels against
// 16 x 16 block averages computed here, the raster order, the out_last
// marker and the output count.
module tb_downscale16;
  logic clk = 1'b0, rst_n = 1'b1, run = 1'b0;
  logic pix_valid, frame_start, out_valid, out_last;
  logic [15:0] pix_data;
  logic [31:0] out_rgba;
  int frames_sent;
  int checks = 0, failures = 0, nout = 0;

  downscale16 dut (.*);
  cam_model #(.W(640), .H(480), .PIX_DIV(1), .BLANK(50)) u_cam (.*);

  always #5 clk = ~clk;
  initial #1 rst_n = 1'b0;   // an edge, so the asynchronous reset acts

  function automatic logic [31:0] ref_px(int bx, int by, int f);
    int sr = 0, sg = 0, sb = 0;
    for (int y = 16 * by; y < 16 * by + 16; y++)
      for (int x = 16 * bx; x < 16 * bx + 16; x++) begin
        logic [15:0] p = u_cam.cam_pixel(x, y, f);
        sr += int'({p[15:11], p[15:13]});
        sg += int'({p[10:5], p[10:9]});
        sb += int'({p[4:0], p[4:2]});
      end
    return {8'd0, 8'(sb / 256), 8'(sg / 256), 8'(sr / 256)};
  endfunction

  always @(posedge clk) if (out_valid) begin
    automatic int f = nout / 1200, i = nout % 1200;
    automatic logic [31:0] e = ref_px(i % 40, i / 40, f);
    checks += 2;
    if (out_rgba !== e) begin failures++; $display("px %0d: got %h exp %h", nout, out_rgba, e); end
    if (out_last !== (i == 1199)) begin failures++; $display("px %0d: out_last %b", nout, out_last); end
    nout++;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    run = 1'b1;
    wait (frames_sent == 2);
    run = 1'b0;
    repeat (10) @(posedge clk);
    checks++;
    if (nout != 2400) begin failures++; $display("%0d outputs", nout); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
