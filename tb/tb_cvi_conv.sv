// tb_cvi_conv: self-checking test of the binarized convolution unit.
//
// Feeds random columns of 8-byte rows (with random idle cycles), for both
// byte-offset selections and random weights, and compares every result
// with a direct 3x3 convolution computed here from the same bytes. Also
// checks that each result appears exactly one cycle after its window's
// third row and that a column of N rows gives N-2 results.
module tb_cvi_conv;
  logic        clk = 1'b0;
  logic        rst_n = 1'b1;
  logic        en, clear, in_valid, sel23, out_valid;
  logic [8:0]  weights;
  logic [31:0] src_a, src_b, dst;
  int checks = 0, failures = 0;

  localparam int N = 12;
  logic [7:0] img [N][8];

  cvi_conv dut (.*);

  always #5 clk = ~clk;
  initial #1 rst_n = 1'b0;   // an edge, so the asynchronous reset acts

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int ref_conv(int top, int off, logic [8:0] w);
    int s = 0;
    for (int r = 0; r < 3; r++)
      for (int c = 0; c < 3; c++)
        s += w[3*r+c] ? int'(img[top+r][off+c]) : -int'(img[top+r][off+c]);
    return s;
  endfunction

  initial begin
    en = 1'b1; clear = 1'b0; in_valid = 1'b0; sel23 = 1'b0;
    weights = '0; src_a = '0; src_b = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int col = 0; col < 40; col++) begin
      automatic int got = 0;
      automatic int off;
      for (int r = 0; r < N; r++)
        for (int b = 0; b < 8; b++) img[r][b] = 8'($urandom);
      if (col == 0) for (int r = 0; r < N; r++) for (int b = 0; b < 8; b++) img[r][b] = 8'd255;
      weights = (col == 0) ? 9'h1FF : (col == 1 ? 9'h000 : 9'($urandom));
      sel23   = col[0];
      off     = sel23 ? 2 : 0;
      @(negedge clk); clear = 1'b1; @(negedge clk); clear = 1'b0;
      for (int r = 0; r < N; r++) begin
        // random idle cycles between rows
        while ($urandom_range(0, 3) == 0) begin
          in_valid = 1'b0;
          @(negedge clk);
          checks++;
          if (out_valid) begin failures++; $display("col %0d: out_valid while idle", col); end
        end
        in_valid = 1'b1;
        src_a = {img[r][3], img[r][2], img[r][1], img[r][0]};
        src_b = {img[r][7], img[r][6], img[r][5], img[r][4]};
        @(negedge clk);
        in_valid = 1'b0;
        checks++;
        if (out_valid !== (r >= 2)) begin
          failures++; $display("col %0d row %0d: out_valid=%0b", col, r, out_valid);
        end
        if (r >= 2) begin
          automatic int lo = ref_conv(r - 2, off, weights);
          automatic int hi = ref_conv(r - 2, off + 1, weights);
          got++;
          checks += 2;
          if ($signed(dst[15:0]) != lo) begin
            failures++; $display("col %0d row %0d lo: got %0d exp %0d", col, r, $signed(dst[15:0]), lo);
          end
          if ($signed(dst[31:16]) != hi) begin
            failures++; $display("col %0d row %0d hi: got %0d exp %0d", col, r, $signed(dst[31:16]), hi);
          end
        end
      end
      checks++;
      if (got != N - 2) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
