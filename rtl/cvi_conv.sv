// cvi_conv: binarized CNN custom vector instruction.
//
// Computes two overlapping 3x3 convolutions with 1-bit weights over
// unsigned 8-bit inputs. Each element fed in is one row of a column of
// the input map: 8 consecutive bytes, bytes 0..3 in src_a and 4..7 in
// src_b. Two 2:1 byte-window multiplexers pick three bytes for each
// convolution: with sel23 = 0 the low convolution takes bytes 0..2 and the
// high one bytes 1..3 (outputs at byte offsets 0 and 1); with sel23 = 1
// they take bytes 2..4 and 3..5 (offsets 2 and 3). Bytes 6 and 7 are
// fetched but never used, as in the paper's figure. Each selected 24-bit
// row enters a three-stage shift register (row2 -> row1 -> row0), so the
// registers hold the last three rows of the column. The nine bytes of
// each window are negated or not by the nine weight bits (shared by both
// convolutions) and summed by an eight-adder tree into a 16-bit signed
// result. dst carries the low result in bits 15:0 and the high result in
// bits 31:16.
//
// Weight bit 3*r + c multiplies row r (row0 is the oldest, i.e. the top
// row of the window) and byte c of the window (c = 0 is the lowest byte
// offset); a 1 means +1 and a 0 means -1. This bit order and polarity are
// this design's choice.
//
// Timing: one row per enabled cycle (en & in_valid). The result for a
// window is valid (out_valid) in the cycle after its third row was
// accepted, so a column of N rows yields N-2 results. `clear` starts a new
// column by emptying the window. The datapath (muxes, three row
// registers, negation, adder trees, 2 x 16b result) follows the paper's
// figure; the warm-up count and handshake are this design's.
module cvi_conv (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        en,
  input  logic        clear,
  input  logic        in_valid,
  input  logic        sel23,
  input  logic [8:0]  weights,
  input  logic [31:0] src_a,
  input  logic [31:0] src_b,
  output logic        out_valid,
  output logic [31:0] dst
);

  logic [63:0] bytes8;
  logic [23:0] mux_lo, mux_hi;
  logic [23:0] row_lo [3];   // [2] newest .. [0] oldest
  logic [23:0] row_hi [3];
  logic [1:0]  fill;

  assign bytes8 = {src_b, src_a};
  assign mux_lo = sel23 ? bytes8[16 +: 24] : bytes8[0 +: 24];
  assign mux_hi = sel23 ? bytes8[24 +: 24] : bytes8[8 +: 24];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fill      <= '0;
      out_valid <= 1'b0;
      for (int r = 0; r < 3; r++) begin
        row_lo[r] <= '0;
        row_hi[r] <= '0;
      end
    end else if (clear) begin
      fill      <= '0;
      out_valid <= 1'b0;
    end else if (en) begin
      out_valid <= in_valid && (fill == 2'd2);
      if (in_valid) begin
        row_lo[2] <= mux_lo;
        row_lo[1] <= row_lo[2];
        row_lo[0] <= row_lo[1];
        row_hi[2] <= mux_hi;
        row_hi[1] <= row_hi[2];
        row_hi[0] <= row_hi[1];
        if (fill != 2'd2) fill <= fill + 2'd1;
      end
    end
  end

  // Programmable negation of the nine 8b inputs, then the adder tree.
  function automatic logic signed [15:0] conv3x3(input logic [23:0] r0,
                                                 input logic [23:0] r1,
                                                 input logic [23:0] r2,
                                                 input logic [8:0]  w);
    logic [71:0] win;
    logic signed [15:0] sum;
    win = {r2, r1, r0};
    sum = '0;
    for (int k = 0; k < 9; k++) begin
      if (w[k]) sum = sum + $signed({8'd0, win[8*k +: 8]});
      else      sum = sum - $signed({8'd0, win[8*k +: 8]});
    end
    return sum;
  endfunction

  assign dst[15:0]  = conv3x3(row_lo[0], row_lo[1], row_lo[2], weights);
  assign dst[31:16] = conv3x3(row_hi[0], row_hi[1], row_hi[2], weights);

endmodule
