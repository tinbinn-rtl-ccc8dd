// simd_add16to32: quad-16b to 32b SIMD add, a custom ALU of the vector
// unit.
//
// The convolution unit produces 16-bit signed sums, two per 32-bit word.
// To avoid overflow, 16-bit partial sums are widened into 32-bit sums:
// this unit takes the four 16-bit signed lanes of its two 32-bit operands,
// sign-extends each to 32 bits and adds all four, giving one 32-bit signed
// result. It is purely combinational; the vector unit registers the
// result. The paper names the operation ("quad-16b to 32b SIMD add") and
// its purpose but not its lane arrangement; summing all four lanes into
// one word is this design's reading of it.
module simd_add16to32 (
  input  logic [31:0] src_a,
  input  logic [31:0] src_b,
  output logic [31:0] dst
);

  logic signed [31:0] a_lo, a_hi, b_lo, b_hi;

  assign a_lo = 32'(signed'(src_a[15:0]));
  assign a_hi = 32'(signed'(src_a[31:16]));
  assign b_lo = 32'(signed'(src_b[15:0]));
  assign b_hi = 32'(signed'(src_b[31:16]));
  assign dst  = a_lo + a_hi + b_lo + b_hi;

endmodule
