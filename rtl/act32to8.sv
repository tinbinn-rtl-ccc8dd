// act32to8: 32b-to-8b activation function, a custom ALU of the vector
// unit.
//
// Turns a 32-bit signed sum into an 8-bit unsigned activation: negative
// sums become 0 (the ReLU of the network's convolution layers), positive
// sums are shifted right by `shift` bits (the fixed-point scale) and
// clamped to 255. Combinational; the vector unit registers the result and
// writes it as a single byte. The paper gives the operation's width
// (32b in, 8b unsigned out) and that layers use ReLU; the shift-and-clamp
// scaling is this design's choice.
module act32to8 (
  input  logic [31:0] src,
  input  logic [4:0]  shift,
  output logic [7:0]  act
);

  logic [31:0] shifted;

  assign shifted = src >> shift;

  always_comb begin
    if (src[31])                 act = 8'd0;      // ReLU
    else if (shifted > 32'd255)  act = 8'd255;    // saturate
    else                         act = shifted[7:0];
  end

endmodule
