// tinbinn_pkg: types and constants shared by the TinBiNN overlay.
//
// The scratchpad is 128 kB, addressed by the vector unit with 17-bit byte
// addresses and stored as 32768 words of 32 bits. The vector unit (LVE)
// receives one command per vector operation; the command names the
// operation, three byte address streams with their strides, the element
// count and the settings of the custom operations. The operation codes,
// the address width of the strides and all field widths are this
// design's choice; the paper names the operations but not their encoding.
package tinbinn_pkg;

  localparam int unsigned SPAD_BYTES  = 131072;          // 128 kB scratchpad
  localparam int unsigned SPAD_WORDS  = SPAD_BYTES / 4;
  localparam int unsigned BADDR_W     = $clog2(SPAD_BYTES); // 17: byte address
  localparam int unsigned WADDR_W     = BADDR_W - 2;        // 15: word address
  localparam int unsigned LEN_W       = 16;

  typedef logic [BADDR_W-1:0] baddr_t;
  typedef logic [WADDR_W-1:0] waddr_t;

  // Operations the vector unit streams through its ALU. The first ten are
  // the RV32I ALU operations; the last three are the custom ALUs that the
  // overlay inserts.
  typedef enum logic [3:0] {
    OP_ADD   = 4'd0,
    OP_SUB   = 4'd1,
    OP_AND   = 4'd2,
    OP_OR    = 4'd3,
    OP_XOR   = 4'd4,
    OP_SLT   = 4'd5,
    OP_SLTU  = 4'd6,
    OP_SLL   = 4'd7,
    OP_SRL   = 4'd8,
    OP_SRA   = 4'd9,
    OP_CVI   = 4'd10,  // binarized 3x3 convolution, two outputs per row
    OP_QADD  = 4'd11,  // quad-16b to 32b SIMD add
    OP_ACT   = 4'd12   // 32b to 8b activation, byte write
  } lve_op_e;

  typedef struct packed {
    lve_op_e           op;
    baddr_t            src_a;     // byte address of operand A stream
    baddr_t            stride_a;  // byte step of A per element
    baddr_t            src_b;
    baddr_t            stride_b;
    baddr_t            dst;       // byte address of result stream
    baddr_t            stride_d;  // byte step per result written
    logic [LEN_W-1:0]  len;       // elements read from each source
    logic [8:0]        weights;   // CVI: 3x3 weight bits, 1 = +1, 0 = -1
    logic              sel23;     // CVI: 0 = byte offsets 0/1, 1 = 2/3
    logic [4:0]        act_shift; // ACT: right shift before saturation
  } lve_cmd_t;

  // One write request to the scratchpad's single write slot.
  typedef struct packed {
    logic        req;
    waddr_t      addr;
    logic [31:0] data;
    logic [3:0]  be;
  } spad_wr_t;

endpackage
