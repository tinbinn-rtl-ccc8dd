// lve: vector streaming unit (Lightweight Vector Extensions) with the
// overlay's custom ALUs.
//
// One command streams `len` elements: each element is a 32-bit word read
// from the scratchpad at stream A and one at stream B (two reads per CPU
// cycle), passed through the selected ALU, and the result written back at
// the destination stream (one write per CPU cycle). The unit generates all
// addresses itself from the base addresses and byte strides of the
// command, so software pays no loop, load/store or address overhead. The
// ALU is the RV32I ALU (add, sub, and, or, xor, slt, sltu, sll, srl, sra)
// plus three custom ALUs: the binarized convolution (cvi_conv), the
// quad-16b to 32b add (simd_add16to32) and the 32b-to-8b activation
// (act32to8). A convolution pass walks down one column with
// src_b = src_a + 4 and stride = row pitch; it writes len-2 results.
// The activation writes one byte at its (byte) destination address; all
// other operations write whole words.
//
// Pipeline, in CPU cycles (all registers are enabled by `ce`):
//   issue  - read addresses of element k go to the scratchpad
//   exec   - element k's operands arrive; the ALU result is registered
//            (for OP_CVI the row shift register advances instead)
//   write  - the result of element k requests the write slot
// A write that the scratchpad arbiter does not grant (wr_gnt low) stalls
// the whole pipeline for that cycle; rd_en then tells the scratchpad to
// hold its read outputs so the operands in flight are kept.
//
// The paper describes what LVE does but its design is proprietary; this
// pipeline, the command format and the stall rule are this design's own.
module lve
  import tinbinn_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        ce,
  // command port from the CPU
  input  logic        start,
  input  lve_cmd_t    cmd,
  output logic        busy,
  output logic        done,
  // scratchpad read ports
  output waddr_t      ra_addr,
  output waddr_t      rb_addr,
  output logic        rd_en,
  input  logic [31:0] ra_data,
  input  logic [31:0] rb_data,
  // scratchpad write slot
  output spad_wr_t    wr,
  input  logic        wr_gnt
);

  lve_cmd_t         c_q;
  baddr_t           a_ptr, b_ptr, d_ptr;
  logic [LEN_W-1:0] issue_left;
  logic             v_exec;      // operands of an element arrive this cycle
  logic             v_res;       // res_q holds a result (non-CVI ops)
  logic [31:0]      res_q;
  logic             cvi_valid;
  logic [31:0]      cvi_dst;
  logic [31:0]      qadd_dst;
  logic [7:0]       act_out;
  logic [31:0]      alu;
  logic             w_valid;
  logic             stall, adv;
  logic             is_cvi;

  assign is_cvi  = (c_q.op == OP_CVI);
  assign w_valid = busy && (is_cvi ? cvi_valid : v_res);
  assign stall   = w_valid && !wr_gnt;
  assign adv     = ce && !stall;
  assign rd_en   = !stall;

  assign ra_addr = a_ptr[BADDR_W-1:2];
  assign rb_addr = b_ptr[BADDR_W-1:2];

  simd_add16to32 u_qadd (.src_a(ra_data), .src_b(rb_data), .dst(qadd_dst));
  act32to8       u_act  (.src(ra_data), .shift(c_q.act_shift), .act(act_out));

  cvi_conv u_cvi (
    .clk      (clk),
    .rst_n    (rst_n),
    .en       (adv && busy),
    .clear    (ce && start && !busy),
    .in_valid (v_exec && is_cvi),
    .sel23    (c_q.sel23),
    .weights  (c_q.weights),
    .src_a    (ra_data),
    .src_b    (rb_data),
    .out_valid(cvi_valid),
    .dst      (cvi_dst)
  );

  always_comb begin
    unique case (c_q.op)
      OP_ADD:  alu = ra_data + rb_data;
      OP_SUB:  alu = ra_data - rb_data;
      OP_AND:  alu = ra_data & rb_data;
      OP_OR:   alu = ra_data | rb_data;
      OP_XOR:  alu = ra_data ^ rb_data;
      OP_SLT:  alu = {31'd0, $signed(ra_data) < $signed(rb_data)};
      OP_SLTU: alu = {31'd0, ra_data < rb_data};
      OP_SLL:  alu = ra_data << rb_data[4:0];
      OP_SRL:  alu = ra_data >> rb_data[4:0];
      OP_SRA:  alu = $unsigned($signed(ra_data) >>> rb_data[4:0]);
      OP_QADD: alu = qadd_dst;
      OP_ACT:  alu = {4{act_out}};
      default: alu = '0;
    endcase
  end

  always_comb begin
    wr.req  = w_valid;
    wr.addr = d_ptr[BADDR_W-1:2];
    wr.data = is_cvi ? cvi_dst : res_q;
    wr.be   = (c_q.op == OP_ACT) ? (4'b0001 << d_ptr[1:0]) : 4'b1111;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c_q        <= '0;
      a_ptr      <= '0;
      b_ptr      <= '0;
      d_ptr      <= '0;
      issue_left <= '0;
      v_exec     <= 1'b0;
      v_res      <= 1'b0;
      res_q      <= '0;
      busy       <= 1'b0;
      done       <= 1'b0;
    end else if (ce) begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          c_q        <= cmd;
          a_ptr      <= cmd.src_a;
          b_ptr      <= cmd.src_b;
          d_ptr      <= cmd.dst;
          issue_left <= cmd.len;
          v_exec     <= 1'b0;
          v_res      <= 1'b0;
          busy       <= 1'b1;
        end
      end else if (!stall) begin
        // issue stage
        v_exec <= (issue_left != '0);
        if (issue_left != '0) begin
          a_ptr      <= a_ptr + c_q.stride_a;
          b_ptr      <= b_ptr + c_q.stride_b;
          issue_left <= issue_left - 1'b1;
        end
        // exec stage
        v_res <= v_exec && !is_cvi;
        res_q <= alu;
        // write stage
        if (w_valid) d_ptr <= d_ptr + c_q.stride_d;
        // finished when nothing is left to issue and the pipe is empty
        if (issue_left == '0 && !v_exec && !w_valid) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  // A write is only requested while a command runs.
  assert property (@(posedge clk) disable iff (!rst_n) wr.req |-> busy);

endmodule
