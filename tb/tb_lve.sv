// tb_lve: self-checking test of the vector streaming unit.
//
// The unit is connected to a behavioural two-read/one-write RAM with one
// CPU cycle of read latency and a hold input, as the scratchpad behaves.
// Every operation is run on random data; the RAM contents afterwards are
// compared word by word with results computed here. Convolution passes
// are checked against a direct 3x3 convolution, and activation results as
// single bytes. The write grant is withheld at random in half the runs to
// exercise the stall; without stalls a command of len elements must finish
// within len + 3 CPU cycles (one element per cycle).
module tb_lve;
  import tinbinn_pkg::*;

  logic clk = 1'b0, rst_n = 1'b1, ce;
  logic start, busy, done, rd_en, wr_gnt;
  lve_cmd_t cmd;
  waddr_t ra_addr, rb_addr;
  logic [31:0] ra_data, rb_data;
  spad_wr_t wr;
  int checks = 0, failures = 0, stalls = 0;

  localparam int MW = 4096;     // modelled words (addresses wrap)
  logic [31:0] mem [MW];
  logic [31:0] expm [MW];
  logic [1:0] ph = 0;
  logic deny;

  lve dut (.*);

  always #5 clk = ~clk;
  initial #1 rst_n = 1'b0;   // an edge, so the asynchronous reset acts
  always @(posedge clk) ph <= (ph == 2) ? 0 : ph + 1;
  assign ce = (ph == 2);
  assign wr_gnt = !deny;

  // behavioural scratchpad: reads and the write at the tick edge
  always @(posedge clk) if (ce) begin
    if (rd_en) begin
      ra_data <= mem[ra_addr % MW];
      rb_data <= mem[rb_addr % MW];
    end
    if (wr.req && wr_gnt)
      for (int b = 0; b < 4; b++) if (wr.be[b]) mem[wr.addr % MW][8*b +: 8] <= wr.data[8*b +: 8];
    if (wr.req && !wr_gnt) stalls++;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input lve_cmd_t c, input bit allow_stall, output int cycles);
    cycles = 0;
    @(negedge clk);
    while (!ce) @(negedge clk);
    cmd = c; start = 1'b1;
    @(negedge clk); while (!ce) @(negedge clk);
    start = 1'b0;
    while (!done) begin
      deny = allow_stall && ($urandom_range(0, 2) == 0);
      cycles++;
      @(negedge clk); while (!ce) @(negedge clk);
    end
    deny = 1'b0;
  endtask

  function automatic logic [31:0] ref_alu(lve_op_e op, logic [31:0] a, logic [31:0] b);
    case (op)
      OP_ADD:  return a + b;
      OP_SUB:  return a - b;
      OP_AND:  return a & b;
      OP_OR:   return a | b;
      OP_XOR:  return a ^ b;
      OP_SLT:  return ($signed(a) < $signed(b)) ? 1 : 0;
      OP_SLTU: return (a < b) ? 1 : 0;
      OP_SLL:  return a << b[4:0];
      OP_SRL:  return a >> b[4:0];
      OP_SRA:  return $signed(a) >>> b[4:0];
      OP_QADD: return 32'($signed(a[15:0])) + 32'($signed(a[31:16]))
                    + 32'($signed(b[15:0])) + 32'($signed(b[31:16]));
      default: return 0;
    endcase
  endfunction

  function automatic logic [7:0] ref_act(logic [31:0] v, logic [4:0] sh);
    longint x = longint'($signed(v));
    if (x < 0) return 0;
    x = x >> sh;
    return (x > 255) ? 8'd255 : 8'(x);
  endfunction

  function automatic logic [7:0] mbyte(int baddr);
    return expm[(baddr / 4) % MW][8*(baddr % 4) +: 8];
  endfunction

  task automatic compare(string what);
    int bad = 0;
    for (int i = 0; i < MW; i++) if (mem[i] !== expm[i]) begin
      if (bad < 4) $display("%s: word %0d got %h exp %h", what, i, mem[i], expm[i]);
      bad++;
    end
    checks++;
    if (bad != 0) failures++;
  endtask

  initial begin
    lve_cmd_t c;
    int cyc;
    start = 1'b0; cmd = '0; deny = 1'b0;
    for (int i = 0; i < MW; i++) begin mem[i] = $urandom; expm[i] = mem[i]; end
    repeat (4) @(posedge clk);
    rst_n = 1'b1;

    for (int t = 0; t < 60; t++) begin
      automatic bit st = t[0];
      c = '0;
      c.op = lve_op_e'(t % 13);
      if (c.op == OP_CVI) begin
        // one column pass down a 40-byte-pitch map of 34 rows
        automatic int col = 4 * $urandom_range(0, 8);
        automatic int pitch = 40;
        automatic int base = 4 * $urandom_range(0, 200);
        automatic int dbase = 8192 + 4 * $urandom_range(0, 200);
        automatic int off;
        c.src_a = baddr_t'(base + col); c.stride_a = baddr_t'(pitch);
        c.src_b = baddr_t'(base + col + 4); c.stride_b = baddr_t'(pitch);
        c.dst = baddr_t'(dbase); c.stride_d = 4;
        c.len = 34; c.weights = 9'($urandom); c.sel23 = $urandom_range(0, 1);
        off = c.sel23 ? 2 : 0;
        for (int k = 0; k < 32; k++) begin
          automatic int lo = 0, hi = 0;
          for (int r = 0; r < 3; r++) for (int cc = 0; cc < 3; cc++) begin
            automatic int bl = int'(mbyte(base + col + (k + r) * pitch + off + cc));
            automatic int bh = int'(mbyte(base + col + (k + r) * pitch + off + cc + 1));
            lo += c.weights[3*r+cc] ? bl : -bl;
            hi += c.weights[3*r+cc] ? bh : -bh;
          end
          expm[((dbase + 4 * k) / 4) % MW] = {16'(hi), 16'(lo)};
        end
      end else if (c.op == OP_ACT) begin
        automatic int base = 4 * $urandom_range(0, 500);
        automatic int dbase = 12000 + $urandom_range(0, 3);
        c.src_a = baddr_t'(base); c.stride_a = 4;
        c.src_b = baddr_t'(base); c.stride_b = 0;
        c.dst = baddr_t'(dbase); c.stride_d = 1;
        c.len = 16'($urandom_range(1, 64)); c.act_shift = 5'($urandom_range(0, 12));
        for (int i = 0; i < int'(c.len); i++) begin
          if (i % 3 == 0) expm[(base / 4 + i) % MW] = $urandom_range(0, 600) << c.act_shift;
          if (i % 3 == 1) expm[(base / 4 + i) % MW] = -$urandom_range(1, 600);
        end
        for (int i = 0; i < MW; i++) mem[i] = expm[i];
        for (int i = 0; i < int'(c.len); i++)
          expm[((dbase + i) / 4) % MW][8*((dbase + i) % 4) +: 8] =
            ref_act(expm[(base / 4 + i) % MW], c.act_shift);
      end else begin
        automatic int a = 4 * $urandom_range(0, 1000);
        automatic int b = 4 * $urandom_range(1000, 2000);
        automatic int d = 4 * $urandom_range(2000, 3000);
        automatic int sa = 4 * $urandom_range(1, 3);
        c.src_a = baddr_t'(a); c.stride_a = baddr_t'(sa);
        c.src_b = baddr_t'(b); c.stride_b = 4;
        c.dst = baddr_t'(d); c.stride_d = 4;
        c.len = 16'($urandom_range(0, 50));
        for (int i = 0; i < int'(c.len); i++)
          expm[(d / 4 + i) % MW] = ref_alu(c.op, expm[(a / 4 + sa / 4 * i) % MW], expm[(b / 4 + i) % MW]);
      end
      run(c, st, cyc);
      compare($sformatf("test %0d op %s", t, c.op.name()));
      if (!st) begin
        checks++;
        if (cyc > int'(c.len) + 3) begin
          failures++;
          $display("op %s len %0d took %0d cycles", c.op.name(), c.len, cyc);
        end
      end
    end
    checks++;
    if (stalls == 0) begin failures++; $display("no stall happened"); end
    $display("stalls: %0d", stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
