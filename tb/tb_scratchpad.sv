// tb_scratchpad: checks the three-slot scratchpad against a reference
// array: random two-read/one-write traffic with byte enables, one-CPU-cycle
// read latency, read-before-write within a CPU cycle, holding of the read
// outputs when rd_en is low, and a tick every third fast clock.
module tb_scratchpad;
  import tinbinn_pkg::*;
  localparam int unsigned WORDS = 1024;
  localparam int unsigned AW = $clog2(WORDS);

  logic clk = 1'b0, rst_n = 1'b1;
  logic tick, rd_en, we;
  logic [1:0] phase;
  logic [AW-1:0] ra_addr, rb_addr, waddr;
  logic [31:0] ra_data, rb_data, wdata;
  logic [3:0] wbe;
  logic [31:0] ref_mem [WORDS];
  int checks = 0, failures = 0;

  scratchpad #(.WORDS(WORDS)) dut (.*);

  always #5 clk = ~clk;
  initial #1 rst_n = 1'b0;   // an edge, so the asynchronous reset acts

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // tick spacing
  int last_tick = -1, cyc = 0;
  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (tick) begin
      if (last_tick >= 0) begin
        checks++;
        if (cyc - last_tick != 3) failures++;
      end
      last_tick = cyc;
    end
  end

  task automatic cpu_cycle();
    do @(posedge clk); while (!tick);
    @(posedge clk);   // the tick edge has passed; now in phase 0
  endtask

  initial begin
    logic [31:0] exp_a, exp_b, hold_a, hold_b;
    rd_en = 1'b1; we = 1'b0; ra_addr = '0; rb_addr = '0; waddr = '0;
    wdata = '0; wbe = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // initialise every word through the write slot
    for (int i = 0; i < WORDS; i++) begin
      @(negedge clk);
      while (phase != 2'd0) @(negedge clk);
      we = 1'b1; waddr = AW'(i); wdata = $urandom; wbe = 4'hF;
      ref_mem[i] = wdata;
      cpu_cycle();
    end
    @(negedge clk);
    while (phase != 2'd0) @(negedge clk);
    we = 1'b0;
    for (int n = 0; n < 3000; n++) begin
      ra_addr = AW'($urandom);
      rb_addr = ($urandom_range(0, 3) == 0) ? ra_addr : AW'($urandom);
      we      = $urandom_range(0, 1);
      waddr   = ($urandom_range(0, 2) == 0) ? ra_addr : AW'($urandom);
      wdata   = $urandom;
      wbe     = 4'($urandom);
      rd_en   = ($urandom_range(0, 7) != 0);
      exp_a   = ref_mem[ra_addr];
      exp_b   = ref_mem[rb_addr];
      hold_a  = ra_data;
      hold_b  = rb_data;
      if (we) for (int b = 0; b < 4; b++) if (wbe[b]) ref_mem[waddr][8*b +: 8] = wdata[8*b +: 8];
      // wait for this CPU cycle's tick edge, then look at the outputs
      do @(posedge clk); while (!tick);
      @(negedge clk);
      checks += 2;
      if (rd_en) begin
        if (ra_data !== exp_a) begin failures++; $display("A mismatch @%0d", n); end
        if (rb_data !== exp_b) begin failures++; $display("B mismatch @%0d", n); end
      end else begin
        if (ra_data !== hold_a || rb_data !== hold_b) begin failures++; $display("hold fail @%0d", n); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
