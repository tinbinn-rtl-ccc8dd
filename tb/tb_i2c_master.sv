// tb_i2c_master: the I2C master writes random registers of the target
// model; checks the stored values, the acknowledge (nack low for the
// target's address, high for another address), the absence of protocol
// errors, that SCL and SDA idle high, and the transfer time: 29 bit
// periods (START, 27 bits, STOP) of 4 x DIV CPU cycles.
module tb_i2c_master;
  localparam int DIV = 4;
  logic clk = 1'b0, rst_n = 1'b1;
  logic [1:0] ph = 0;
  logic ce, start, busy, done, nack, scl, sda_oe, sda_in;
  logic [6:0] dev_addr;
  logic [7:0] reg_addr, data;
  int writes, proto_err;
  int checks = 0, failures = 0;

  i2c_master #(.DIV(DIV)) dut (.*);
  i2c_target_model #(.ADDR(7'h21)) u_cam (.scl(scl), .sda_master_oe(sda_oe), .sda(sda_in),
                                          .writes(writes), .proto_err(proto_err));

  always #5 clk = ~clk;
  initial #1 rst_n = 1'b0;   // an edge, so the asynchronous reset acts
  always @(posedge clk) ph <= (ph == 2) ? 0 : ph + 1;
  assign ce = (ph == 2);

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    start = 0; dev_addr = 0; reg_addr = 0; data = 0;
    repeat (4) @(posedge clk);
    rst_n = 1;
    repeat (6) @(posedge clk);
    checks++; if (!scl || !sda_in) failures++;
    for (int t = 0; t < 12; t++) begin
      automatic int cyc = 0;
      automatic int w0 = writes;
      dev_addr = (t % 4 == 3) ? 7'h35 : 7'h21;
      reg_addr = 8'($urandom); data = 8'($urandom);
      @(negedge clk); while (!ce) @(negedge clk);
      start = 1;
      @(negedge clk); while (!ce) @(negedge clk);
      start = 0;
      while (!done) begin @(negedge clk); while (!ce) @(negedge clk); cyc++; end
      checks += 3;
      if (cyc != 29 * 4 * DIV) begin failures++; $display("t%0d: %0d cycles", t, cyc); end
      if (dev_addr == 7'h21) begin
        if (nack) begin failures++; $display("t%0d: nack", t); end
        if (writes != w0 + 1 || u_cam.regs[reg_addr] !== data) begin failures++; $display("t%0d: reg not written", t); end
      end else begin
        if (!nack) begin failures++; $display("t%0d: no nack for wrong address", t); end
        if (writes != w0) failures++;
      end
      repeat (10) @(posedge clk);
      checks++; if (!scl || !sda_in) failures++;
    end
    checks++; if (proto_err != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
