// i2c_target_model: behavioural model of the camera's I2C register
// interface, for simulation only. Recognises START and STOP, takes bits
// on rising SCL, acknowledges bytes addressed to ADDR (write direction)
// by pulling SDA low during the ninth clock, and stores register writes
// (register address byte, then data byte) in regs[]. The bus is open
// drain: sda is low when either side pulls it low. `writes` counts stored
// writes; `proto_err` counts bytes that arrive outside START..STOP.
module i2c_target_model #(
  parameter logic [6:0] ADDR = 7'h21
) (
  input  logic scl,
  input  logic sda_master_oe,
  output logic sda,
  output int   writes,
  output int   proto_err
);
  logic pull = 1'b0;
  logic [7:0] regs [256];
  logic [7:0] sh;
  int   nbit = 0, nbyte = 0;
  bit   active = 0, selected = 0;
  logic [7:0] ra;

  assign sda = !(sda_master_oe || pull);

  initial begin writes = 0; proto_err = 0; end

  always @(negedge sda) if (scl) begin active = 1; selected = 0; nbit = 0; nbyte = 0; end
  always @(posedge sda) if (scl) begin active = 0; pull = 0; end

  always @(posedge scl) if (active && nbit < 8) begin
    sh = {sh[6:0], sda};
    nbit++;
  end

  always @(negedge scl) begin
    if (!active) begin
      pull = 0;
    end else if (nbit == 8) begin
      // end of a byte: decide whether to acknowledge
      if (nbyte == 0) selected = (sh == {ADDR, 1'b0});
      else if (nbyte == 1) ra = sh;
      else if (nbyte == 2 && selected) begin regs[ra] = sh; writes++; end
      else if (nbyte > 2) proto_err++;
      pull = selected;
      nbit = 9;
    end else if (nbit == 9) begin
      pull = 0;
      nbit = 0;
      nbyte++;
    end
  end
endmodule
