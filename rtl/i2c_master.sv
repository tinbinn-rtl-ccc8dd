// i2c_master: I2C master with which the CPU writes the camera's
// configuration registers.
//
// One `start` (sampled on a CPU cycle, ce high) performs one register
// write: START, the 7-bit device address with the write bit, the 8-bit
// register address, the 8-bit data, STOP. Bytes go MSB first and the
// target acknowledges each byte; a missing acknowledge sets `nack`
// (the transfer still runs to its STOP). Each bit takes four quarter
// periods of DIV CPU cycles: SCL low while SDA changes, SCL high for two
// quarters (SDA is sampled at the second), SCL low again. SDA is open
// drain: sda_oe = 1 pulls the line low, and sda_in reads it back. SCL is
// driven by the master only (no clock stretching). `done` pulses for one
// CPU cycle at the end.
//
// The paper only shows an I2C block between the CPU and the camera; the
// write-only protocol subset, the timing (DIV = 60 gives 100 kHz from a
// 24 MHz CPU clock) and the interface are this design's.
module i2c_master #(
  parameter int unsigned DIV = 60
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       ce,
  input  logic       start,
  input  logic [6:0] dev_addr,
  input  logic [7:0] reg_addr,
  input  logic [7:0] data,
  output logic       busy,
  output logic       done,
  output logic       nack,
  output logic       scl,
  output logic       sda_oe,
  input  logic       sda_in
);

  typedef enum logic [1:0] {S_IDLE, S_START, S_BITS, S_STOP} state_e;

  localparam int unsigned NBITS = 27;   // 3 bytes x (8 data + 1 ack)
  localparam int unsigned DW    = $clog2(DIV + 1);

  state_e            state;
  logic [DW-1:0]     div_cnt;
  logic [1:0]        q;                 // quarter within a bit
  logic [4:0]        bit_idx;
  logic [NBITS-1:0]  sh;                // 1 in an ack slot = release SDA
  logic              tick_q;

  assign tick_q = (div_cnt == DW'(DIV - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      div_cnt <= '0;
      q       <= '0;
      bit_idx <= '0;
      sh      <= '0;
      busy    <= 1'b0;
      done    <= 1'b0;
      nack    <= 1'b0;
      scl     <= 1'b1;
      sda_oe  <= 1'b0;
    end else if (ce) begin
      done <= 1'b0;
      if (state == S_IDLE) begin
        scl    <= 1'b1;
        sda_oe <= 1'b0;
        if (start) begin
          state   <= S_START;
          busy    <= 1'b1;
          nack    <= 1'b0;
          div_cnt <= '0;
          q       <= '0;
          bit_idx <= '0;
          sh      <= {dev_addr, 1'b0, 1'b1, reg_addr, 1'b1, data, 1'b1};
        end
      end else begin
        div_cnt <= tick_q ? '0 : div_cnt + 1'b1;
        if (tick_q) begin
          q <= q + 1'b1;
          unique case (state)
            S_START: begin
              // SDA falls while SCL is high, then SCL falls
              unique case (q)
                2'd0: begin scl <= 1'b1; sda_oe <= 1'b0; end
                2'd1: sda_oe <= 1'b1;
                2'd2: scl <= 1'b0;
                2'd3: state <= S_BITS;
              endcase
            end
            S_BITS: begin
              unique case (q)
                2'd0: begin scl <= 1'b0; sda_oe <= !sh[NBITS-1]; end
                2'd1: scl <= 1'b1;
                2'd2: if (bit_idx == 5'd8 || bit_idx == 5'd17 || bit_idx == 5'd26)
                        if (sda_in) nack <= 1'b1;
                2'd3: begin
                  scl     <= 1'b0;
                  sh      <= {sh[NBITS-2:0], 1'b0};
                  bit_idx <= bit_idx + 1'b1;
                  if (bit_idx == 5'(NBITS - 1)) state <= S_STOP;
                end
              endcase
            end
            S_STOP: begin
              // SDA rises while SCL is high
              unique case (q)
                2'd0: begin scl <= 1'b0; sda_oe <= 1'b1; end
                2'd1: scl <= 1'b1;
                2'd2: sda_oe <= 1'b0;
                2'd3: begin
                  state <= S_IDLE;
                  busy  <= 1'b0;
                  done  <= 1'b1;
                end
              endcase
            end
            default: ;
          endcase
        end
      end
    end
  end

endmodule
