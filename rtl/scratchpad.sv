// scratchpad: 128 kB single-ported RAM shared by the vector unit, the
// CPU and the two DMA engines.
//
// The RAM has one port and runs on the fast clock `clk`, three times the
// CPU clock (72 MHz against 24 MHz in the reference system). A phase
// counter gives every CPU cycle three RAM slots: phase 0 reads port A,
// phase 1 reads port B, phase 2 performs the one write. `tick` is high
// in phase 2 and is the clock enable of all CPU-rate logic, whose
// registers therefore change only at the end of phase 2 and hold the
// request signals stable for all three slots.
//
// Timing, in CPU cycles: addresses presented in cycle n give data on
// ra_data/rb_data in cycle n+1 (read-before-write: a write in cycle n is
// not seen by the reads of cycle n). When rd_en is low at the tick the
// read outputs keep their old value, which lets a stalled consumer keep
// its operands. The three-slot time multiplexing is the paper's; the
// slot order and the hold input are this design's choice. In the FPGA
// the array is four 32 kB SPRAM blocks side by side; here it is one array
// with byte enables.
module scratchpad
  import tinbinn_pkg::*;
#(
  parameter int unsigned WORDS = SPAD_WORDS
) (
  input  logic                     clk,
  input  logic                     rst_n,
  output logic                     tick,      // CPU clock enable
  output logic [1:0]               phase,
  input  logic [$clog2(WORDS)-1:0] ra_addr,
  input  logic [$clog2(WORDS)-1:0] rb_addr,
  input  logic                     rd_en,
  output logic [31:0]              ra_data,
  output logic [31:0]              rb_data,
  input  logic                     we,
  input  logic [$clog2(WORDS)-1:0] waddr,
  input  logic [31:0]              wdata,
  input  logic [3:0]               wbe
);

  logic [31:0] mem [WORDS];
  logic [31:0] tmp_a, tmp_b;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) phase <= 2'd0;
    else        phase <= (phase == 2'd2) ? 2'd0 : phase + 2'd1;
  end

  assign tick = (phase == 2'd2);

  // One RAM access per fast cycle, as a single-ported RAM allows.
  always_ff @(posedge clk) begin
    unique case (phase)
      2'd0: tmp_a <= mem[ra_addr];
      2'd1: tmp_b <= mem[rb_addr];
      2'd2: if (we) begin
        for (int b = 0; b < 4; b++)
          if (wbe[b]) mem[waddr][8*b +: 8] <= wdata[8*b +: 8];
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ra_data <= '0;
      rb_data <= '0;
    end else if (tick && rd_en) begin
      ra_data <= tmp_a;
      rb_data <= tmp_b;
    end
  end

endmodule
