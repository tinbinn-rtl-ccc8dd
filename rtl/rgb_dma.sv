// rgb_dma: writes the downscaled camera pixels into the scratchpad as
// 32-bit aligned RGBA words.
//
// While `enable` is high, every pixel from the downscaler is queued in a
// small FIFO (it arrives on the fast clock, at most one per 16 camera
// pixels) and written, one per granted write slot, to consecutive words
// starting at byte address `base`. The address restarts at `base` with
// each camera frame (frame_start). `frame_done` pulses for one CPU cycle
// when the frame's last pixel has been written, and `frames` counts
// completed frames. The FIFO depth (DEPTH) and the restart rule are this
// design's; the paper gives only that the pixels are DMA'd as 32-bit
// aligned RGBA words. If the FIFO is full a pixel is dropped and counted
// in `dropped`; with this DMA given first claim on the write slot, that
// cannot happen at the reference rates.
module rgb_dma
  import tinbinn_pkg::*;
#(
  parameter int unsigned DEPTH = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        ce,
  input  logic        enable,
  input  baddr_t      base,
  input  logic        frame_start,
  input  logic        pix_valid,
  input  logic        pix_last,
  input  logic [31:0] pix_rgba,
  output spad_wr_t    wr,
  input  logic        wr_gnt,
  output logic        frame_done,
  output logic [15:0] frames,
  output logic [15:0] dropped
);

  localparam int unsigned PW = $clog2(DEPTH);

  logic [32:0]   fifo [DEPTH];
  logic [PW:0]   wp, rp;
  logic          empty, full;
  waddr_t        ptr;

  assign empty = (wp == rp);
  assign full  = (wp[PW-1:0] == rp[PW-1:0]) && (wp[PW] != rp[PW]);

  assign wr.req  = !empty;
  assign wr.addr = ptr;
  assign wr.data = fifo[rp[PW-1:0]][31:0];
  assign wr.be   = 4'b1111;

  always_ff @(posedge clk) begin
    if (enable && pix_valid && !full) fifo[wp[PW-1:0]] <= {pix_last, pix_rgba};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp         <= '0;
      rp         <= '0;
      ptr        <= '0;
      frame_done <= 1'b0;
      frames     <= '0;
      dropped    <= '0;
    end else begin
      if (enable && pix_valid) begin
        if (!full) wp <= wp + 1'b1;
        else       dropped <= dropped + 1'b1;
      end
      if (frame_start && empty) ptr <= base[BADDR_W-1:2];
      if (ce) begin
        frame_done <= 1'b0;
        if (!empty && wr_gnt) begin
          rp  <= rp + 1'b1;
          ptr <= ptr + 1'b1;
          if (fifo[rp[PW-1:0]][32]) begin
            frame_done <= 1'b1;
            frames     <= frames + 1'b1;
          end
        end
      end
    end
  end

  // A pending pixel keeps its address and data until its write is granted.
  assert property (@(posedge clk) disable iff (!rst_n)
                   (ce && wr.req && !wr_gnt) |=> (wr.req && $stable(wr.data) && $stable(wr.addr)));

endmodule
