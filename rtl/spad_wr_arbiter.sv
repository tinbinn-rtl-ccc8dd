// spad_wr_arbiter: fixed-priority arbiter for the scratchpad's single
// write slot per CPU cycle.
//
// Requester 0 has the highest priority. In the overlay the order is the
// camera DMA (it cannot pause the camera), the SPI DMA (it can pause the
// SPI clock), the vector unit (it stalls) and the CPU's own stores. The
// grant is combinational from the requests, which are stable during a CPU
// cycle; a requester that sees no grant keeps its request. The paper says
// only that the DMA engines write the scratchpad concurrently with the
// CPU; the priority order is this design's.
module spad_wr_arbiter
  import tinbinn_pkg::*;
#(
  parameter int unsigned N = 4
) (
  input  spad_wr_t         req [N],
  output logic [N-1:0]     gnt,
  output spad_wr_t         win
);

  always_comb begin
    gnt = '0;
    win = '0;
    for (int i = N - 1; i >= 0; i--) begin
      if (req[i].req) begin
        gnt    = '0;
        gnt[i] = 1'b1;
        win    = req[i];
      end
    end
  end

  assert final ($onehot0(gnt));

endmodule
