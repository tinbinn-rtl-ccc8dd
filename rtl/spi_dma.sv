// spi_dma: DMA engine that copies 32-bit words from the SPI flash ROM
// (which holds the binary weights) into the scratchpad while the CPU keeps
// running.
//
// On `start` (sampled on a CPU cycle, ce high) the engine lowers cs_n,
// sends the standard serial-flash READ command (0x03) and the 24-bit
// flash address MSB first, then clocks in nwords x 32 bits. Each group of
// four bytes becomes one scratchpad word, the first byte read landing in
// byte lane 0 (little-endian), at consecutive word addresses from
// spad_addr. SPI mode 0: MOSI changes while SCLK is low, MISO is sampled
// as SCLK rises. SCLK toggles once per CPU cycle, i.e. at half the CPU
// clock. When a word is ready the engine requests the scratchpad write
// slot and holds SCLK low until the write is granted, so the scratchpad
// arbiter may delay it without losing data. `done` pulses for one CPU
// cycle after the last word is written.
//
// The paper says only that a DMA engine moves 32-bit values from the SPI
// flash into the scratchpad concurrently with the CPU; the flash command,
// SPI mode, clock rate, byte order and back-pressure are this design's.
module spi_dma
  import tinbinn_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        ce,
  input  logic        start,
  input  logic [23:0] flash_addr,
  input  baddr_t      spad_addr,
  input  logic [15:0] nwords,
  output logic        busy,
  output logic        done,
  // SPI flash pins
  output logic        sclk,
  output logic        cs_n,
  output logic        mosi,
  input  logic        miso,
  // scratchpad write slot
  output spad_wr_t    wr,
  input  logic        wr_gnt
);

  localparam logic [7:0] CMD_READ = 8'h03;

  logic [31:0] out_sh, in_sh;
  logic [4:0]  bitcnt;
  logic        cmd_phase;
  logic [15:0] words_left;
  waddr_t      ptr;

  assign mosi    = out_sh[31];
  assign wr.addr = ptr;
  assign wr.be   = 4'b1111;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy       <= 1'b0;
      done       <= 1'b0;
      sclk       <= 1'b0;
      cs_n       <= 1'b1;
      out_sh     <= '0;
      in_sh      <= '0;
      bitcnt     <= '0;
      cmd_phase  <= 1'b0;
      words_left <= '0;
      ptr        <= '0;
      wr.req     <= 1'b0;
      wr.data    <= '0;
    end else if (ce) begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          if (nwords == '0) begin
            done <= 1'b1;
          end else begin
            busy       <= 1'b1;
            cs_n       <= 1'b0;
            sclk       <= 1'b0;
            out_sh     <= {CMD_READ, flash_addr};
            bitcnt     <= '0;
            cmd_phase  <= 1'b1;
            words_left <= nwords;
            ptr        <= spad_addr[BADDR_W-1:2];
          end
        end
      end else if (wr.req) begin
        if (wr_gnt) begin
          wr.req <= 1'b0;
          ptr    <= ptr + 1'b1;
          if (words_left == '0) begin
            busy <= 1'b0;
            cs_n <= 1'b1;
            done <= 1'b1;
          end
        end
      end else if (!sclk) begin
        sclk <= 1'b1;                              // rising edge: sample
        if (!cmd_phase) in_sh <= {in_sh[30:0], miso};
      end else begin
        sclk   <= 1'b0;                            // falling edge: shift
        bitcnt <= bitcnt + 1'b1;
        if (cmd_phase) begin
          out_sh <= {out_sh[30:0], 1'b0};
          if (bitcnt == 5'd31) cmd_phase <= 1'b0;
        end else if (bitcnt == 5'd31) begin
          wr.req     <= 1'b1;
          wr.data    <= {in_sh[7:0], in_sh[15:8], in_sh[23:16], in_sh[31:24]};
          words_left <= words_left - 1'b1;
        end
      end
    end
  end

  // A write request, once raised, holds its address and data until granted.
  assert property (@(posedge clk) disable iff (!rst_n)
                   (ce && wr.req && !wr_gnt) |=> (wr.req && $stable(wr.data) && $stable(wr.addr)));

endmodule
