// tinbinn_top: the TinBiNN overlay, a small vector processor system for
// binarized CNN inference.
//
// A 128 kB scratchpad, single-ported but clocked at three times the CPU
// clock, is shared by
//   - the vector unit (lve), which streams two operands per CPU cycle
//     through its ALU or the custom ALUs (binarized 3x3 convolution,
//     quad-16b to 32b add, 32b-to-8b activation) and writes one result;
//   - the SPI DMA, which loads binary weights from the SPI flash ROM;
//   - the camera path: a 16 x 16 block-averaging downscaler (640 x 480
//     RGB565 to 40 x 30) and the RGB DMA writing RGBA words;
//   - the CPU's own loads and stores (host port).
// An I2C master lets the CPU configure the camera. The CPU itself (an
// RV32IM soft core) is not part of this RTL: its command interfaces to the
// vector unit, the DMAs, the I2C master and the scratchpad are ports.
//
// Clocking: one clock `clk` at the scratchpad rate (72 MHz in the
// reference system). `cpu_tick` is high every third cycle and is the
// clock enable of everything that runs at the CPU rate (24 MHz), including
// the host command ports: a command input is sampled when cpu_tick is
// high. The camera pixel input is sampled on any `clk` cycle with
// cam_pix_valid.
//
// Scratchpad ports: read port A is the vector unit's while it is busy and
// the host's otherwise; read port B is the vector unit's. The write slot
// goes, in order of priority, to the RGB DMA, the SPI DMA, the vector
// unit and the host. A host read (host_req, !host_we) is accepted when
// host_gnt is high at a tick and its data appear on host_rdata in the next
// CPU cycle. The system structure follows the paper's system figure; the
// arbitration and the host-port protocol are this design's.
module tinbinn_top
  import tinbinn_pkg::*;
#(
  parameter int unsigned CAM_W   = 640,
  parameter int unsigned CAM_H   = 480,
  parameter int unsigned I2C_DIV = 60
) (
  input  logic        clk,
  input  logic        rst_n,
  output logic        cpu_tick,
  // vector unit commands
  input  logic        lve_start,
  input  lve_cmd_t    lve_cmd,
  output logic        lve_busy,
  output logic        lve_done,
  // SPI DMA commands
  input  logic        spi_start,
  input  logic [23:0] spi_flash_addr,
  input  baddr_t      spi_spad_addr,
  input  logic [15:0] spi_nwords,
  output logic        spi_busy,
  output logic        spi_done,
  // RGB DMA control
  input  logic        rgb_enable,
  input  baddr_t      rgb_base,
  output logic        rgb_frame_done,
  output logic [15:0] rgb_frames,
  output logic [15:0] rgb_dropped,
  // I2C commands
  input  logic        i2c_start,
  input  logic [6:0]  i2c_dev,
  input  logic [7:0]  i2c_reg,
  input  logic [7:0]  i2c_data,
  output logic        i2c_busy,
  output logic        i2c_done,
  output logic        i2c_nack,
  // host (CPU) scratchpad port, word addressed
  input  logic        host_req,
  input  logic        host_we,
  input  waddr_t      host_addr,
  input  logic [31:0] host_wdata,
  input  logic [3:0]  host_be,
  output logic        host_gnt,
  output logic [31:0] host_rdata,
  // SPI flash pins
  output logic        flash_sclk,
  output logic        flash_cs_n,
  output logic        flash_mosi,
  input  logic        flash_miso,
  // camera pixel stream
  input  logic        cam_pix_valid,
  input  logic        cam_frame_start,
  input  logic [15:0] cam_pix_data,
  // camera I2C pins (SDA open drain)
  output logic        i2c_scl,
  output logic        i2c_sda_oe,
  input  logic        i2c_sda_in
);

  // scratchpad
  waddr_t      sp_ra, sp_rb, lve_ra, lve_rb;
  logic        sp_rd_en, lve_rd_en;
  logic [31:0] sp_da, sp_db;

  // write slot
  spad_wr_t    wreq [4];
  spad_wr_t    wwin;
  logic [3:0]  wgnt;
  spad_wr_t    lve_wr, spi_wr, rgb_wr, host_wr;

  // camera path
  logic        ds_valid, ds_last;
  logic [31:0] ds_rgba;

  scratchpad u_spad (
    .clk    (clk),
    .rst_n  (rst_n),
    .tick   (cpu_tick),
    .phase  (),
    .ra_addr(sp_ra),
    .rb_addr(sp_rb),
    .rd_en  (sp_rd_en),
    .ra_data(sp_da),
    .rb_data(sp_db),
    .we     (wwin.req),
    .waddr  (wwin.addr),
    .wdata  (wwin.data),
    .wbe    (wwin.be)
  );

  assign sp_ra      = lve_busy ? lve_ra : host_addr;
  assign sp_rb      = lve_rb;
  assign sp_rd_en   = lve_busy ? lve_rd_en : 1'b1;
  assign host_rdata = sp_da;

  assign host_wr.req  = host_req && host_we;
  assign host_wr.addr = host_addr;
  assign host_wr.data = host_wdata;
  assign host_wr.be   = host_be;
  assign host_gnt     = host_we ? (host_req && wgnt[3]) : (host_req && !lve_busy);

  assign wreq[0] = rgb_wr;
  assign wreq[1] = spi_wr;
  assign wreq[2] = lve_wr;
  assign wreq[3] = host_wr;

  spad_wr_arbiter #(.N(4)) u_arb (
    .req(wreq),
    .gnt(wgnt),
    .win(wwin)
  );

  lve u_lve (
    .clk    (clk),
    .rst_n  (rst_n),
    .ce     (cpu_tick),
    .start  (lve_start),
    .cmd    (lve_cmd),
    .busy   (lve_busy),
    .done   (lve_done),
    .ra_addr(lve_ra),
    .rb_addr(lve_rb),
    .rd_en  (lve_rd_en),
    .ra_data(sp_da),
    .rb_data(sp_db),
    .wr     (lve_wr),
    .wr_gnt (wgnt[2])
  );

  spi_dma u_spi (
    .clk       (clk),
    .rst_n     (rst_n),
    .ce        (cpu_tick),
    .start     (spi_start),
    .flash_addr(spi_flash_addr),
    .spad_addr (spi_spad_addr),
    .nwords    (spi_nwords),
    .busy      (spi_busy),
    .done      (spi_done),
    .sclk      (flash_sclk),
    .cs_n      (flash_cs_n),
    .mosi      (flash_mosi),
    .miso      (flash_miso),
    .wr        (spi_wr),
    .wr_gnt    (wgnt[1])
  );

  downscale16 #(.IN_W(CAM_W), .IN_H(CAM_H), .BLK(16)) u_ds (
    .clk        (clk),
    .rst_n      (rst_n),
    .pix_valid  (cam_pix_valid),
    .frame_start(cam_frame_start),
    .pix_data   (cam_pix_data),
    .out_valid  (ds_valid),
    .out_last   (ds_last),
    .out_rgba   (ds_rgba)
  );

  rgb_dma #(.DEPTH(4)) u_rgb (
    .clk        (clk),
    .rst_n      (rst_n),
    .ce         (cpu_tick),
    .enable     (rgb_enable),
    .base       (rgb_base),
    .frame_start(cam_frame_start),
    .pix_valid  (ds_valid),
    .pix_last   (ds_last),
    .pix_rgba   (ds_rgba),
    .wr         (rgb_wr),
    .wr_gnt     (wgnt[0]),
    .frame_done (rgb_frame_done),
    .frames     (rgb_frames),
    .dropped    (rgb_dropped)
  );

  i2c_master #(.DIV(I2C_DIV)) u_i2c (
    .clk     (clk),
    .rst_n   (rst_n),
    .ce      (cpu_tick),
    .start   (i2c_start),
    .dev_addr(i2c_dev),
    .reg_addr(i2c_reg),
    .data    (i2c_data),
    .busy    (i2c_busy),
    .done    (i2c_done),
    .nack    (i2c_nack),
    .scl     (i2c_scl),
    .sda_oe  (i2c_sda_oe),
    .sda_in  (i2c_sda_in)
  );

endmodule
