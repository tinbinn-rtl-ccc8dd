// spi_flash_model: behavioural model of a serial NOR flash, for
// simulation only (not synthesizable logic).
//
// Answers the READ command (0x03, 24-bit address, MSB first) in SPI mode
// 0: command and address bits are taken on rising SCLK edges, data bits
// are driven on falling edges, MSB of each byte first, with the address
// auto-incrementing for as long as CS# stays low. The contents are a
// fixed function of the byte address, flash_byte(a) =
// (a * 37 + (a >> 7) * 11 + 3) mod 256, so testbenches can compute what
// they expect. bad_cmd counts commands other than READ.
module spi_flash_model (
  input  logic sclk,
  input  logic cs_n,
  input  logic mosi,
  output logic miso,
  output int   bad_cmd
);
  int          bitn = 0;
  logic [31:0] hdr = '0;

  function automatic logic [7:0] flash_byte(int a);
    return 8'(a * 37 + (a >> 7) * 11 + 3);
  endfunction

  initial begin
    miso    = 1'b0;
    bad_cmd = 0;
  end

  always @(negedge cs_n) bitn = 0;

  always @(posedge sclk) if (!cs_n) begin
    if (bitn < 32) hdr = {hdr[30:0], mosi};
    if (bitn == 31 && hdr[31:24] != 8'h03) bad_cmd++;
    bitn++;
  end

  always @(negedge sclk) if (!cs_n && bitn >= 32) begin
    automatic int d = bitn - 32;
    automatic logic [7:0] v = flash_byte(int'(hdr[23:0]) + d / 8);
    miso = v[7 - d % 8];
  end
endmodule
