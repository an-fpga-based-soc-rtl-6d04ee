// spi_flash_model: behavioural model of an SPI Flash in read mode, for
// testbenches only. While cs_n is low it shifts in bytes on rising SCLK
// edges (mode 0). The first byte is the command; 0x03 (READ) is followed by
// a 24-bit address, after which the model drives the bytes at successive
// addresses MSB first, changing MISO on falling edges. Contents: byte a of
// the flash is (a * 7 + 3) mod 256 unless overwritten through mem.
module spi_flash_model #(
  parameter int SIZE = 4096
) (
  input  logic sclk,
  input  logic mosi,
  input  logic cs_n,
  output logic miso
);
  byte unsigned mem [SIZE];
  int bitcnt;
  logic [7:0] sh, cmd, outb;
  logic [23:0] addr;

  initial begin
    foreach (mem[a]) mem[a] = 8'((a * 7 + 3) % 256);
    miso = 1'b0;
  end

  always @(negedge cs_n) begin
    bitcnt = 0;
    miso = 1'b0;
  end

  always @(posedge sclk) if (!cs_n) begin
    sh = {sh[6:0], mosi};
    bitcnt++;
    if (bitcnt == 8) cmd = sh;
    if (bitcnt > 8 && bitcnt <= 32) addr = {addr[22:0], mosi};
  end

  always @(negedge sclk) if (!cs_n) begin
    if (bitcnt >= 32 && cmd == 8'h03) begin
      if ((bitcnt - 32) % 8 == 0) outb = mem[(addr + 24'((bitcnt - 32) / 8)) % SIZE];
      miso = outb[7 - ((bitcnt - 32) % 8)];
    end
  end
endmodule
