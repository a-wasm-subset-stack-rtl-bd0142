// spi_flash_model: behavioural model of a serial NOR flash for simulation
// only. It answers the READ command (0x03) in SPI mode 0: command and 24-bit
// address are sampled on rising SCK, data bits are driven MSB first after
// each falling SCK, and the address advances byte by byte for as long as
// chip select stays low. Other commands are ignored. The array is SIZE bytes
// (addresses wrap) and is filled by the testbench through mem[].
module spi_flash_model #(
  parameter int unsigned SIZE = 4096
) (
  input  logic cs_n,
  input  logic sck,
  input  logic mosi,
  output logic miso
);

  logic [7:0]  mem [SIZE];
  logic [31:0] cmd_addr;
  int unsigned nbits;
  int unsigned reads;   // READ transactions seen

  initial begin
    for (int i = 0; i < SIZE; i++) mem[i] = 8'h00;
    miso  = 1'b0;
    nbits = 0;
    reads = 0;
  end

  always @(negedge cs_n) begin
    nbits = 0;
    cmd_addr = '0;
  end

  always @(posedge sck) if (!cs_n) begin
    if (nbits < 32) cmd_addr = {cmd_addr[30:0], mosi};
    nbits++;
    if (nbits == 32 && cmd_addr[31:24] == 8'h03) reads++;
  end

  always @(negedge sck) if (!cs_n && nbits >= 32 && cmd_addr[31:24] == 8'h03) begin
    int unsigned k;
    k = nbits - 32;
    miso = mem[(32'(cmd_addr[23:0]) + k / 8) % SIZE][7 - (k % 8)];
  end

endmodule
