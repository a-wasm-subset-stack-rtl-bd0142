// data_ram: the 1 KB on-chip data memory (256 words of 32 bits), written so
// that synthesis maps it to block RAM.
//
// One port, word addressed: addr selects a 32-bit word. A write (we=1)
// stores wdata at the clock edge. A read returns mem[addr] on rdata one
// clock after the address is presented (synchronous read, as block RAM
// does); the CPU spends one wait state on LOAD for it. The memory content
// is not reset; a testbench must write a word before reading it. Word
// addressing and the read latency are this design's choices; the size
// (1 KB) is the architecture's.
module data_ram #(
  parameter int unsigned BYTES = 1024,
  parameter int unsigned WIDTH = 32,
  localparam int unsigned WORDS = BYTES / (WIDTH / 8),
  localparam int unsigned AW    = $clog2(WORDS)
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    addr,
  input  logic [WIDTH-1:0] wdata,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (we) mem[addr] <= wdata;
    rdata <= mem[addr];
  end

endmodule
