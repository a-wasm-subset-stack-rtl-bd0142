// wasm_soc: the complete system. The stack CPU is the only bus master; it
// fetches instructions byte by byte from an external SPI NOR flash through
// the flash controller (24-bit address, 8-bit data), keeps data in a 1 KB
// block RAM over a 32-bit port, and does console I/O through a 115200-baud
// UART. The data and return stacks sit inside the CPU.
//
// Ports: clk (27 MHz on the intended board), active-low asynchronous
// reset rst_n, the four SPI flash pins, the UART pins, and a few
// observation outputs (FSM state, program counter, stack pointers) for debug LEDs or a
// testbench. The flash chip itself is outside this design.
module wasm_soc
  import wasm_pkg::*;
#(
  parameter int unsigned CLK_HZ       = 27_000_000,
  parameter int unsigned BAUD         = 115_200,
  parameter int unsigned DSTACK_DEPTH = 8,
  parameter int unsigned RSTACK_DEPTH = 8,
  parameter int unsigned RAM_BYTES    = 1024,
  parameter int unsigned SPI_CLK_DIV  = 1,
  parameter logic [23:0] FLASH_BASE   = 24'h000000
) (
  input  logic               clk,
  input  logic               rst_n,
  // SPI flash
  output logic               flash_cs_n,
  output logic               flash_sck,
  output logic               flash_mosi,
  input  logic               flash_miso,
  // UART
  output logic               uart_tx,
  input  logic               uart_rx,
  // observation
  output state_e             cpu_state,
  output logic [FADDR_W-1:0] cpu_pc,
  output logic [$clog2(DSTACK_DEPTH)-1:0] cpu_dsp,
  output logic [$clog2(RSTACK_DEPTH)-1:0] cpu_rsp
);

  localparam int unsigned RAM_AW = $clog2(RAM_BYTES / 4);

  logic               fetch_req, fetch_ready;
  logic [FADDR_W-1:0] fetch_addr;
  logic [7:0]         fetch_data;
  logic               ram_we;
  logic [RAM_AW-1:0]  ram_addr;
  logic [XLEN-1:0]    ram_wdata, ram_rdata;
  logic               tx_start, tx_busy, rx_valid, rx_ack;
  logic [7:0]         tx_data, rx_data;

  stack_cpu #(
    .DSTACK_DEPTH(DSTACK_DEPTH), .RSTACK_DEPTH(RSTACK_DEPTH), .RAM_AW(RAM_AW)
  ) u_cpu (
    .clk, .rst_n,
    .fetch_req, .fetch_addr, .fetch_ready, .fetch_data,
    .ram_we, .ram_addr, .ram_wdata, .ram_rdata,
    .tx_start, .tx_data, .tx_busy, .rx_valid, .rx_data, .rx_ack,
    .state_o(cpu_state), .pc_o(cpu_pc), .dsp_o(cpu_dsp), .rsp_o(cpu_rsp)
  );

  spi_flash_ctrl #(.CLK_DIV(SPI_CLK_DIV), .BASE_ADDR(FLASH_BASE)) u_flash (
    .clk, .rst_n,
    .req(fetch_req), .addr(fetch_addr), .ready(fetch_ready), .data(fetch_data),
    .spi_cs_n(flash_cs_n), .spi_sck(flash_sck), .spi_mosi(flash_mosi), .spi_miso(flash_miso)
  );

  data_ram #(.BYTES(RAM_BYTES), .WIDTH(XLEN)) u_ram (
    .clk, .we(ram_we), .addr(ram_addr), .wdata(ram_wdata), .rdata(ram_rdata)
  );

  uart #(.CLK_HZ(CLK_HZ), .BAUD(BAUD)) u_uart (
    .clk, .rst_n,
    .tx_start, .tx_data, .tx_busy, .txd(uart_tx),
    .rxd(uart_rx), .rx_valid, .rx_data, .rx_ack
  );

endmodule
