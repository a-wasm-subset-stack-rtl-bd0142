// spi_flash_ctrl: reads single bytes from a serial (SPI) NOR flash for the
// CPU's execute-in-place instruction fetch.
//
// Fetch port (CPU side): ready is high while the controller is idle. A
// one-clock req with a 24-bit byte address addr starts a read; ready falls
// on the next clock and rises again when the byte is on data, where it
// stays until the next read. The CPU's FETCH_WAIT_LOW / FETCH_WAIT_HIGH
// states follow exactly these two edges of ready.
//
// Flash side: a standard READ transaction in SPI mode 0. Chip select goes
// low, the command byte READ_CMD (0x03) and the 24-bit address
// (addr + BASE_ADDR) are shifted out MSB first, then eight data bits are
// shifted in, sampled as SCK rises; chip select then goes high again. SCK
// runs at clk / (2*CLK_DIV). With CLK_DIV = 1 one byte costs 2*40 + 2 = 82
// clocks. Every byte is a transaction of its own (no burst), which keeps the
// controller small and lets the CPU jump freely. The flash command, the SPI
// mode, the clock divider and the address offset are this design's
// choices; the architecture only states that instructions are fetched one
// byte at a time from SPI flash over a 24-bit address / 8-bit data link.
module spi_flash_ctrl #(
  parameter int unsigned CLK_DIV   = 1,
  parameter logic [7:0]  READ_CMD  = 8'h03,
  parameter logic [23:0] BASE_ADDR = 24'h000000
) (
  input  logic        clk,
  input  logic        rst_n,
  // fetch port
  input  logic        req,
  input  logic [23:0] addr,
  output logic        ready,
  output logic [7:0]  data,
  // SPI pins
  output logic        spi_cs_n,
  output logic        spi_sck,
  output logic        spi_mosi,
  input  logic        spi_miso
);

  localparam int unsigned DW = (CLK_DIV > 1) ? $clog2(CLK_DIV) : 1;

  typedef enum logic [1:0] {C_IDLE, C_SHIFT, C_END} cstate_e;

  cstate_e      state;
  logic [31:0]  shreg;     // command + address, MSB first
  logic [7:0]   rx;
  logic [5:0]   bitcnt;    // 0..39
  logic [DW-1:0] div;

  assign spi_mosi = shreg[31];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= C_IDLE;
      shreg    <= '0;
      rx       <= '0;
      bitcnt   <= '0;
      div      <= '0;
      ready    <= 1'b1;
      data     <= '0;
      spi_cs_n <= 1'b1;
      spi_sck  <= 1'b0;
    end else begin
      unique case (state)
        C_IDLE: if (req) begin
          shreg    <= {READ_CMD, addr + BASE_ADDR};
          bitcnt   <= '0;
          div      <= DW'(CLK_DIV - 1);
          ready    <= 1'b0;
          spi_cs_n <= 1'b0;
          state    <= C_SHIFT;
        end
        C_SHIFT: begin
          if (div != 0) begin
            div <= div - 1'b1;
          end else begin
            div <= DW'(CLK_DIV - 1);
            if (!spi_sck) begin
              spi_sck <= 1'b1;                       // rising: sample MISO
              if (bitcnt >= 6'd32) rx <= {rx[6:0], spi_miso};
            end else begin
              spi_sck <= 1'b0;                       // falling: next MOSI bit
              shreg   <= {shreg[30:0], 1'b0};
              if (bitcnt == 6'd39) state  <= C_END;
              else                 bitcnt <= bitcnt + 1'b1;
            end
          end
        end
        default: begin                               // C_END
          spi_cs_n <= 1'b1;
          data     <= rx;
          ready    <= 1'b1;
          state    <= C_IDLE;
        end
      endcase
    end
  end

  // A read may only be requested while the controller is idle.
  a_req_when_ready: assert property (@(posedge clk) disable iff (!rst_n) req |-> ready)
    else $error("spi_flash_ctrl: req while busy");

endmodule
