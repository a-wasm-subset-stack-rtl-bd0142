// uart: the serial console of the system, a transmitter and a receiver for
// 8 data bits, no parity and one stop bit (8N1), least significant bit
// first, at BAUD (115200) from a CLK_HZ (27 MHz) clock.
//
// One bit lasts CLKS_PER_BIT = CLK_HZ/BAUD clocks (234 at the defaults,
// 8.67 us; the ideal 115200-baud bit is 8.68 us, an error of 0.16%).
//
// Transmitter: tx_start (while tx_busy is low) loads tx_data; the line then
// carries the start bit (0), the eight data bits and the stop bit (1), and
// tx_busy stays high until the stop bit has been sent in full. The line
// idles high.
//
// Receiver: rxd passes a two-flop synchroniser. A falling edge starts a
// frame; the start bit is checked again half a bit later, and each data
// bit and the stop bit are then sampled in the middle of their bit time.
// A frame with a valid stop bit is stored in rx_data and rx_valid is set;
// rx_valid stays set until rx_ack. A byte that arrives before the last one
// was taken replaces it. The frame format, the mid-bit sampling and the
// one-byte holding register are this design's choices; the rate and the
// role of the block are the architecture's.
module uart #(
  parameter int unsigned CLK_HZ = 27_000_000,
  parameter int unsigned BAUD   = 115_200,
  localparam int unsigned CLKS_PER_BIT = CLK_HZ / BAUD,
  localparam int unsigned CW = $clog2(CLKS_PER_BIT + 1)
) (
  input  logic       clk,
  input  logic       rst_n,
  // transmitter
  input  logic       tx_start,
  input  logic [7:0] tx_data,
  output logic       tx_busy,
  output logic       txd,
  // receiver
  input  logic       rxd,
  output logic       rx_valid,
  output logic [7:0] rx_data,
  input  logic       rx_ack
);

  // ---------------- transmitter ----------------
  logic [9:0]    tx_shift;
  logic [3:0]    tx_bits;   // bits still to send, including the current one
  logic [CW-1:0] tx_cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tx_shift <= '1;
      tx_bits  <= '0;
      tx_cnt   <= '0;
    end else if (tx_bits == 0) begin
      if (tx_start) begin
        tx_shift <= {1'b1, tx_data, 1'b0};
        tx_bits  <= 4'd10;
        tx_cnt   <= CW'(CLKS_PER_BIT - 1);
      end
    end else if (tx_cnt != 0) begin
      tx_cnt <= tx_cnt - 1'b1;
    end else begin
      tx_shift <= {1'b1, tx_shift[9:1]};
      tx_bits  <= tx_bits - 1'b1;
      tx_cnt   <= CW'(CLKS_PER_BIT - 1);
    end
  end

  assign txd     = (tx_bits == 0) ? 1'b1 : tx_shift[0];
  assign tx_busy = (tx_bits != 0);

  // ---------------- receiver ----------------
  logic [1:0]    rx_sync;
  logic          rx_in;
  logic          rx_active;
  logic [3:0]    rx_bit;    // 0: start bit, 1..8: data, 9: stop
  logic [CW-1:0] rx_cnt;
  logic [7:0]    rx_shift;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rx_sync <= 2'b11;
    else        rx_sync <= {rx_sync[0], rxd};
  end
  assign rx_in = rx_sync[1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rx_active <= 1'b0;
      rx_bit    <= '0;
      rx_cnt    <= '0;
      rx_shift  <= '0;
      rx_valid  <= 1'b0;
      rx_data   <= '0;
    end else begin
      if (rx_ack) rx_valid <= 1'b0;
      if (!rx_active) begin
        if (!rx_in) begin
          rx_active <= 1'b1;
          rx_bit    <= '0;
          rx_cnt    <= CW'(CLKS_PER_BIT / 2 - 1);
        end
      end else if (rx_cnt != 0) begin
        rx_cnt <= rx_cnt - 1'b1;
      end else begin
        rx_cnt <= CW'(CLKS_PER_BIT - 1);
        if (rx_bit == 0) begin
          if (rx_in) rx_active <= 1'b0;          // glitch, not a start bit
          else       rx_bit    <= 4'd1;
        end else if (rx_bit <= 8) begin
          rx_shift <= {rx_in, rx_shift[7:1]};
          rx_bit   <= rx_bit + 1'b1;
        end else begin
          rx_active <= 1'b0;
          if (rx_in) begin
            rx_data  <= rx_shift;
            rx_valid <= 1'b1;
          end
        end
      end
    end
  end

  // A byte may only be handed over while the transmitter is idle.
  a_tx_start_idle: assert property (@(posedge clk) disable iff (!rst_n) tx_start |-> !tx_busy)
    else $error("uart: tx_start while busy");

endmodule
