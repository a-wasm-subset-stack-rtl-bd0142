// tb_uart: at the default 27 MHz / 115200 baud.
//  1. Sends 'A' (0x41) and samples the line in the middle of every bit:
//     start 0, data 1,0,0,0,0,0,1,0 (LSB first), stop 1; checks that each
//     bit lasts 234 clocks and that tx_busy covers the whole frame.
//  2. Loops txd back to rxd and sends random bytes; each must arrive on
//     rx_data with rx_valid, held until rx_ack.
//  3. Drives rxd from the testbench with a bit time 2% long and checks the
//     byte is still received.
module tb_uart;
  localparam int CPB = 27_000_000 / 115_200;   // 234

  logic       clk = 0, rst_n = 0;
  logic       tx_start = 0, tx_busy, txd, rxd, rx_valid, rx_ack = 0;
  logic [7:0] tx_data = 0, rx_data;
  logic       loop = 1, rx_drv = 1;
  int checks = 0, failures = 0;

  assign rxd = loop ? txd : rx_drv;

  uart dut (.clk, .rst_n, .tx_start, .tx_data, .tx_busy, .txd,
            .rxd, .rx_valid, .rx_data, .rx_ack);

  always #5 clk = ~clk;

  initial begin
    repeat (400_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_eq(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  task automatic send(logic [7:0] d);
    @(negedge clk);
    tx_data = d; tx_start = 1;
    @(negedge clk);
    tx_start = 0;
  endtask

  task automatic take(logic [7:0] exp);
    int n = 0;
    while (!rx_valid && n < 20 * CPB) begin @(negedge clk); n++; end
    expect_eq("rx_valid", int'(rx_valid), 1);
    expect_eq("rx_data", int'(rx_data), int'(exp));
    rx_ack = 1;
    @(negedge clk);
    rx_ack = 0;
    expect_eq("rx_valid cleared", int'(rx_valid), 0);
  endtask

  initial begin
    logic [9:0] frame;
    int busy_clks;
    repeat (3) @(negedge clk);
    rst_n = 1;
    expect_eq("idle line", int'(txd), 1);
    // 1. frame of 'A', checked bit by bit at bit centres
    send(8'h41);
    frame = {1'b1, 8'h41, 1'b0};
    repeat (CPB / 2 - 1) @(negedge clk);
    for (int i = 0; i < 10; i++) begin
      expect_eq($sformatf("bit %0d", i), int'(txd), int'(frame[i]));
      if (i < 9) repeat (CPB) @(negedge clk);
    end
    busy_clks = CPB / 2 + 9 * CPB - 1;
    while (tx_busy) begin @(negedge clk); busy_clks++; end
    expect_eq("frame length in clocks", busy_clks, 10 * CPB);
    take(8'h41);
    // 2. loopback of random bytes
    repeat (12) begin
      logic [7:0] d;
      d = 8'($urandom);
      send(d);
      while (tx_busy) @(negedge clk);
      take(d);
    end
    // 3. a slow sender (bit time 2% long) driven from the testbench
    loop = 0;
    begin
      logic [9:0] f;
      f = {1'b1, 8'hC5, 1'b0};
      for (int i = 0; i < 10; i++) begin
        rx_drv = f[i];
        repeat (CPB + CPB / 50) @(negedge clk);
      end
      rx_drv = 1;
      take(8'hC5);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
