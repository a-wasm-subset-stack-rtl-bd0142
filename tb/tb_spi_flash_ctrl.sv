// tb_spi_flash_ctrl: the controller reads random addresses from the
// behavioural flash model. Checks the returned byte, that ready falls the
// clock after req and rises with the byte, the command byte 0x03 and the
// address seen by the flash, and the 82-clock transaction time at
// CLK_DIV = 1.
module tb_spi_flash_ctrl;
  logic        clk = 0, rst_n = 0, req = 0, ready;
  logic [23:0] addr = 0;
  logic [7:0]  data;
  logic        cs_n, sck, mosi, miso;
  int checks = 0, failures = 0;

  spi_flash_ctrl dut (.clk, .rst_n, .req, .addr, .ready, .data,
                      .spi_cs_n(cs_n), .spi_sck(sck), .spi_mosi(mosi), .spi_miso(miso));
  spi_flash_model #(.SIZE(4096)) flash (.cs_n, .sck, .mosi, .miso);

  always #5 clk = ~clk;

  initial begin
    repeat (200_000) @(posedge clk);
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

  task automatic read(logic [23:0] a);
    int n = 0;
    @(negedge clk);
    req = 1; addr = a;
    @(negedge clk);
    req = 0;
    expect_eq("ready low after req", int'(ready), 0);
    while (!ready && n < 1000) begin @(negedge clk); n++; end
    expect_eq("clocks to ready", n + 1, 82);
    expect_eq($sformatf("data @%0h", a), int'(data), int'(flash.mem[a % 4096]));
    expect_eq("flash address", int'(flash.cmd_addr[23:0]), int'(a));
    expect_eq("flash command", int'(flash.cmd_addr[31:24]), 32'h03);
    expect_eq("cs released", int'(cs_n), 1);
  endtask

  initial begin
    for (int i = 0; i < 4096; i++) flash.mem[i] = 8'($urandom);
    repeat (3) @(negedge clk);
    rst_n = 1;
    expect_eq("idle ready", int'(ready), 1);
    read(24'h000000);
    read(24'h000FFF);
    read(24'h000ABC);
    repeat (40) read(24'($urandom_range(0, 4095)));
    expect_eq("flash READ count", int'(flash.reads), 43);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
