// tb_stack_depth_study: the stack-depth trade-off on a real program. Three
// copies of the system, with 4-, 8- and 16-entry stacks, each run the
// single-digit calculator binary and get the line "1+2". The program
// needs five data-stack entries while it tests the operator (digit1
// digit2 op op '+'), so with four entries the circular stack overwrites
// digit1 with the pushed '+' (43) and the program prints ']' (43 + 2 + '0');
// with eight or sixteen entries it prints "3".
module tb_stack_depth_study;
  localparam int CPB = 27_000_000 / 115_200;

  logic clk = 0, rst_n = 0;
  always #18.5 clk = ~clk;

  logic [2:0] cs_n, sck, mosi, miso, txd, rxd;

  wasm_soc #(.DSTACK_DEPTH(4)) dut4 (
    .clk, .rst_n, .flash_cs_n(cs_n[0]), .flash_sck(sck[0]), .flash_mosi(mosi[0]), .flash_miso(miso[0]),
    .uart_tx(txd[0]), .uart_rx(rxd[0]), .cpu_state(), .cpu_pc(), .cpu_dsp(), .cpu_rsp());
  wasm_soc #(.DSTACK_DEPTH(8)) dut8 (
    .clk, .rst_n, .flash_cs_n(cs_n[1]), .flash_sck(sck[1]), .flash_mosi(mosi[1]), .flash_miso(miso[1]),
    .uart_tx(txd[1]), .uart_rx(rxd[1]), .cpu_state(), .cpu_pc(), .cpu_dsp(), .cpu_rsp());
  wasm_soc #(.DSTACK_DEPTH(16)) dut16 (
    .clk, .rst_n, .flash_cs_n(cs_n[2]), .flash_sck(sck[2]), .flash_mosi(mosi[2]), .flash_miso(miso[2]),
    .uart_tx(txd[2]), .uart_rx(rxd[2]), .cpu_state(), .cpu_pc(), .cpu_dsp(), .cpu_rsp());

  spi_flash_model #(.SIZE(4096)) f4  (.cs_n(cs_n[0]), .sck(sck[0]), .mosi(mosi[0]), .miso(miso[0]));
  spi_flash_model #(.SIZE(4096)) f8  (.cs_n(cs_n[1]), .sck(sck[1]), .mosi(mosi[1]), .miso(miso[1]));
  spi_flash_model #(.SIZE(4096)) f16 (.cs_n(cs_n[2]), .sck(sck[2]), .mosi(mosi[2]), .miso(miso[2]));

  uart_host_model #(.CPB(CPB)) h4  (.clk, .from_dut(txd[0]), .to_dut(rxd[0]));
  uart_host_model #(.CPB(CPB)) h8  (.clk, .from_dut(txd[1]), .to_dut(rxd[1]));
  uart_host_model #(.CPB(CPB)) h16 (.clk, .from_dut(txd[2]), .to_dut(rxd[2]));

  int checks = 0, failures = 0;

  initial begin
    #100ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // the same keys to all three terminals, one every 3 ms (far slower than the program)
  task automatic type_all(byte unsigned c);
    fork
      h4.send(c);
      h8.send(c);
      h16.send(c);
    join
    #3ms;
  endtask

  function automatic string text(ref byte unsigned q[$]);
    string s = "";
    foreach (q[i]) s = {s, string'(q[i])};
    return s;
  endfunction

  initial begin
    string t4, t8, t16;
    $readmemh("tb/calc_single_digit.hex", f4.mem);
    $readmemh("tb/calc_single_digit.hex", f8.mem);
    $readmemh("tb/calc_single_digit.hex", f16.mem);
    repeat (5) @(posedge clk);
    rst_n = 1;
    #3ms;
    type_all("1"); type_all("+"); type_all("2");
    #5ms;
    t4 = text(h4.rx_q); t8 = text(h8.rx_q); t16 = text(h16.rx_q);
    $display("4 entries:  %p\n8 entries:  %p\n16 entries: %p", t4, t8, t16);
    checks++;
    if (t8 != "> 1+2\r\n3\r\n> ") begin failures++; $display("FAIL 8-entry stack"); end
    checks++;
    if (t16 != "> 1+2\r\n3\r\n> ") begin failures++; $display("FAIL 16-entry stack"); end
    checks++;
    // with four entries the push of '+' (43) lands on digit1's entry, so the
    // program adds 43 + 2 and prints 43 + 2 + '0' = 93 = ']'
    if (t4 != "> 1+2\r\n]\r\n> ") begin failures++; $display("FAIL 4-entry stack should have overflowed"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
