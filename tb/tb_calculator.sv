// tb_calculator: runs the single-digit infix calculator binary from serial
// flash on the complete system at its default parameters (27 MHz clock,
// 115200 baud, 8-deep stacks). The terminal types "1+2", "5-2", "1*2",
// "7-9"... one character at a time, waiting for each echo, and checks the
// whole console text, including the "> " prompt and CR LF line ends. An
// unknown operator ("8/2") makes the program discard its operands and
// prompt again without a result. Also reports the clocks per calculation.
module tb_calculator;
  import wasm_pkg::*;

  localparam int CPB = 27_000_000 / 115_200;

  logic clk = 0, rst_n = 0;
  logic cs_n, sck, mosi, miso, txd, rxd;
  state_e      st;
  logic [23:0] pc;
  logic [2:0]  dsp, rsp;

  wasm_soc dut (
    .clk, .rst_n,
    .flash_cs_n(cs_n), .flash_sck(sck), .flash_mosi(mosi), .flash_miso(miso),
    .uart_tx(txd), .uart_rx(rxd),
    .cpu_state(st), .cpu_pc(pc), .cpu_dsp(dsp), .cpu_rsp(rsp)
  );
  spi_flash_model #(.SIZE(4096)) flash (.cs_n, .sck, .mosi, .miso);
  uart_host_model #(.CPB(CPB)) host (.clk, .from_dut(txd), .to_dut(rxd));

  always #18.5 clk = ~clk;   // about 27 MHz

  int checks = 0, failures = 0;
  string console = "";

  initial begin
    #400ms;
    failures++;
    $display("watchdog expired; console so far:\n%s", console);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // wait until n more bytes have arrived, appending them to the console
  task automatic get(int n);
    int t = 0;
    while (host.rx_q.size() < n && t < 200 * CPB) begin @(posedge clk); t++; end
    while (host.rx_q.size() > 0 && n > 0) begin
      console = {console, string'(host.rx_q.pop_front())};
      n--;
    end
  endtask

  task automatic expect_text(string what, string got, string exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got \"%s\" expected \"%s\"", what, got, exp);
    end
  endtask

  // one line: type a, op, b; returns the text printed in answer
  task automatic calc(byte unsigned a, byte unsigned op, byte unsigned b, output string out);
    int start;
    start = console.len();
    get(2);                                     // "> "
    host.send(a);  get(1);                      // echo
    host.send(op); get(1);
    host.send(b);  get(3);                      // echo, CR, LF
    if (op inside {"+", "-", "*"}) get(3);      // result digit, CR, LF
    out = console.substr(start, console.len() - 1);
  endtask

  function automatic byte unsigned ref_calc(byte unsigned a, byte unsigned op, byte unsigned b);
    int x, y;
    x = int'(a) - 48; y = int'(b) - 48;
    case (op)
      "+": return 8'(x + y + 48);
      "-": return 8'(x - y + 48);
      default: return 8'(x * y + 48);
    endcase
  endfunction

  initial begin
    string out, exp;
    longint t0;
    $readmemh("tb/calc_single_digit.hex", flash.mem);
    repeat (5) @(posedge clk);
    rst_n = 1;
    calc("1", "+", "2", out); expect_text("1+2", out, "> 1+2\r\n3\r\n");
    calc("5", "-", "2", out); expect_text("5-2", out, "> 5-2\r\n3\r\n");
    calc("1", "*", "2", out); expect_text("1*2", out, "> 1*2\r\n2\r\n");
    calc("8", "/", "2", out); expect_text("8/2 (unknown op)", out, "> 8/2\r\n");
    wait (st == S_KEY_WAIT);                    // back at the prompt, waiting for a key
    checks++;
    if (dsp != 3'd7) begin failures++; $display("FAIL stack not empty after unknown op"); end
    repeat (6) begin
      byte unsigned a, b, op;
      a  = 8'(48 + $urandom_range(0, 3));
      b  = 8'(48 + $urandom_range(0, 2));
      op = ($urandom_range(0, 2) == 0) ? "+" : ($urandom_range(0, 1) == 0 ? "*" : "-");
      t0 = $time;
      calc(a, op, b, out);
      exp = {"> ", string'(a), string'(op), string'(b), "\r\n", string'(ref_calc(a, op, b)), "\r\n"};
      expect_text("random line", out, exp);
    end
    checks++;
    if (host.frame_errors != 0) begin failures++; $display("FAIL %0d frame errors", host.frame_errors); end
    $display("console:\n%s", console);
    $display("flash byte reads: %0d", flash.reads);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
