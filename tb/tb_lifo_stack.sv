// tb_lifo_stack: drives random stack commands into an 8 x 32 stack and
// compares tos, nos and sp with a reference circular stack after every
// clock. Also replays the push-3 / add example (5 10 -> 5 10 3 -> 5 13)
// and checks that the ninth push wraps over the oldest entry.
module tb_lifo_stack;
  import wasm_pkg::*;
  localparam int DEPTH = 8;

  logic        clk = 0, rst_n = 0;
  stk_cmd_e    cmd;
  logic [31:0] wdata, tos, nos;
  logic [2:0]  sp;

  logic [31:0] m [DEPTH];
  logic [2:0]  msp;
  int checks = 0, failures = 0, wraps = 0;
  bit filled = 0;   // nos is compared once every entry has been written

  lifo_stack dut (.clk, .rst_n, .cmd, .wdata, .tos, .nos, .sp);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic apply(stk_cmd_e c, logic [31:0] d);
    logic [31:0] t;
    cmd = c; wdata = d;
    @(posedge clk);
    case (c)
      STK_PUSH:      begin msp = msp + 1; m[msp] = d; if (msp == 0) wraps++; end
      STK_POP:       msp = msp - 1;
      STK_POP2:      msp = msp - 2;
      STK_POP_WRITE: begin msp = msp - 1; m[msp] = d; end
      STK_WRITE_TOP: m[msp] = d;
      STK_SWAP:      begin t = m[msp]; m[msp] = m[3'(msp - 1)]; m[3'(msp - 1)] = t; end
      default: ;
    endcase
    #1;
    checks++;
    if (sp !== msp || tos !== m[msp] || (filled && nos !== m[3'(msp - 1)])) begin
      failures++;
      $display("FAIL cmd=%0d sp=%0d/%0d tos=%h/%h nos=%h/%h", c, sp, msp, tos, m[msp], nos, m[3'(msp-1)]);
    end
  endtask

  initial begin
    cmd = STK_NONE; wdata = 0; msp = 3'(DEPTH - 1);
    repeat (2) @(posedge clk);
    rst_n = 1;
    #1;
    checks++;
    if (sp !== 3'(DEPTH - 1)) begin failures++; $display("FAIL reset sp=%0d", sp); end
    // fill the whole stack so every entry is defined
    for (int i = 0; i < DEPTH; i++) apply(STK_PUSH, 32'h100 + 32'(i));
    filled = 1;
    // stack example: ... 5 10, push 3, add -> 5 13
    apply(STK_PUSH, 32'd5);
    apply(STK_PUSH, 32'd10);
    apply(STK_PUSH, 32'd3);
    apply(STK_POP_WRITE, nos + tos);
    checks++;
    if (tos !== 32'd13 || nos !== 32'd5) begin failures++; $display("FAIL 10+3 example"); end
    repeat (4000) begin
      stk_cmd_e c;
      c = stk_cmd_e'($urandom_range(0, int'(STK_SWAP)));
      apply(c, $urandom);
    end
    checks++;
    if (wraps == 0) begin failures++; $display("FAIL pointer never wrapped"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
