// tb_multidigit_calc: a multi-digit infix calculator with software
// division, run on the complete system at its default parameters.
//
// The program is written here in the CPU's assembly (labels resolved in a
// second pass, like a two-pass assembler) and placed in the behavioural
// flash. It reads a line such as "123+456" or "8 / 2" (spaces ignored),
// accumulating each number as value = value*10 + (char - '0') in data RAM,
// and on CR prints the result in decimal. Division is repeated subtraction
// using LT_S and BR_IF; decimal printing is a recursive subroutine that
// divides by ten, so it exercises CALL/RET, LOAD/STORE, comparisons and
// the stacks. Results of up to five digits keep the data stack within its
// eight entries; the testbench follows the stack depth from the pointer
// steps and fails if it ever exceeds eight.
//
// Every line is checked against a reference computed here, including the
// console session "8 / 2" -> 4, "1 * 2" -> 2, "5 - 2" -> 3. The clocks per
// line and per instruction are reported.
module tb_multidigit_calc;
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

  // ---------------- two-pass assembler into the flash model ----------------
  int unsigned plen = 0;
  int unsigned labels[string];
  string       fix_name[$];
  int unsigned fix_at[$];

  function automatic void op1(opcode_e o);
    flash.mem[plen] = 8'(o); plen++;
  endfunction
  function automatic void opi(opcode_e o, logic [31:0] v);
    flash.mem[plen] = 8'(o);
    for (int i = 0; i < 4; i++) flash.mem[plen + 1 + i] = v[8*i +: 8];
    plen += 5;
  endfunction
  function automatic void opl(opcode_e o, string name);    // opcode with a label target
    fix_name.push_back(name); fix_at.push_back(plen);
    opi(o, 0);
  endfunction
  function automatic void label(string name);
    labels[name] = plen;
  endfunction
  function automatic void resolve();
    foreach (fix_at[i]) begin
      logic [31:0] v;
      v = labels[fix_name[i]];
      for (int k = 0; k < 4; k++) flash.mem[fix_at[i] + 1 + k] = v[8*k +: 8];
    end
  endfunction
  function automatic void emit(byte unsigned c);             // push c; print
    opi(OP_PUSH, 32'(c)); op1(OP_PRINT);
  endfunction

  // RAM words: 0 = number being read, 1 = first operand, 2 = operator, 3 = quotient
  function automatic void build();
    label("main");
      emit(">"); emit(" ");
      opi(OP_PUSH, 0); opi(OP_PUSH, 0); op1(OP_STORE);
      opi(OP_PUSH, 0); opi(OP_PUSH, 2); op1(OP_STORE);
    label("rd");
      op1(OP_KEY); op1(OP_DUP); op1(OP_PRINT);
      op1(OP_DUP); opi(OP_PUSH, 13); op1(OP_EQ); opl(OP_BR_IF, "enter");
      op1(OP_DUP); opi(OP_PUSH, 32); op1(OP_EQ); opl(OP_BR_IF, "skip");
      op1(OP_DUP); opi(OP_PUSH, 48); op1(OP_LT_S); opl(OP_BR_IF, "isop");
      opi(OP_PUSH, 48); op1(OP_SUB);
      opi(OP_PUSH, 0); op1(OP_LOAD); opi(OP_PUSH, 10); op1(OP_MUL); op1(OP_ADD);
      opi(OP_PUSH, 0); op1(OP_STORE);
      opl(OP_JUMP, "rd");
    label("skip");
      op1(OP_DROP); opl(OP_JUMP, "rd");
    label("isop");
      opi(OP_PUSH, 2); op1(OP_STORE);
      opi(OP_PUSH, 0); op1(OP_LOAD); opi(OP_PUSH, 1); op1(OP_STORE);
      opi(OP_PUSH, 0); opi(OP_PUSH, 0); op1(OP_STORE);
      opl(OP_JUMP, "rd");
    label("enter");
      op1(OP_DROP); emit(8'd10);
      opi(OP_PUSH, 1); op1(OP_LOAD); opi(OP_PUSH, 0); op1(OP_LOAD); opi(OP_PUSH, 2); op1(OP_LOAD);
      op1(OP_DUP); opi(OP_PUSH, 43); op1(OP_EQ); opl(OP_BR_IF, "do_add");
      op1(OP_DUP); opi(OP_PUSH, 45); op1(OP_EQ); opl(OP_BR_IF, "do_sub");
      op1(OP_DUP); opi(OP_PUSH, 42); op1(OP_EQ); opl(OP_BR_IF, "do_mul");
      op1(OP_DUP); opi(OP_PUSH, 47); op1(OP_EQ); opl(OP_BR_IF, "do_div");
      op1(OP_DROP); op1(OP_DROP); op1(OP_DROP); opl(OP_JUMP, "main");
    label("do_add"); op1(OP_DROP); op1(OP_ADD); opl(OP_JUMP, "out");
    label("do_sub"); op1(OP_DROP); op1(OP_SUB); opl(OP_JUMP, "out");
    label("do_mul"); op1(OP_DROP); op1(OP_MUL); opl(OP_JUMP, "out");
    label("do_div"); op1(OP_DROP); opl(OP_CALL, "div");
    label("out");                                   // ( r -- ), sign first
      op1(OP_DUP); opi(OP_PUSH, 0); op1(OP_LT_S); op1(OP_NOT);
      opi(OP_PUSH, 1); op1(OP_AND); opl(OP_BR_IF, "pos");
      emit("-"); opi(OP_PUSH, 0); op1(OP_SWAP); op1(OP_SUB);
    label("pos");
      opl(OP_CALL, "printnum"); emit(8'd13); emit(8'd10);
      opl(OP_JUMP, "main");
    // div ( a b -- a/b ), a >= 0, b > 0, by repeated subtraction
    label("div");
      opi(OP_PUSH, 0); opi(OP_PUSH, 3); op1(OP_STORE);
    label("dloop");
      op1(OP_OVER); op1(OP_OVER); op1(OP_LT_S); opl(OP_BR_IF, "ddone");
      op1(OP_SWAP); op1(OP_OVER); op1(OP_SUB); op1(OP_SWAP);
      opi(OP_PUSH, 3); op1(OP_LOAD); opi(OP_PUSH, 1); op1(OP_ADD); opi(OP_PUSH, 3); op1(OP_STORE);
      opl(OP_JUMP, "dloop");
    label("ddone");
      op1(OP_DROP); op1(OP_DROP); opi(OP_PUSH, 3); op1(OP_LOAD); op1(OP_RET);
    // printnum ( n -- ), n >= 0: print n/10 recursively, then the last digit
    label("printnum");
      op1(OP_DUP); opi(OP_PUSH, 10); op1(OP_LT_S); opl(OP_BR_IF, "pn_one");
      op1(OP_DUP); opi(OP_PUSH, 10); opl(OP_CALL, "div");
      op1(OP_SWAP); op1(OP_OVER); opi(OP_PUSH, 10); op1(OP_MUL); op1(OP_SUB);
      op1(OP_SWAP); opl(OP_CALL, "printnum");
    label("pn_one");
      opi(OP_PUSH, 48); op1(OP_ADD); op1(OP_PRINT); op1(OP_RET);
    resolve();
  endfunction

  // ---------------- stack depth and instruction count ----------------
  int depth = 0, max_depth = 0, rdepth = 0, max_rdepth = 0;
  longint n_instr = 0;
  logic [2:0] prev_dsp = 3'd7, prev_rsp = 3'd7;
  state_e prev_st = S_FETCH;
  always @(posedge clk) if (rst_n) begin
    prev_dsp <= dsp; prev_rsp <= rsp; prev_st <= st;
    depth  = depth  + int'($signed(3'(dsp - prev_dsp)));
    rdepth = rdepth + int'($signed(3'(rsp - prev_rsp)));
    if (depth > max_depth)   max_depth = depth;
    if (rdepth > max_rdepth) max_rdepth = rdepth;
    if (st == S_EXECUTE && prev_st != S_EXECUTE) n_instr++;
  end

  initial begin
    #2s;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  string console = "";
  // collect console text until it is at least min_len long and ends in tail
  task automatic get_until(string tail, int min_len = 0);
    int t = 0;
    forever begin
      while (host.rx_q.size() > 0) console = {console, string'(host.rx_q.pop_front())};
      if (console.len() >= min_len && console.len() >= tail.len() &&
          console.substr(console.len() - tail.len(), console.len() - 1) == tail) break;
      if (t > 50_000_000) break;
      @(posedge clk); t++;
    end
  endtask

  task automatic line(string text, longint result);
    string exp, got;
    int start;
    longint t0, i0;
    get_until("> ");
    start = console.len();
    t0 = $time / 37; i0 = n_instr;
    for (int i = 0; i < text.len(); i++) begin
      host.send(text[i]);
      get_until(string'(text[i]), start + i + 1);   // wait for this key's echo
    end
    host.send(8'd13);
    exp = $sformatf("%s\r\n%0d\r\n", text, result);
    get_until($sformatf("%0d\r\n", result), start + exp.len());
    got = console.substr(start, console.len() - 1);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL line \"%s\": got \"%s\" expected \"%s\"", text, got, exp);
    end
    $display("%-10s = %0d   (%0d clocks, %0d instructions)", text, result, $time / 37 - t0, n_instr - i0);
  endtask

  initial begin
    build();
    $display("program: %0d bytes", plen);
    repeat (5) @(posedge clk);
    rst_n = 1;
    line("8 / 2", 4);
    line("1 * 2", 2);
    line("5 - 2", 3);
    line("123+456", 579);
    line("100/7", 14);
    line("12*34", 408);
    line("3-10", -7);
    line("999*99", 98901);
    line("65535/255", 257);
    checks++;
    if (max_depth > 8) begin failures++; $display("FAIL data stack depth %0d exceeds 8", max_depth); end
    checks++;
    if (max_rdepth > 8) begin failures++; $display("FAIL return stack depth %0d exceeds 8", max_rdepth); end
    checks++;
    if (host.frame_errors != 0) begin failures++; $display("FAIL frame errors"); end
    $display("deepest data stack %0d, deepest return stack %0d", max_depth, max_rdepth);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
