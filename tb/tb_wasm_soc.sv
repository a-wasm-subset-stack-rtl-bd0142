// tb_wasm_soc: end-to-end test of the complete system at its default
// parameters. A self-test program is assembled into the behavioural SPI
// flash; it exercises every instruction class, nested calls, data RAM,
// the blocking KEY input and a data-stack overflow (nine pushes into the
// eight-entry circular stack, which overwrite the oldest item). All
// results leave through PRINT on the UART and are decoded by the terminal
// model and compared with the expected bytes. The testbench counts how
// often each mechanism of the design occurred and fails any that never
// did: immediate fetch, comparison wait state (ALU_WAIT), RAM read wait,
// UART transmit wait, blocking key wait, taken and untaken branches, call,
// return, and data-stack overflow with pointer wrap-around.
module tb_wasm_soc;
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

  task automatic expect_eq(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d (0x%0h) expected %0d (0x%0h)", what, got, got, exp, exp);
    end
  endtask

  // ---------------- assembler into the flash model ----------------
  int unsigned plen = 0;
  function automatic void op1(opcode_e o);
    flash.mem[plen] = 8'(o); plen++;
  endfunction
  function automatic void opi(opcode_e o, logic [31:0] v);
    flash.mem[plen] = 8'(o);
    for (int i = 0; i < 4; i++) flash.mem[plen + 1 + i] = v[8*i +: 8];
    plen += 5;
  endfunction
  function automatic void patch(int unsigned at, logic [31:0] v);
    for (int i = 0; i < 4; i++) flash.mem[at + 1 + i] = v[8*i +: 8];
  endfunction

  // ---------------- mechanism counters ----------------
  int n_imm = 0, n_alu_wait = 0, n_mem_wait = 0, n_uart_wait = 0, n_key_wait = 0;
  int n_taken = 0, n_untaken = 0, n_call = 0, n_ret = 0, n_wrap = 0, n_key_stall = 0;
  state_e prev_st;
  logic [2:0] prev_dsp = 3'd7;   // reset value of the pointer
  int depth = 0;
  int cyc = 0;
  int len_of [256];

  // the opcode and its address, read from the flash image when DECODE is entered
  logic [7:0]  cur_op = 8'h00;
  logic [23:0] cur_pc = '0;

  always @(posedge clk) if (rst_n) begin
    prev_st  <= st;
    if (st == S_DECODE && prev_st != S_DECODE) begin
      cur_op <= flash.mem[pc - 1];
      cur_pc <= pc - 1;
    end
    prev_dsp <= dsp;
    if (st != prev_st) begin
      case (st)
        S_FETCH_IMM:  n_imm++;
        S_ALU_WAIT:   n_alu_wait++;
        S_MEM_WAIT:   n_mem_wait++;
        S_UART_WAIT:  n_uart_wait++;
        S_KEY_WAIT:   n_key_wait++;
        default: ;
      endcase
    end
    if (st == S_KEY_WAIT && prev_st == S_KEY_WAIT) n_key_stall++;
    // clocks from one FETCH to the next, per opcode
    cyc <= (st == S_FETCH) ? 1 : cyc + 1;
    if (st == S_FETCH && prev_st != S_FETCH && cyc != 0) len_of[cur_op] = cyc;
    // after EXECUTE: a BR_IF was taken if pc is not the next instruction
    if (prev_st == S_EXECUTE && st != S_EXECUTE) begin
      case (cur_op)
        OP_BR_IF: if (pc != cur_pc + 24'd5) n_taken++; else n_untaken++;
        OP_CALL:  n_call++;
        OP_RET:   n_ret++;
        default: ;
      endcase
    end
    // overflow: logical depth, followed from the pointer steps, beyond 8
    depth = depth + int'($signed(3'(dsp - prev_dsp)));
    if (depth > 8 && dsp != prev_dsp) n_wrap++;
  end

  initial begin
    #200ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  byte unsigned exp_q[$];
  int unsigned a_fwd, a_loop, a_call, a_sub, a_skip, a_end;

  initial begin
    // 10 3 ADD -> 13; 7 9 SUB -> -2; 6 7 MUL -> 42; AND, OR, NOT
    opi(OP_PUSH, 10); opi(OP_PUSH, 3); op1(OP_ADD); op1(OP_PRINT);             exp_q.push_back(13);
    opi(OP_PUSH, 7);  opi(OP_PUSH, 9); op1(OP_SUB); op1(OP_PRINT);             exp_q.push_back(8'hFE);
    opi(OP_PUSH, 6);  opi(OP_PUSH, 7); op1(OP_MUL); op1(OP_PRINT);             exp_q.push_back(42);
    opi(OP_PUSH, 32'hF0); opi(OP_PUSH, 32'h3C); op1(OP_AND);
    opi(OP_PUSH, 32'h05); op1(OP_OR); op1(OP_NOT); op1(OP_PRINT);              exp_q.push_back(8'hCA);
    // comparisons
    opi(OP_PUSH, -3); opi(OP_PUSH, 2); op1(OP_LT_S); op1(OP_PRINT);            exp_q.push_back(1);
    opi(OP_PUSH, -3); opi(OP_PUSH, 2); op1(OP_GT_S); op1(OP_PRINT);            exp_q.push_back(0);
    opi(OP_PUSH, 9);  op1(OP_DUP); op1(OP_EQ); op1(OP_PRINT);                  exp_q.push_back(1);
    opi(OP_PUSH, 0);  op1(OP_EQZ); op1(OP_PRINT);                              exp_q.push_back(1);
    // SWAP / OVER / DROP
    opi(OP_PUSH, 1); opi(OP_PUSH, 2); op1(OP_OVER); op1(OP_SWAP);              // 1 1 2
    op1(OP_PRINT); op1(OP_DROP); op1(OP_PRINT);                                exp_q.push_back(2); exp_q.push_back(1);
    // RAM: mem[3] = 0x1234_5678, mem[200] = 0x55; load both back
    opi(OP_PUSH, 32'h1234_5678); opi(OP_PUSH, 3);   op1(OP_STORE);
    opi(OP_PUSH, 32'h55);        opi(OP_PUSH, 200); op1(OP_STORE);
    opi(OP_PUSH, 3); op1(OP_LOAD); opi(OP_PUSH, 32'h1234_5600); op1(OP_SUB);
    op1(OP_PRINT);                                                             exp_q.push_back(8'h78);
    opi(OP_PUSH, 200); op1(OP_LOAD); op1(OP_PRINT);                            exp_q.push_back(8'h55);
    // countdown loop 3,2,1 with a backward BR_IF (taken twice, untaken once)
    opi(OP_PUSH, 3);
    a_loop = plen;
    op1(OP_DUP); op1(OP_PRINT); opi(OP_PUSH, 1); op1(OP_SUB); op1(OP_DUP);
    opi(OP_BR_IF, a_loop); op1(OP_DROP);
    exp_q.push_back(3); exp_q.push_back(2); exp_q.push_back(1);
    // call / ret: sub doubles the top of stack
    opi(OP_PUSH, 21); a_call = plen; opi(OP_CALL, 0); op1(OP_PRINT);           exp_q.push_back(42);
    a_skip = plen; opi(OP_JUMP, 0);
    a_sub = plen; patch(a_call, a_sub);
    op1(OP_DUP); op1(OP_ADD); op1(OP_RET);
    patch(a_skip, plen);
    // overflow: nine pushes into eight entries; the 1 is lost, 9..2 come back
    for (int i = 1; i <= 9; i++) opi(OP_PUSH, 32'(i));
    for (int i = 9; i >= 2; i--) begin op1(OP_PRINT); exp_q.push_back(8'(i)); end
    // blocking key: echo it plus one
    op1(OP_KEY); opi(OP_PUSH, 1); op1(OP_ADD); op1(OP_PRINT);                  exp_q.push_back(8'h42);
    opi(OP_PUSH, 8'h99); op1(OP_PRINT);                                        exp_q.push_back(8'h99);
    a_end = plen; opi(OP_JUMP, a_end);

    repeat (5) @(posedge clk);
    rst_n = 1;
    wait (st == S_KEY_WAIT);
    repeat (500) @(posedge clk);
    expect_eq("KEY blocks until a byte arrives", int'(st), int'(S_KEY_WAIT));
    host.send(8'h41);
    begin
      int t = 0;
      while (host.rx_q.size() < exp_q.size() && t < 50 * CPB * 40) begin @(posedge clk); t++; end
    end
    repeat (100) @(posedge clk);
    expect_eq("bytes printed", host.rx_q.size(), exp_q.size());
    foreach (exp_q[i]) if (i < host.rx_q.size())
      expect_eq($sformatf("print #%0d", i), host.rx_q[i], exp_q[i]);
    expect_eq("frame errors", host.frame_errors, 0);
    expect_eq("return stack balanced", rsp, 7);
    expect_eq("parked in the end loop", (pc >= 24'(a_end)) && (pc <= 24'(a_end + 5)), 1);
    // every mechanism must have happened
    $display("immediate fetches %0d, ALU_WAIT %0d, MEM_WAIT %0d, UART_WAIT %0d, KEY_WAIT %0d (%0d stall clocks)",
             n_imm, n_alu_wait, n_mem_wait, n_uart_wait, n_key_wait, n_key_stall);
    $display("branches taken %0d untaken %0d, calls %0d, returns %0d, stack overflows %0d, flash reads %0d",
             n_taken, n_untaken, n_call, n_ret, n_wrap, flash.reads);
    // with the SPI controller each byte costs 82 clocks of serial transfer
    $display("clocks per instruction: ADD %0d, PUSH %0d, EQ %0d", len_of[OP_ADD], len_of[OP_PUSH], len_of[OP_EQ]);
    expect_eq("ADD clocks through SPI", len_of[OP_ADD], 85);
    expect_eq("PUSH clocks through SPI", len_of[OP_PUSH], 85 + 4 * 83);
    expect_eq("EQ clocks through SPI", len_of[OP_EQ], 86);
    expect_eq("immediate fetch seen", n_imm > 0, 1);
    expect_eq("ALU_WAIT seen", n_alu_wait, 4);
    expect_eq("MEM_WAIT seen", n_mem_wait, 2);
    expect_eq("UART_WAIT seen", n_uart_wait, exp_q.size());
    expect_eq("KEY_WAIT seen", n_key_wait, 1);
    expect_eq("key stall seen", n_key_stall > 100, 1);
    expect_eq("taken branches", n_taken, 2);
    expect_eq("untaken branches", n_untaken, 1);
    expect_eq("calls", n_call, 1);
    expect_eq("returns", n_ret, 1);
    expect_eq("stack overflow (ninth push)", n_wrap, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
