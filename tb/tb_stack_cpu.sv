// tb_stack_cpu: runs a hand-assembled test program on the CPU core alone.
// The flash port is modelled as a memory that answers in one clock, so the
// instruction timings can be checked against the architecture's figures:
// 5 clocks for a one-byte instruction, 17 with an immediate, one more for
// a comparison. The UART is modelled by a queue: every PRINT adds a byte
// to the output, checked against the expected list; KEY is fed from a
// queue. Every instruction of the table is executed at least once.
module tb_stack_cpu;
  import wasm_pkg::*;

  logic        clk = 0, rst_n = 0;
  logic        fetch_req, fetch_ready;
  logic [23:0] fetch_addr;
  logic [7:0]  fetch_data;
  logic        ram_we;
  logic [7:0]  ram_addr;
  logic [31:0] ram_wdata, ram_rdata;
  logic        tx_start, tx_busy, rx_valid, rx_ack;
  logic [7:0]  tx_data, rx_data;
  state_e      state;
  logic [23:0] pc;
  logic [2:0]  dsp, rsp;

  stack_cpu dut (
    .clk, .rst_n, .fetch_req, .fetch_addr, .fetch_ready, .fetch_data,
    .ram_we, .ram_addr, .ram_wdata, .ram_rdata,
    .tx_start, .tx_data, .tx_busy, .rx_valid, .rx_data, .rx_ack,
    .state_o(state), .pc_o(pc), .dsp_o(dsp), .rsp_o(rsp)
  );

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  task automatic expect_eq(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d (0x%0h) expected %0d (0x%0h)", what, got, got, exp, exp);
    end
  endtask

  // ---------------- program memory with a one-clock answer ----------------
  logic [7:0] prog [1024];
  int unsigned plen = 0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fetch_ready <= 1'b1;
      fetch_data  <= '0;
    end else if (fetch_req) begin
      fetch_ready <= 1'b0;
      fetch_data  <= prog[fetch_addr[9:0]];
    end else begin
      fetch_ready <= 1'b1;
    end
  end

  // ---------------- data RAM model (synchronous read) ----------------
  logic [31:0] ram [256];
  always_ff @(posedge clk) begin
    if (ram_we) ram[ram_addr] <= ram_wdata;
    ram_rdata <= ram[ram_addr];
  end

  // ---------------- UART model ----------------
  byte unsigned out_q[$];
  byte unsigned key_q[$];
  int tx_cnt = 0;
  assign tx_busy  = (tx_cnt != 0);
  assign rx_valid = (key_q.size() != 0);
  assign rx_data  = rx_valid ? key_q[0] : 8'h00;
  always @(posedge clk) begin
    if (tx_start) begin
      out_q.push_back(tx_data);
      tx_cnt <= 7;
    end else if (tx_cnt != 0) tx_cnt <= tx_cnt - 1;
    if (rx_ack) void'(key_q.pop_front());
  end

  // ---------------- assembler helpers ----------------
  function automatic void op1(opcode_e o);
    prog[plen] = 8'(o); plen++;
  endfunction
  function automatic void opi(opcode_e o, logic [31:0] v);
    prog[plen] = 8'(o);
    for (int i = 0; i < 4; i++) prog[plen + 1 + i] = v[8*i +: 8];
    plen += 5;
  endfunction
  function automatic void patch(int unsigned at, logic [31:0] v);   // at = opcode address
    for (int i = 0; i < 4; i++) prog[at + 1 + i] = v[8*i +: 8];
  endfunction
  function automatic void pr(logic [31:0] v);                       // push v; print
    opi(OP_PUSH, v); op1(OP_PRINT);
  endfunction

  // ---------------- instruction timing ----------------
  int cyc = 0;
  int len_of [256];
  state_e prev;
  logic [7:0] cur_op = 8'h00;   // opcode being executed, taken from the fetch port
  always @(posedge clk) if (rst_n) begin
    if (state == S_FETCH_WAIT_HIGH && fetch_ready) cur_op <= fetch_data;
    prev <= state;
    cyc  <= (state == S_FETCH) ? 1 : cyc + 1;
    if (state == S_FETCH && prev != S_FETCH && cyc != 0) len_of[cur_op] = cyc;
  end

  // ---------------- the program ----------------
  byte unsigned exp_q[$];
  int unsigned a_bad, a_ok, a_call, a_sub1, a_sub2, a_end, a_skip;

  initial begin
    repeat (200_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 1024; i++) prog[i] = 8'h00;
    for (int i = 0; i < 256; i++) ram[i] = '0;
    for (int i = 0; i < 256; i++) len_of[i] = 0;
    // arithmetic and logic
    opi(OP_PUSH, 10); opi(OP_PUSH, 3); op1(OP_ADD); op1(OP_PRINT);             exp_q.push_back(13);
    opi(OP_PUSH, 7);  opi(OP_PUSH, 9); op1(OP_SUB); op1(OP_PRINT);             exp_q.push_back(8'hFE);
    opi(OP_PUSH, 6);  opi(OP_PUSH, 7); op1(OP_MUL); op1(OP_PRINT);             exp_q.push_back(42);
    opi(OP_PUSH, 32'h1_0001); opi(OP_PUSH, 32'h1_0001); op1(OP_MUL);           // 0x2_0001 low byte 1
    opi(OP_PUSH, 32'h1_0000); op1(OP_SUB); op1(OP_PRINT);                      exp_q.push_back(8'h01);
    opi(OP_PUSH, 8'hF0); opi(OP_PUSH, 8'h3C); op1(OP_AND); op1(OP_PRINT);      exp_q.push_back(8'h30);
    opi(OP_PUSH, 8'hF0); opi(OP_PUSH, 8'h0F); op1(OP_OR);  op1(OP_PRINT);      exp_q.push_back(8'hFF);
    opi(OP_PUSH, 8'h5A); op1(OP_NOT); op1(OP_PRINT);                           exp_q.push_back(8'hA5);
    // comparisons
    opi(OP_PUSH, 5); opi(OP_PUSH, 5); op1(OP_EQ); op1(OP_PRINT);               exp_q.push_back(1);
    opi(OP_PUSH, 5); opi(OP_PUSH, 6); op1(OP_EQ); op1(OP_PRINT);               exp_q.push_back(0);
    opi(OP_PUSH, -1); opi(OP_PUSH, 1); op1(OP_LT_S); op1(OP_PRINT);            exp_q.push_back(1);
    opi(OP_PUSH, 1); opi(OP_PUSH, -1); op1(OP_LT_S); op1(OP_PRINT);            exp_q.push_back(0);
    opi(OP_PUSH, -5); opi(OP_PUSH, 3); op1(OP_GT_S); op1(OP_PRINT);            exp_q.push_back(0);
    opi(OP_PUSH, 3); opi(OP_PUSH, -5); op1(OP_GT_S); op1(OP_PRINT);            exp_q.push_back(1);
    opi(OP_PUSH, 0); op1(OP_EQZ); op1(OP_PRINT);                               exp_q.push_back(1);
    opi(OP_PUSH, 4); op1(OP_EQZ); op1(OP_PRINT);                               exp_q.push_back(0);
    // comparison result used by the next instruction (the ALU_WAIT case)
    opi(OP_PUSH, 20); opi(OP_PUSH, 9); opi(OP_PUSH, 9); op1(OP_EQ); op1(OP_ADD);
    op1(OP_PRINT);                                                             exp_q.push_back(21);
    // stack manipulation
    opi(OP_PUSH, 1); opi(OP_PUSH, 2); op1(OP_SWAP); op1(OP_PRINT); op1(OP_PRINT);
    exp_q.push_back(1); exp_q.push_back(2);
    opi(OP_PUSH, 3); opi(OP_PUSH, 4); op1(OP_OVER);
    op1(OP_PRINT); op1(OP_PRINT); op1(OP_PRINT);
    exp_q.push_back(3); exp_q.push_back(4); exp_q.push_back(3);
    opi(OP_PUSH, 8); op1(OP_DUP); op1(OP_ADD); op1(OP_PRINT);                  exp_q.push_back(16);
    opi(OP_PUSH, 8'h77); opi(OP_PUSH, 1); op1(OP_DROP); op1(OP_PRINT);         exp_q.push_back(8'h77);
    // memory
    opi(OP_PUSH, 32'hCAFE_00AB); opi(OP_PUSH, 5); op1(OP_STORE);
    opi(OP_PUSH, 32'h1234_5633); opi(OP_PUSH, 6); op1(OP_STORE);
    opi(OP_PUSH, 5); op1(OP_LOAD); op1(OP_PRINT);                              exp_q.push_back(8'hAB);
    opi(OP_PUSH, 6); op1(OP_LOAD); opi(OP_PUSH, 32'h1234_5600); op1(OP_SUB);
    op1(OP_PRINT);                                                             exp_q.push_back(8'h33);
    // branches: not taken, then taken over a poison print
    opi(OP_PUSH, 0); a_bad = plen; opi(OP_BR_IF, 0);
    opi(OP_PUSH, 2); a_ok = plen;  opi(OP_BR_IF, 0);
    patch(a_bad, plen);                                 // not-taken target is the poison too
    pr(8'hEE);
    patch(a_ok, plen);
    pr(8'h55);                                                                 exp_q.push_back(8'h55);
    // nested calls
    a_call = plen; opi(OP_CALL, 0);
    op1(OP_PRINT);                                                             exp_q.push_back(8'h42);
    a_skip = plen; opi(OP_JUMP, 0);
    a_sub1 = plen; patch(a_call, a_sub1);
    a_sub2 = plen + 0; opi(OP_CALL, 0);                 // sub1: call sub2; push 0x40; add; ret
    opi(OP_PUSH, 8'h40); op1(OP_ADD); op1(OP_RET);
    patch(a_sub2, plen);                                // sub2: push 2; ret
    opi(OP_PUSH, 2); op1(OP_RET);
    patch(a_skip, plen);
    // blocking key input echoed back
    op1(OP_KEY); op1(OP_PRINT);                                                exp_q.push_back(8'h5A);
    pr(8'h99);                                                                 exp_q.push_back(8'h99);
    a_end = plen; opi(OP_JUMP, a_end);

    repeat (3) @(negedge clk);
    rst_n = 1;
    // the key arrives late: KEY must wait for it
    wait (state == S_KEY_WAIT);
    repeat (50) @(negedge clk);
    expect_eq("still waiting for key", int'(state), int'(S_KEY_WAIT));
    key_q.push_back(8'h5A);
    wait (out_q.size() == exp_q.size());
    repeat (100) @(negedge clk);
    expect_eq("bytes printed", out_q.size(), exp_q.size());
    foreach (exp_q[i]) expect_eq($sformatf("print #%0d", i), out_q[i], exp_q[i]);
    expect_eq("data stack balanced", dsp, 7);
    expect_eq("return stack balanced", rsp, 7);
    expect_eq("parked in end loop", pc >= 24'(a_end) && pc <= 24'(a_end + 5), 1);
    // timing from the architecture: 5 / 17 clocks, comparison +1
    expect_eq("ADD clocks", len_of[OP_ADD], 5);
    expect_eq("DUP clocks", len_of[OP_DUP], 5);
    expect_eq("PUSH clocks", len_of[OP_PUSH], 17);
    expect_eq("JUMP clocks", len_of[OP_JUMP], 17);
    expect_eq("EQ clocks", len_of[OP_EQ], 6);
    expect_eq("LOAD clocks", len_of[OP_LOAD], 6);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
