// wasm_pkg: opcodes, ALU operations, stack commands and control-FSM states
// shared by the stack CPU and its units.
//
// The opcode values are the ones of the core instruction table of the
// architecture (a WebAssembly-flavoured subset). PUSH, BR_IF, JUMP and CALL
// carry a 32-bit little-endian immediate after the opcode byte; every other
// instruction is a single byte. The ALU operation codes, the stack command
// encoding and the state encoding are internal to this implementation.
package wasm_pkg;

  localparam int unsigned XLEN      = 32;  // datapath width
  localparam int unsigned FADDR_W   = 24;  // SPI flash byte address width

  // Instruction opcodes (one byte)
  typedef enum logic [7:0] {
    OP_PUSH  = 8'h01,
    OP_ADD   = 8'h02,
    OP_SUB   = 8'h03,
    OP_MUL   = 8'h04,
    OP_DROP  = 8'h05,
    OP_PRINT = 8'h08,
    OP_EQ    = 8'h09,
    OP_LT_S  = 8'h0A,
    OP_GT_S  = 8'h0B,
    OP_BR_IF = 8'h0E,
    OP_JUMP  = 8'h0F,
    OP_CALL  = 8'h10,
    OP_RET   = 8'h11,
    OP_DUP   = 8'h12,
    OP_SWAP  = 8'h13,
    OP_OVER  = 8'h14,
    OP_AND   = 8'h16,
    OP_OR    = 8'h17,
    OP_NOT   = 8'h19,
    OP_LOAD  = 8'h1D,
    OP_STORE = 8'h1E,
    OP_KEY   = 8'h1F,
    OP_EQZ   = 8'h35
  } opcode_e;

  // True for the opcodes followed by a 4-byte immediate.
  function automatic logic has_imm(input logic [7:0] op);
    return (op == OP_PUSH) || (op == OP_BR_IF) || (op == OP_JUMP) || (op == OP_CALL);
  endfunction

  // ALU operations: a is the second stack item, b the top of stack.
  typedef enum logic [3:0] {
    ALU_ADD, ALU_SUB, ALU_MUL, ALU_AND, ALU_OR, ALU_NOT,
    ALU_EQ, ALU_LT_S, ALU_GT_S, ALU_EQZ, ALU_PASS_B
  } alu_op_e;

  // Commands to a stack (one per clock).
  typedef enum logic [2:0] {
    STK_NONE,      // hold
    STK_PUSH,      // sp <= sp+1, mem[sp+1] <= wdata
    STK_POP,       // sp <= sp-1
    STK_POP2,      // sp <= sp-2
    STK_POP_WRITE, // sp <= sp-1, mem[sp-1] <= wdata (binary operation)
    STK_WRITE_TOP, // mem[sp] <= wdata
    STK_SWAP       // mem[sp] <= mem[sp-1], mem[sp-1] <= mem[sp]
  } stk_cmd_e;

  // Control FSM: twelve states.
  typedef enum logic [3:0] {
    S_FETCH,          // request the opcode byte at pc
    S_FETCH_WAIT_LOW, // wait for the flash port to go busy
    S_FETCH_WAIT_HIGH,// wait for it to be ready again, latch the opcode
    S_DECODE,
    S_FETCH_IMM,      // request one immediate byte
    S_IMM_WAIT_LOW,
    S_IMM_WAIT_HIGH,  // latch the byte; four rounds in all
    S_EXECUTE,
    S_ALU_WAIT,       // write back a latched comparison result
    S_MEM_WAIT,       // write back a block RAM read
    S_UART_WAIT,      // wait for PRINT to finish sending
    S_KEY_WAIT        // wait for a received byte
  } state_e;

endpackage
