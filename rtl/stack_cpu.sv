// stack_cpu: the 32-bit dual-stack processor core. It executes a
// WebAssembly-like zero-address instruction set straight from serial flash
// (execute in place), keeps data in an 8 x 32 data stack and return
// addresses in an 8 x 32 return stack, and talks to the data RAM and the
// UART.
//
// Control is one 12-state FSM (state_e in wasm_pkg):
//   FETCH -> FETCH_WAIT_LOW -> FETCH_WAIT_HIGH   read the opcode byte at pc
//   DECODE                                        immediate or not
//   FETCH_IMM -> IMM_WAIT_LOW -> IMM_WAIT_HIGH    x4, little-endian immediate
//   EXECUTE                                       ALU, stack, pc, memory, I/O
//   ALU_WAIT    comparisons: write the latched result after sp has settled
//   MEM_WAIT    LOAD: write the block RAM word that arrives one clock later
//   UART_WAIT   PRINT: wait until the UART has sent the byte
//   KEY_WAIT    KEY: wait until the UART has received a byte
// A flash port that answers within one clock gives 5 clocks for a one-byte
// instruction and 17 for one with an immediate (3 + 1 + 4*3 + 1), the
// figures the architecture quotes; with the SPI controller every byte adds
// the serial transfer time.
//
// Comparisons (EQ, LT_S, GT_S, EQZ) take the extra ALU_WAIT clock: in
// EXECUTE the result is computed and latched in temp_alu while the stack
// pointer moves; in ALU_WAIT the latched value is written to the new top.
// This split is how the architecture avoids a read-modify-write race on
// the stack memory and is kept as described. Other ALU operations write
// their result in EXECUTE through the stack's POP_WRITE command, which
// addresses the entry below the old top explicitly.
//
// Interfaces:
//   fetch_*  byte fetch from flash: fetch_req pulses with fetch_addr; the
//            port drops fetch_ready and raises it again with fetch_data.
//   ram_*    data RAM, word address = low bits of the address on the stack,
//            synchronous read.
//   tx_*/rx_* UART: tx_start pulses with tx_data; rx_valid/rx_data are
//            taken with a one-clock rx_ack.
// Branch, jump and call targets are byte addresses in flash (the low 24
// bits of the immediate); the return stack holds the address of the
// instruction after the CALL. Opcodes outside the instruction table are
// executed as no-ops (this design's choice). Stack pointers wrap around;
// there is no overflow trap.
module stack_cpu
  import wasm_pkg::*;
#(
  parameter int unsigned DSTACK_DEPTH = 8,
  parameter int unsigned RSTACK_DEPTH = 8,
  parameter int unsigned RAM_AW       = 8,
  localparam int unsigned DPW = $clog2(DSTACK_DEPTH),
  localparam int unsigned RPW = $clog2(RSTACK_DEPTH)
) (
  input  logic                clk,
  input  logic                rst_n,
  // instruction fetch (SPI flash controller)
  output logic                fetch_req,
  output logic [FADDR_W-1:0]  fetch_addr,
  input  logic                fetch_ready,
  input  logic [7:0]          fetch_data,
  // data RAM
  output logic                ram_we,
  output logic [RAM_AW-1:0]   ram_addr,
  output logic [XLEN-1:0]     ram_wdata,
  input  logic [XLEN-1:0]     ram_rdata,
  // UART
  output logic                tx_start,
  output logic [7:0]          tx_data,
  input  logic                tx_busy,
  input  logic                rx_valid,
  input  logic [7:0]          rx_data,
  output logic                rx_ack,
  // observation
  output state_e              state_o,
  output logic [FADDR_W-1:0]  pc_o,
  output logic [DPW-1:0]      dsp_o,
  output logic [RPW-1:0]      rsp_o
);

  state_e             state;
  logic [FADDR_W-1:0] pc;
  logic [7:0]         opcode;
  logic [XLEN-1:0]    imm;
  logic [1:0]         imm_cnt;
  logic [XLEN-1:0]    temp_alu;

  // stacks
  stk_cmd_e        ds_cmd, rs_cmd;
  logic [XLEN-1:0] ds_wdata, rs_wdata;
  logic [XLEN-1:0] ds_tos, ds_nos, rs_tos, rs_nos;

  lifo_stack #(.DEPTH(DSTACK_DEPTH), .WIDTH(XLEN)) u_dstack (
    .clk, .rst_n, .cmd(ds_cmd), .wdata(ds_wdata),
    .tos(ds_tos), .nos(ds_nos), .sp(dsp_o)
  );

  lifo_stack #(.DEPTH(RSTACK_DEPTH), .WIDTH(XLEN)) u_rstack (
    .clk, .rst_n, .cmd(rs_cmd), .wdata(rs_wdata),
    .tos(rs_tos), .nos(rs_nos), .sp(rsp_o)
  );

  // ALU: a = second item, b = top of stack
  alu_op_e         alu_op;
  logic [XLEN-1:0] alu_y;

  always_comb begin
    unique case (opcode)
      OP_ADD:  alu_op = ALU_ADD;
      OP_SUB:  alu_op = ALU_SUB;
      OP_MUL:  alu_op = ALU_MUL;
      OP_AND:  alu_op = ALU_AND;
      OP_OR:   alu_op = ALU_OR;
      OP_NOT:  alu_op = ALU_NOT;
      OP_EQ:   alu_op = ALU_EQ;
      OP_LT_S: alu_op = ALU_LT_S;
      OP_GT_S: alu_op = ALU_GT_S;
      OP_EQZ:  alu_op = ALU_EQZ;
      default: alu_op = ALU_PASS_B;
    endcase
  end

  alu #(.WIDTH(XLEN)) u_alu (.op(alu_op), .a(ds_nos), .b(ds_tos), .y(alu_y));

  // Combinational control outputs
  always_comb begin
    fetch_req  = 1'b0;
    fetch_addr = pc;
    ram_we     = 1'b0;
    ram_addr   = ds_tos[RAM_AW-1:0];
    ram_wdata  = ds_nos;
    tx_start   = 1'b0;
    tx_data    = ds_tos[7:0];
    rx_ack     = 1'b0;
    ds_cmd     = STK_NONE;
    ds_wdata   = '0;
    rs_cmd     = STK_NONE;
    rs_wdata   = XLEN'(pc);

    unique case (state)
      S_FETCH, S_FETCH_IMM: fetch_req = 1'b1;
      S_EXECUTE: begin
        unique case (opcode)
          OP_PUSH:  begin ds_cmd = STK_PUSH; ds_wdata = imm;    end
          OP_DROP:  ds_cmd = STK_POP;
          OP_DUP:   begin ds_cmd = STK_PUSH; ds_wdata = ds_tos; end
          OP_OVER:  begin ds_cmd = STK_PUSH; ds_wdata = ds_nos; end
          OP_SWAP:  ds_cmd = STK_SWAP;
          OP_ADD, OP_SUB, OP_MUL, OP_AND, OP_OR:
                    begin ds_cmd = STK_POP_WRITE; ds_wdata = alu_y; end
          OP_NOT:   begin ds_cmd = STK_WRITE_TOP; ds_wdata = alu_y; end
          OP_EQ, OP_LT_S, OP_GT_S: ds_cmd = STK_POP;   // result in ALU_WAIT
          OP_BR_IF: ds_cmd = STK_POP;
          OP_CALL:  rs_cmd = STK_PUSH;
          OP_RET:   rs_cmd = STK_POP;
          OP_STORE: begin ram_we = 1'b1; ds_cmd = STK_POP2; end
          OP_PRINT: if (!tx_busy) begin tx_start = 1'b1; ds_cmd = STK_POP; end
          default: ;                                   // EQZ, LOAD, KEY, JUMP, no-ops
        endcase
      end
      S_ALU_WAIT: begin ds_cmd = STK_WRITE_TOP; ds_wdata = temp_alu;  end
      S_MEM_WAIT: begin ds_cmd = STK_WRITE_TOP; ds_wdata = ram_rdata; end
      S_KEY_WAIT: if (rx_valid) begin
        ds_cmd   = STK_PUSH;
        ds_wdata = XLEN'(rx_data);
        rx_ack   = 1'b1;
      end
      default: ;
    endcase
  end

  // State, program counter, instruction registers
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_FETCH;
      pc       <= '0;
      opcode   <= '0;
      imm      <= '0;
      imm_cnt  <= '0;
      temp_alu <= '0;
    end else begin
      unique case (state)
        S_FETCH:           state <= S_FETCH_WAIT_LOW;
        S_FETCH_WAIT_LOW:  if (!fetch_ready) state <= S_FETCH_WAIT_HIGH;
        S_FETCH_WAIT_HIGH: if (fetch_ready) begin
          opcode <= fetch_data;
          pc     <= pc + 1'b1;
          state  <= S_DECODE;
        end
        S_DECODE: begin
          imm_cnt <= '0;
          state   <= has_imm(opcode) ? S_FETCH_IMM : S_EXECUTE;
        end
        S_FETCH_IMM:       state <= S_IMM_WAIT_LOW;
        S_IMM_WAIT_LOW:    if (!fetch_ready) state <= S_IMM_WAIT_HIGH;
        S_IMM_WAIT_HIGH:   if (fetch_ready) begin
          imm     <= {fetch_data, imm[XLEN-1:8]};      // little-endian
          pc      <= pc + 1'b1;
          imm_cnt <= imm_cnt + 1'b1;
          state   <= (imm_cnt == 2'd3) ? S_EXECUTE : S_FETCH_IMM;
        end
        S_EXECUTE: begin
          state <= S_FETCH;
          unique case (opcode)
            OP_EQ, OP_LT_S, OP_GT_S, OP_EQZ: begin
              temp_alu <= alu_y;
              state    <= S_ALU_WAIT;
            end
            OP_BR_IF: if (ds_tos != '0) pc <= imm[FADDR_W-1:0];
            OP_JUMP:  pc <= imm[FADDR_W-1:0];
            OP_CALL:  pc <= imm[FADDR_W-1:0];
            OP_RET:   pc <= rs_tos[FADDR_W-1:0];
            OP_LOAD:  state <= S_MEM_WAIT;
            OP_PRINT: state <= tx_busy ? S_EXECUTE : S_UART_WAIT;
            OP_KEY:   state <= S_KEY_WAIT;
            default: ;
          endcase
        end
        S_ALU_WAIT:  state <= S_FETCH;
        S_MEM_WAIT:  state <= S_FETCH;
        S_UART_WAIT: if (!tx_busy) state <= S_FETCH;
        S_KEY_WAIT:  if (rx_valid) state <= S_FETCH;
        default:     state <= S_FETCH;
      endcase
    end
  end

  assign state_o = state;
  assign pc_o    = pc;

endmodule
