// lifo_stack: a shallow circular stack held in distributed (LUT) RAM, used
// for both the data stack and the return stack of the CPU (8 x 32 each).
//
// The stack pointer sp is a log2(DEPTH)-bit register that points at the
// top item and wraps around, so the stack behaves as a circular buffer:
// pushing a ninth item into an 8-deep stack silently overwrites the oldest
// one, and popping an empty stack wraps as well. No overflow or underflow
// is flagged, as in the original architecture.
//
// Reads are asynchronous: tos = mem[sp] and nos = mem[sp-1] follow sp in
// the same cycle. One command is applied per clock (see stk_cmd_e): PUSH,
// POP, POP2, POP_WRITE (pop and overwrite the new top, for a binary
// operation), WRITE_TOP and SWAP. SWAP writes two entries in one clock;
// every other command writes at most one. Reset sets sp to DEPTH-1, so the
// first push lands in entry 0; the entries themselves are not reset, as
// LUT RAM cannot be (reset values are this design's choice).
module lifo_stack
  import wasm_pkg::*;
#(
  parameter int unsigned DEPTH = 8,
  parameter int unsigned WIDTH = XLEN,
  localparam int unsigned PW   = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  stk_cmd_e         cmd,
  input  logic [WIDTH-1:0] wdata,
  output logic [WIDTH-1:0] tos,
  output logic [WIDTH-1:0] nos,
  output logic [PW-1:0]    sp
);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [PW-1:0]    sp_m1, sp_p1, sp_m2;

  assign sp_m1 = sp - PW'(1);
  assign sp_p1 = sp + PW'(1);
  assign sp_m2 = sp - PW'(2);
  assign tos   = mem[sp];
  assign nos   = mem[sp_m1];

  // Pointer register
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) sp <= PW'(DEPTH - 1);
    else begin
      unique case (cmd)
        STK_PUSH:      sp <= sp_p1;
        STK_POP:       sp <= sp_m1;
        STK_POP2:      sp <= sp_m2;
        STK_POP_WRITE: sp <= sp_m1;
        default: ;
      endcase
    end
  end

  // Storage: no reset, as LUT RAM has none
  always_ff @(posedge clk) begin
    unique case (cmd)
      STK_PUSH:      mem[sp_p1] <= wdata;
      STK_POP_WRITE: mem[sp_m1] <= wdata;
      STK_WRITE_TOP: mem[sp]    <= wdata;
      STK_SWAP: begin
        mem[sp]    <= mem[sp_m1];
        mem[sp_m1] <= mem[sp];
      end
      default: ;
    endcase
  end

endmodule
