// alu: the combinational arithmetic/logic unit of the stack CPU.
//
// Operand a is the second stack item and b the top of stack, so SUB gives
// a-b and LT_S gives a<b as the instruction table's stack effects
// ( a b -- a-b ) require. Comparisons return 1 for true and 0 for false.
// MUL keeps the low 32 bits of the product. NOT and EQZ use b only.
// There is no divider: the architecture leaves division to software.
// Interface: op selects the operation; y is valid in the same cycle.
module alu
  import wasm_pkg::*;
#(
  parameter int unsigned WIDTH = XLEN
) (
  input  alu_op_e            op,
  input  logic [WIDTH-1:0]   a,
  input  logic [WIDTH-1:0]   b,
  output logic [WIDTH-1:0]   y
);

  always_comb begin
    unique case (op)
      ALU_ADD:    y = a + b;
      ALU_SUB:    y = a - b;
      ALU_MUL:    y = a * b;
      ALU_AND:    y = a & b;
      ALU_OR:     y = a | b;
      ALU_NOT:    y = ~b;
      ALU_EQ:     y = WIDTH'(a == b);
      ALU_LT_S:   y = WIDTH'($signed(a) < $signed(b));
      ALU_GT_S:   y = WIDTH'($signed(a) > $signed(b));
      ALU_EQZ:    y = WIDTH'(b == '0);
      default:    y = b;
    endcase
  end

endmodule
