// tb_alu: checks every ALU operation against a reference model on
// directed corner values and random operands.
module tb_alu;
  import wasm_pkg::*;

  alu_op_e     op;
  logic [31:0] a, b, y;
  int checks = 0, failures = 0;

  alu dut (.op, .a, .b, .y);

  function automatic logic [31:0] ref_y(alu_op_e o, logic [31:0] x, logic [31:0] z);
    longint sx, sz;
    sx = longint'($signed(x));
    sz = longint'($signed(z));
    case (o)
      ALU_ADD:  return 32'((64'(x) + 64'(z)));
      ALU_SUB:  return 32'((64'(x) - 64'(z)));
      ALU_MUL:  return 32'((64'(x) * 64'(z)));
      ALU_AND:  return x & z;
      ALU_OR:   return x | z;
      ALU_NOT:  return ~z;
      ALU_EQ:   return (x == z) ? 32'd1 : 32'd0;
      ALU_LT_S: return (sx < sz) ? 32'd1 : 32'd0;
      ALU_GT_S: return (sx > sz) ? 32'd1 : 32'd0;
      ALU_EQZ:  return (z == 0) ? 32'd1 : 32'd0;
      default:  return z;
    endcase
  endfunction

  task automatic check(alu_op_e o, logic [31:0] x, logic [31:0] z);
    logic [31:0] e;
    op = o; a = x; b = z;
    #1;
    e = ref_y(o, x, z);
    checks++;
    if (y !== e) begin
      failures++;
      $display("FAIL op=%0d a=%h b=%h y=%h exp=%h", o, x, z, y, e);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam logic [31:0] CORNER [6] = '{32'h0, 32'h1, 32'hFFFF_FFFF, 32'h7FFF_FFFF, 32'h8000_0000, 32'd10};

  initial begin
    // directed: 10 + 3 = 13 (the push-3/ADD stack example), signed compares across zero
    check(ALU_ADD, 32'd10, 32'd3);
    if (y != 32'd13) begin failures++; $display("FAIL 10+3"); end
    check(ALU_LT_S, 32'hFFFF_FFFF, 32'd1);   // -1 < 1
    if (y != 32'd1) begin failures++; $display("FAIL -1<1"); end
    check(ALU_GT_S, 32'h8000_0000, 32'd0);   // most negative > 0 is false
    if (y != 32'd0) begin failures++; $display("FAIL min>0"); end
    for (int o = 0; o <= int'(ALU_PASS_B); o++)
      foreach (CORNER[i]) foreach (CORNER[j]) check(alu_op_e'(o), CORNER[i], CORNER[j]);
    repeat (2000) begin
      int o;
      o = $urandom_range(0, int'(ALU_PASS_B));
      check(alu_op_e'(o), $urandom, ($urandom_range(0, 3) == 0) ? 32'd0 : $urandom);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
