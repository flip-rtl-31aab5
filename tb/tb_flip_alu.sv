// tb_flip_alu -- random operands for every opcode, compared with a model
// of saturating add/sub, min, max, move and the exit conditions.
module tb_flip_alu;
  import flip_pkg::*;
  opcode_e op;
  logic [7:0] i1, i2, imm, result;
  logic cond;
  int checks = 0, failures = 0;

  flip_alu dut (.*);

  function automatic int exp_res(opcode_e o, int a, int b, int m);
    case (o)
      OP_ADD:  return (a + b > 255) ? 255 : a + b;
      OP_ADDI: return (a + m > 255) ? 255 : a + m;
      OP_SUB:  return (a > b) ? a - b : 0;
      OP_MIN:  return (a < b) ? a : b;
      OP_MAX:  return (a > b) ? a : b;
      default: return a;
    endcase
  endfunction

  initial begin
    for (int t = 0; t < 4000; t++) begin
      op  = opcode_e'(4'($urandom % 12));
      i1  = 8'($urandom); i2 = ($urandom % 4 == 0) ? i1 : 8'($urandom); imm = 8'($urandom);
      if (t % 7 == 0) begin i1 = 8'hF0 + 8'($urandom % 16); i2 = 8'hF0; end
      #1;
      checks++;
      if (op inside {OP_ADD, OP_ADDI, OP_SUB, OP_MIN, OP_MAX, OP_MOV, OP_ST, OP_SCAT} &&
          result != 8'(exp_res(op, i1, i2, imm))) begin
        failures++; $display("op %s %0d %0d imm %0d -> %0d", op.name(), i1, i2, imm, result);
      end
      checks++;
      if (cond != ((op == OP_XEQ && i1 == i2) || (op == OP_XGE && i1 >= i2))) begin
        failures++; $display("cond op %s %0d %0d -> %b", op.name(), i1, i2, cond);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
