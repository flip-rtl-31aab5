// flip_alu -- the PE's arithmetic unit for the vertex program.
//
// Combinational. Takes the two operands I1/I2 (Fig. 6) and an immediate,
// returns the result for arithmetic instructions and the condition used by
// the exit instructions. Attributes are 8-bit unsigned; additions saturate
// at 255, which the vertex programs use as "infinity" (unreached vertex),
// and subtraction saturates at 0. The paper names the ALU and its two
// inputs; its operation set and encoding are this design's own, chosen so
// that BFS, SSSP and WCC need 5, 5 and 4 instructions when the vertex
// changes, as the paper reports.
module flip_alu
  import flip_pkg::*;
(
  input  opcode_e           op,
  input  logic [ATTR_W-1:0] i1,
  input  logic [ATTR_W-1:0] i2,
  input  logic [ATTR_W-1:0] imm,
  output logic [ATTR_W-1:0] result,
  output logic              cond   // exit condition for OP_XEQ / OP_XGE
);
  always_comb begin
    result = i1;
    cond   = 1'b0;
    unique case (op)
      OP_ADD:  result = sat_add(i1, i2);
      OP_ADDI: result = sat_add(i1, imm);
      OP_SUB:  result = (i1 > i2) ? i1 - i2 : '0;
      OP_MIN:  result = (i1 < i2) ? i1 : i2;
      OP_MAX:  result = (i1 > i2) ? i1 : i2;
      OP_XEQ:  cond = (i1 == i2);
      OP_XGE:  cond = (i1 >= i2);
      default: result = i1; // MOV, ST, SCAT pass I1; NOP, END unused
    endcase
  end
endmodule
