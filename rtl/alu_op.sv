// alu_op: the operation of a DR-CGRA compute unit.
//
// Combinational integer ALU applied to the two matched operands of one
// thread: y = op(a, b). Shifts use b[4:0]; MIN/MAX compare as signed numbers;
// OP_PASS returns a. The opcode set and encodings are this design's own
// (the paper says only that computational operations run on ALUs and
// floating-point units; floating point is not provided here).
module alu_op
  import drcgra_pkg::*;
(
  input  alu_op_e op,
  input  data_t   a,
  input  data_t   b,
  output data_t   y
);

  always_comb begin
    unique case (op)
      OP_ADD:  y = a + b;
      OP_SUB:  y = a - b;
      OP_MUL:  y = a * b;
      OP_AND:  y = a & b;
      OP_OR:   y = a | b;
      OP_XOR:  y = a ^ b;
      OP_SHL:  y = a << b[4:0];
      OP_SHR:  y = a >> b[4:0];
      OP_MIN:  y = ($signed(a) < $signed(b)) ? a : b;
      OP_MAX:  y = ($signed(a) > $signed(b)) ? a : b;
      OP_PASS: y = a;
      default: y = a;
    endcase
  end

endmodule
