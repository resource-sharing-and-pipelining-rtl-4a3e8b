// rsp_alu: the arithmetic/logic unit of a primitive PE.
//
// Purely combinational. Add, subtract and absolute value cover the
// operation set of the evaluated kernels (add, sub, abs); and, or, xor and
// move are this design's additions. Arithmetic is 16-bit two's complement
// and wraps on overflow. Opcodes that are not ALU operations give zero.
module rsp_alu
  import rsp_pkg::*;
(
  input  op_e   op,
  input  word_t a,
  input  word_t b,
  output word_t y
);

  always_comb begin
    unique case (op)
      OP_ADD:  y = a + b;
      OP_SUB:  y = a - b;
      OP_ABS:  y = a[DW-1] ? word_t'(-a) : a;
      OP_AND:  y = a & b;
      OP_OR:   y = a | b;
      OP_XOR:  y = a ^ b;
      OP_MOV:  y = a;
      default: y = '0;
    endcase
  end

endmodule
