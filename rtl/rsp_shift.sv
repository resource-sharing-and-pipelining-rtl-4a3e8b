// rsp_shift: the shift logic of a primitive PE.
//
// Combinational barrel shifter. OP_SHL shifts operand A left (zeros in),
// OP_SHR shifts it right arithmetically (sign in); the amount is B[3:0].
// Which shifts the unit offers is this design's choice. Other opcodes give
// zero.
module rsp_shift
  import rsp_pkg::*;
(
  input  op_e   op,
  input  word_t a,
  input  word_t b,
  output word_t y
);

  logic [3:0] sh;
  assign sh = b[3:0];

  always_comb begin
    unique case (op)
      OP_SHL:  y = a << sh;
      OP_SHR:  y = word_t'($signed(a) >>> sh);
      default: y = '0;
    endcase
  end

endmodule
