// tb_rsp_alu: self-checking test of the PE ALU.
// Drives random operands through every ALU opcode and compares with
// integer arithmetic done in the testbench; also checks that a non-ALU
// opcode gives zero.
module tb_rsp_alu;
  import rsp_pkg::*;
  op_e   op;
  word_t a, b, y;
  int    checks = 0, failures = 0;

  rsp_alu dut (.op, .a, .b, .y);

  function automatic word_t model(op_e o, word_t x, word_t z);
    int sx;
    sx = $signed(x);
    case (o)
      OP_ADD: return word_t'((int'(x) + int'(z)) & 16'hffff);
      OP_SUB: return word_t'((int'(x) - int'(z)) & 16'hffff);
      OP_ABS: return word_t'((sx < 0 ? -sx : sx) & 16'hffff);
      OP_AND: return x & z;
      OP_OR:  return x | z;
      OP_XOR: return x ^ z;
      OP_MOV: return x;
      default: return '0;
    endcase
  endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    op_e ops[8] = '{OP_ADD, OP_SUB, OP_ABS, OP_AND, OP_OR, OP_XOR, OP_MOV, OP_LD};
    for (int i = 0; i < 400; i++) begin
      op = ops[i % 8];
      a  = word_t'($urandom);
      b  = word_t'($urandom);
      if (i < 8) begin a = 16'h8000; b = 16'h0001; end
      #1;
      checks++;
      if (y !== model(op, a, b)) begin
        failures++;
        $display("ALU mismatch op=%s a=%h b=%h y=%h exp=%h", op.name(), a, b, y, model(op, a, b));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
