// tb_rsp_shift: self-checking test of the PE shift logic.
// Every shift amount 0..15 with random values, left and arithmetic right,
// compared with a bit-by-bit model written in the testbench.
module tb_rsp_shift;
  import rsp_pkg::*;
  op_e   op;
  word_t a, b, y;
  int    checks = 0, failures = 0;

  rsp_shift dut (.op, .a, .b, .y);

  function automatic word_t model(op_e o, word_t x, int n);
    word_t r;
    for (int i = 0; i < 16; i++) begin
      if (o == OP_SHL) r[i] = (i - n >= 0) ? x[i-n] : 1'b0;
      else if (o == OP_SHR) r[i] = (i + n <= 15) ? x[i+n] : x[15];
      else r[i] = 1'b0;
    end
    return r;
  endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 300; i++) begin
      op = (i % 3 == 0) ? OP_SHL : (i % 3 == 1) ? OP_SHR : OP_ADD;
      a  = word_t'($urandom);
      b  = word_t'($urandom);
      #1;
      checks++;
      if (y !== model(op, a, int'(b[3:0]))) begin
        failures++;
        $display("SHIFT mismatch op=%s a=%h n=%0d y=%h", op.name(), a, b[3:0], y);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
