// tb_wl_tridiag: Livermore loop 5 (tri-diagonal elimination below the
// diagonal), x[i] = z[i] * (y[i] - x[i-1]) for i = 1 .. 63, on the
// full-size array.
//
// The loop carries a dependence through x, so one step cannot start before
// the previous product is back: one subtraction plus a 2-stage
// multiplication gives 3 cycles per step. Three PEs do the work:
// A = (0,0) streams the operands, B = (0,1) holds x[i-1] in its output
// register and S = (1,1), below B, stores B's results on row 1's write bus.
// Program: context 0 loads x[0] into B; a 3-context kernel runs 63 times:
//   s0  A: Ld y[i], z[i]          (B's previous product lands at the end of s0)
//   s1  A: R0 = z[i]   B: R1 = y[i] - x[i-1] (y read from A)   S: St x[i-1] (from B)
//   s2  B: 1* R1 * z[i]  (z read from A)
// and two epilogue contexts wait for the last product and store x[63].
// Checks all x against a 16-bit wrap-around model and the run length
// 1 + 3*63 + 2 = 192 cycles.
module tb_wl_tridiag;
  import rsp_pkg::*;
  localparam int N = 64;
  localparam int XB = 0, YB = 128, ZB = 256;
  localparam int NSTORED = 6;
  localparam int NCYC = 1 + 3 * (N - 1) + 2;

  function automatic ctx_t op_at(int r, int c, int idx);
    ctx_t x;
    x = '0;
    if (r == 1 && c == 1) begin
      // S: store B's output register
      if (idx == 2 || idx == 5) begin x.op = OP_ST; x.src_a = SRC_N; x.addr_a = addr_t'(XB); x.stride_a = 4'd1; end
      return x;
    end
    if (r != 0 || c > 1) return x;
    case (idx)
      0: if (c == 1) begin x.op = OP_LD; x.addr_a = addr_t'(XB); x.addr_b = addr_t'(XB); end
      1: if (c == 0) begin
           x.op = OP_LD; x.addr_a = addr_t'(YB + 1); x.stride_a = 4'd1; x.addr_b = addr_t'(ZB + 1); x.stride_b = 4'd1;
         end
      2: if (c == 0) begin x.op = OP_MOV; x.src_a = SRC_R1; end
         else begin x.op = OP_SUB; x.src_a = SRC_W; x.src_b = SRC_R0; x.dst = 1'b1; end
      3: if (c == 1) begin x.op = OP_MUL; x.src_a = SRC_R1; x.src_b = SRC_W; x.mul_sel = 0; end
      default: ;
    endcase
    return x;
  endfunction

`include "rsp_tb_host.svh"

  word_t xm [N], y [N], z [N];

  initial begin
    int cycles;
    word_t got;
    host_reset();
    for (int i = 0; i < N; i++) begin
      y[i] = word_t'($urandom_range(0, 20)) - 16'd10; host_mem_write(YB + i, y[i]);
      z[i] = word_t'($urandom_range(0, 6)) - 16'd3;   host_mem_write(ZB + i, z[i]);
    end
    xm[0] = 16'd5;
    host_mem_write(XB, xm[0]);
    for (int i = 1; i < N; i++) begin
      host_mem_write(XB + i, 16'hdead);
      xm[i] = word_t'($signed(z[i]) * $signed(word_t'(y[i] - xm[i-1])));
    end
    load_program(NSTORED);
    run_loop(1, 3, N - 1, NSTORED - 1, cycles);
    checks++;
    if (cycles != NCYC) begin failures++; $display("run took %0d cycles, expected %0d", cycles, NCYC); end
    checks++;
    if (conflict) begin failures++; $display("bus conflict"); end
    for (int i = 0; i < N; i++) begin
      host_mem_read(XB + i, got);
      check_eq($sformatf("x[%0d]", i), got, xm[i]);
    end
    $display("tri-diagonal: %0d dependent steps in %0d cycles", N - 1, cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
