// tb_wl_hydro: Livermore loop 1 (hydro fragment) on the full-size array.
//   x[k] = q + y[k] * (r * z[k+10] + t * z[k+11]),  k = 0 .. 31
// Mapping: row pairs (0,1), (2,3), (4,5), (6,7) form four groups; PE pair
// (2g, c)/(2g+1, c) computes k = 8g + c, column c starting c cycles after
// column 0. Per iteration (8 slots):
//   upper PE: Ld z[k+10],y[k] | 1* r*z | 2* | + lower | 1* *y | 2* | +q | St x[k]
//   lower PE: Ld z[k+11]      | 1* t*z | 2*
// The first multiplications use the row's multiplier 0, the one by y[k]
// multiplier 1, so no multiplier sees two requests in one cycle. Checks all
// 32 results (16-bit wrap-around arithmetic) and the run length of 8 + 7
// cycles.
module tb_wl_hydro;
  import rsp_pkg::*;
  localparam int N = 32;
  localparam int YB = 0, ZB = 64, XB = 128;
  localparam word_t Q = 16'd7, RC = 16'd3, TC = 16'hfffe;  // q, r, t = -2

  function automatic ctx_t op_at(int r, int c, int t);
    ctx_t x;
    int g, k, s;
    bit up;
    x = '0;
    if (t < c || t >= c + 8) return x;
    g = r / 2; up = (r % 2 == 0); k = 8 * g + c; s = t - c;
    case (s)
      0: begin
        x.op = OP_LD;
        x.addr_a = addr_t'(ZB + k + (up ? 10 : 11));
        x.addr_b = addr_t'(YB + k);
      end
      1: begin x.op = OP_MUL; x.src_a = SRC_R0; x.src_b = SRC_IMM; x.imm = up ? RC : TC; x.mul_sel = 0; end
      3: if (up) begin x.op = OP_ADD; x.src_a = SRC_R0; x.src_b = SRC_S; end
      4: if (up) begin x.op = OP_MUL; x.src_a = SRC_R0; x.src_b = SRC_R1; x.mul_sel = 1; end
      6: if (up) begin x.op = OP_ADD; x.src_a = SRC_R0; x.src_b = SRC_IMM; x.imm = Q; end
      7: if (up) begin x.op = OP_ST; x.src_a = SRC_R0; x.addr_a = addr_t'(XB + k); end
      default: ;
    endcase
    return x;
  endfunction

`include "rsp_tb_host.svh"

  word_t y [N];
  word_t z [N + 11];

  initial begin
    int cycles;
    word_t got;
    host_reset();
    for (int k = 0; k < N; k++) begin y[k] = word_t'($urandom_range(0, 200)) - 16'd100; host_mem_write(YB + k, y[k]); end
    for (int k = 0; k < N + 11; k++) begin z[k] = word_t'($urandom_range(0, 200)) - 16'd100; host_mem_write(ZB + k, z[k]); end
    load_program(15);
    run_straight(15, cycles);
    checks++;
    if (cycles != 15) begin failures++; $display("run took %0d cycles, expected 15", cycles); end
    checks++;
    if (conflict) begin failures++; $display("bus conflict"); end
    for (int k = 0; k < N; k++) begin
      int e;
      e = int'($signed(Q)) + int'($signed(y[k])) *
          (int'($signed(RC)) * int'($signed(z[k+10])) + int'($signed(TC)) * int'($signed(z[k+11])));
      host_mem_read(XB + k, got);
      check_eq($sformatf("x[%0d]", k), got, word_t'(e));
    end
    $display("hydro: %0d iterations in %0d cycles", N, cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
