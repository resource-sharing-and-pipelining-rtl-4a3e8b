// tb_wl_state: Livermore loop 7 (equation of state fragment), 16
// iterations, on the full-size array.
//   x[k] = u[k] + r*(z[k] + r*y[k])
//        + t*(u[k+3] + r*(u[k+2] + r*u[k+1]) + t*(u[k+6] + q*(u[k+5] + q*u[k+4])))
// Rows 0-3 and rows 4-7 form two groups; column c of group g computes
// k = 8g + c, starting c cycles after column 0. Within a group (rows a, b,
// d, c from top to bottom) the 17-slot iteration is
//   s0  a: Ld y,z      b: Ld u1,u2   d: Ld u3,u6   c: Ld u4,u5
//   s1  a,b: 1* by r   c: 1* by q                      (multiplier 0)
//   s3  a,b,c: + R1
//   s4  a,b: 1* by r   c: 1* by q                      (multiplier 1)
//   s6  b: + u3 (from d)          d: R0 = u6
//   s7  c: + u6 (from d)
//   s9  c: 1* by t                                     (multiplier 0)
//   s11 d: D = b + c
//   s12 d: 1* by t                                     (multiplier 0)
//   s14 b: a + d       a: Ld u0
//   s15 b: + u0 (from a)
//   s16 b: St x[k]
// Same-multiplier issues of one row are 8 or more slots apart, so the eight
// skewed columns never collide. Checks the 16 results and the run length
// (17 + 7 = 24 cycles).
module tb_wl_state;
  import rsp_pkg::*;
  localparam int N = 16;
  localparam int UB = 0, YB = 32, ZB = 64, XB = 128;
  localparam word_t RC = 16'd3, TC = 16'hfffe, QC = 16'd5;
  localparam int NCYC = 24;

  function automatic ctx_t op_at(int r, int c, int t);
    ctx_t x;
    int g, k, s, role;   // role: 0 = a, 1 = b, 2 = d, 3 = c
    x = '0;
    if (t < c || t >= c + 17) return x;
    g = r / 4; role = r % 4; k = 8 * g + c; s = t - c;
    x.src_a = SRC_R0;
    case (s)
      0: begin
        x.op = OP_LD;
        case (role)
          0: begin x.addr_a = addr_t'(YB + k);     x.addr_b = addr_t'(ZB + k);     end
          1: begin x.addr_a = addr_t'(UB + k + 1); x.addr_b = addr_t'(UB + k + 2); end
          2: begin x.addr_a = addr_t'(UB + k + 3); x.addr_b = addr_t'(UB + k + 6); end
          default: begin x.addr_a = addr_t'(UB + k + 4); x.addr_b = addr_t'(UB + k + 5); end
        endcase
      end
      1, 4: if (role != 2) begin
        x.op = OP_MUL; x.src_b = SRC_IMM; x.imm = (role == 3) ? QC : RC;
        x.mul_sel = (s == 1) ? 0 : 1;
      end
      3: if (role != 2) begin x.op = OP_ADD; x.src_b = SRC_R1; end
      6: begin
        if (role == 1) begin x.op = OP_ADD; x.src_b = SRC_S; end
        if (role == 2) begin x.op = OP_MOV; x.src_a = SRC_R1; end
      end
      7: if (role == 3) begin x.op = OP_ADD; x.src_b = SRC_N; end
      9: if (role == 3) begin x.op = OP_MUL; x.src_b = SRC_IMM; x.imm = TC; x.mul_sel = 0; end
      11: if (role == 2) begin x.op = OP_ADD; x.src_a = SRC_N; x.src_b = SRC_S; end
      12: if (role == 2) begin x.op = OP_MUL; x.src_b = SRC_IMM; x.imm = TC; x.mul_sel = 0; end
      14: begin
        if (role == 1) begin x.op = OP_ADD; x.src_a = SRC_N; x.src_b = SRC_S; end
        if (role == 0) begin x.op = OP_LD; x.addr_a = addr_t'(UB + k); x.addr_b = addr_t'(UB + k); end
      end
      15: if (role == 1) begin x.op = OP_ADD; x.src_b = SRC_N; end
      16: if (role == 1) begin x.op = OP_ST; x.addr_a = addr_t'(XB + k); end
      default: ;
    endcase
    return x;
  endfunction

`include "rsp_tb_host.svh"

  word_t u [N + 6], y [N], z [N];

  function automatic int sx(word_t v); return int'($signed(v)); endfunction

  initial begin
    int cycles;
    word_t got;
    host_reset();
    for (int i = 0; i < N + 6; i++) begin u[i] = word_t'($urandom_range(0, 40)) - 16'd20; host_mem_write(UB + i, u[i]); end
    for (int i = 0; i < N; i++) begin
      y[i] = word_t'($urandom_range(0, 40)) - 16'd20; host_mem_write(YB + i, y[i]);
      z[i] = word_t'($urandom_range(0, 40)) - 16'd20; host_mem_write(ZB + i, z[i]);
    end
    load_program(NCYC);
    run_straight(NCYC, cycles);
    checks++;
    if (cycles != NCYC) begin failures++; $display("run took %0d cycles, expected %0d", cycles, NCYC); end
    checks++;
    if (conflict) begin failures++; $display("bus conflict"); end
    for (int k = 0; k < N; k++) begin
      int r, t, q, e;
      r = sx(RC); t = sx(TC); q = sx(QC);
      e = sx(u[k]) + r * (sx(z[k]) + r * sx(y[k]))
        + t * (sx(u[k+3]) + r * (sx(u[k+2]) + r * sx(u[k+1]))
               + t * (sx(u[k+6]) + q * (sx(u[k+5]) + q * sx(u[k+4]))));
      host_mem_read(XB + k, got);
      check_eq($sformatf("x[%0d]", k), got, word_t'(e));
    end
    $display("state: %0d iterations in %0d cycles", N, cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
