// tb_wl_fft_mul: the twiddle-factor multiplication loop of an FFT, 32
// iterations, on the full-size array.
//   out[k] = a[k] * w[k]   (complex, 16-bit real and imaginary parts)
// Row pairs (0,1), (2,3), (4,5), (6,7) form four groups; PE pair (2g, c)
// / (2g+1, c) computes k = 8g + c, starting c cycles after column 0.
//   s0  upper: Ld ar,wr          lower: Ld ai,wi
//   s1  upper: 1* wr*ai -> R0    lower: 1* ar*wi -> R1    (multiplier 0)
//   s2  upper: 1* ar*wr -> R1    lower: 1* ai*wi -> R0    (multiplier 1)
//   s4  upper: re = R1 - lower.R0 -> R1
//       lower: im = R1 + upper.R0 -> R0
//   s5  upper: St re             lower: St im
// Each PE has two products in flight on different multipliers in s2.
// Checks all 64 result words and the run length (6 + 7 = 13 cycles).
module tb_wl_fft_mul;
  import rsp_pkg::*;
  localparam int N = 32;
  localparam int ARB = 0, AIB = 32, WRB = 64, WIB = 96, ORB = 128, OIB = 160;
  localparam int NCYC = 13;

  function automatic ctx_t op_at(int r, int c, int t);
    ctx_t x;
    int k, s;
    bit up;
    x = '0;
    if (t < c || t >= c + 6) return x;
    up = (r % 2 == 0); k = 8 * (r / 2) + c; s = t - c;
    case (s)
      0: begin
        x.op = OP_LD;
        x.addr_a = addr_t'((up ? ARB : AIB) + k);
        x.addr_b = addr_t'((up ? WRB : WIB) + k);
      end
      1: begin
        x.op = OP_MUL; x.mul_sel = 0;
        if (up) begin x.src_a = SRC_R1; x.src_b = SRC_S; x.dst = 1'b0; end
        else    begin x.src_a = SRC_N;  x.src_b = SRC_R1; x.dst = 1'b1; end
      end
      2: begin
        x.op = OP_MUL; x.mul_sel = 1; x.src_a = SRC_R0; x.src_b = SRC_R1;
        x.dst = up ? 1'b1 : 1'b0;
      end
      4: begin
        if (up) begin x.op = OP_SUB; x.src_a = SRC_R1; x.src_b = SRC_S; x.dst = 1'b1; end
        else    begin x.op = OP_ADD; x.src_a = SRC_R1; x.src_b = SRC_N; x.dst = 1'b0; end
      end
      5: begin
        x.op = OP_ST;
        x.src_a = up ? SRC_R1 : SRC_R0;
        x.addr_a = addr_t'((up ? ORB : OIB) + k);
      end
      default: ;
    endcase
    return x;
  endfunction

`include "rsp_tb_host.svh"

  word_t ar [N], ai [N], wr [N], wi [N];

  function automatic int sx(word_t v); return int'($signed(v)); endfunction

  initial begin
    int cycles;
    word_t got;
    host_reset();
    for (int k = 0; k < N; k++) begin
      ar[k] = word_t'($urandom_range(0, 400)) - 16'd200; host_mem_write(ARB + k, ar[k]);
      ai[k] = word_t'($urandom_range(0, 400)) - 16'd200; host_mem_write(AIB + k, ai[k]);
      wr[k] = word_t'($urandom_range(0, 128)) - 16'd64;  host_mem_write(WRB + k, wr[k]);
      wi[k] = word_t'($urandom_range(0, 128)) - 16'd64;  host_mem_write(WIB + k, wi[k]);
    end
    load_program(NCYC);
    run_straight(NCYC, cycles);
    checks++;
    if (cycles != NCYC) begin failures++; $display("run took %0d cycles, expected %0d", cycles, NCYC); end
    checks++;
    if (conflict) begin failures++; $display("bus conflict"); end
    for (int k = 0; k < N; k++) begin
      host_mem_read(ORB + k, got);
      check_eq($sformatf("re[%0d]", k), got, word_t'(sx(ar[k]) * sx(wr[k]) - sx(ai[k]) * sx(wi[k])));
      host_mem_read(OIB + k, got);
      check_eq($sformatf("im[%0d]", k), got, word_t'(sx(ar[k]) * sx(wi[k]) + sx(ai[k]) * sx(wr[k])));
    end
    $display("fft multiplication loop: %0d complex products in %0d cycles", N, cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
