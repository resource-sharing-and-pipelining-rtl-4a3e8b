// tb_wl_fdct: 8 x 8 two-dimensional forward DCT on the full-size array, as
// two loop-pipelined passes of one program shape (rows, then columns).
//
// Coefficients: C[u][x] = round(16 * a(u) * cos((2x+1) u pi / 16)), a(0) =
// sqrt(1/8), a(u>0) = 1/2, so |C| <= 8. Pass 1 computes
//   T[i][u] = (sum_x C[u][x] * X[i][x]) >>> 4      (array row r = i, column c = x)
// and pass 2
//   Y[v][u] = (sum_i C[v][i] * T[i][u]) >>> 4      (array row r = u, column c = i)
// In both passes PE (r,c) runs 8 iterations (one per output frequency) of
//   Ld C,data | 1* | 2* | + west | (column 7:) >>> 4 | St
// with column c starting c cycles after column 0. The coefficient address
// steps by 8 per iteration through the load counter; the product sum runs
// along the row; column 7 scales and stores. Columns 0-3 use multiplier 0,
// columns 4-7 multiplier 1. Contexts: prologue 7, kernel 8 (run 7 times),
// epilogue 6 = 69 cycles per pass. The result is compared bit-exactly with
// the same fixed-point algorithm (16-bit wrap-around, arithmetic shifts)
// computed here, and the run length of each pass is checked.
module tb_wl_fdct;
  import rsp_pkg::*;
  localparam int CB = 0, XB = 64, TB = 128, YB = 192;
  localparam int II = 8, ITER = 8, SH = 4;
  localparam int NSTORED = 7 + II + 6;            // 21 stored contexts
  localparam int NCYC = 7 + II * ITER + 6 - II;   // 69 cycles

  bit pass2;

  function automatic int idx_time(int idx);
    if (idx < 15) return idx;
    return 7 + II * (ITER - 1) + (idx - 15);
  endfunction

  function automatic ctx_t op_at(int r, int c, int idx);
    ctx_t x;
    int t, s;
    x = '0;
    t = idx_time(idx);
    if (t < c || t >= c + II * ITER) return x;
    s = (t - c) % II;
    x.mul_sel = MSELW'(c / 4);
    case (s)
      0: begin
        x.op = OP_LD;
        x.addr_a = addr_t'(CB + c); x.stride_a = 4'd8;                       // C[iter][c]
        x.addr_b = addr_t'(pass2 ? TB + 8 * c + r : XB + 8 * r + c);         // T[c][r] / X[r][c]
      end
      1: begin x.op = OP_MUL; x.src_a = SRC_R0; x.src_b = SRC_R1; end
      3: begin x.op = OP_ADD; x.src_a = SRC_R0; x.src_b = SRC_W; end
      4: if (c == 7) begin x.op = OP_SHR; x.src_a = SRC_R0; x.src_b = SRC_IMM; x.imm = word_t'(SH); end
      5: if (c == 7) begin
        x.op = OP_ST; x.src_a = SRC_R0;
        if (pass2) begin x.addr_a = addr_t'(YB + r);     x.stride_a = 4'd8; end  // Y[iter][r]
        else       begin x.addr_a = addr_t'(TB + 8 * r); x.stride_a = 4'd1; end  // T[r][iter]
      end
      default: ;
    endcase
    return x;
  endfunction

`include "rsp_tb_host.svh"

  word_t cf [8][8], xin [8][8], tm [8][8], ym [8][8];

  function automatic word_t dot_shift(word_t a [8], word_t b [8]);
    word_t acc;
    acc = '0;
    for (int k = 0; k < 8; k++) acc = acc + word_t'($signed(a[k]) * $signed(b[k]));
    return word_t'($signed(acc) >>> SH);
  endfunction

  initial begin
    int cycles;
    word_t got;
    word_t va [8], vb [8];
    host_reset();
    for (int u = 0; u < 8; u++) for (int x = 0; x < 8; x++) begin
      real a, v;
      a = (u == 0) ? $sqrt(1.0 / 8.0) : 0.5;
      v = 16.0 * a * $cos((2.0 * x + 1.0) * u * 3.14159265358979 / 16.0);
      cf[u][x] = word_t'($rtoi(v < 0 ? v - 0.5 : v + 0.5));
      host_mem_write(CB + 8 * u + x, cf[u][x]);
    end
    for (int i = 0; i < 8; i++) for (int x = 0; x < 8; x++) begin
      xin[i][x] = word_t'($urandom_range(0, 127)) - 16'd64;
      host_mem_write(XB + 8 * i + x, xin[i][x]);
    end
    // reference
    for (int i = 0; i < 8; i++) for (int u = 0; u < 8; u++) begin
      for (int k = 0; k < 8; k++) begin va[k] = cf[u][k]; vb[k] = xin[i][k]; end
      tm[i][u] = dot_shift(va, vb);
    end
    for (int v = 0; v < 8; v++) for (int u = 0; u < 8; u++) begin
      for (int k = 0; k < 8; k++) begin va[k] = cf[v][k]; vb[k] = tm[k][u]; end
      ym[v][u] = dot_shift(va, vb);
    end

    for (int p = 0; p < 2; p++) begin
      pass2 = (p == 1);
      load_program(NSTORED);
      run_loop(7, 14, ITER - 1, NSTORED - 1, cycles);
      checks++;
      if (cycles != NCYC) begin failures++; $display("pass %0d took %0d cycles, expected %0d", p + 1, cycles, NCYC); end
      checks++;
      if (conflict) begin failures++; $display("bus conflict in pass %0d", p + 1); end
    end
    for (int i = 0; i < 8; i++) for (int u = 0; u < 8; u++) begin
      host_mem_read(TB + 8 * i + u, got);
      check_eq($sformatf("T[%0d][%0d]", i, u), got, tm[i][u]);
    end
    for (int v = 0; v < 8; v++) for (int u = 0; u < 8; u++) begin
      host_mem_read(YB + 8 * v + u, got);
      check_eq($sformatf("Y[%0d][%0d]", v, u), got, ym[v][u]);
    end
    $display("2D-FDCT: two passes of %0d cycles", cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
