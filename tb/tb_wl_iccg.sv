// tb_wl_iccg: Livermore loop 2 (ICCG excerpt) on the full-size array, n = 32.
//   ii = n; ipntp = 0;
//   do { ipnt = ipntp; ipntp += ii; ii /= 2; i = ipntp;
//        for (k = ipnt+1; k < ipntp; k += 2) { i++;
//          x[i] = x[k] - v[k]*x[k-1] - v[k+1]*x[k+1]; } } while (ii > 0);
// Five levels of 16, 8, 4, 2 and 1 iterations. The iterations of one level
// are independent; a level reads what the level before wrote, so the levels
// run one after another. One iteration uses three neighbouring PEs of a row,
// P0 P1 P2, for 6 cycles:
//   s0  P0: Ld x[k-1], v[k]
//   s1  P0: 1* x[k-1]*v[k] (multiplier 0)     P2: Ld x[k+1], v[k+1]
//   s2  P2: 1* x[k+1]*v[k+1] (multiplier 1)   P1: Ld x[k]
//   s3  P1: R0 = x[k] - W (P0's product)
//   s4  P1: R0 = R0 - E (P2's product)
//   s5  P1: St x[i]
// Iteration j of a level runs in row j mod 8. In the first level each row has
// two iterations: the second uses columns 3-5 and starts 3 cycles later, so
// the row's read buses, write bus and multipliers are never used twice in a
// cycle. Levels start at cycles 0, 9, 15, 21 and 27; a store at the end of a
// level is in memory when the next level loads. The whole program is 33
// straight-line contexts. Checks every x[33..63] (16-bit wrap-around
// arithmetic, low half of each product), the run length and that no bus
// conflict was flagged.
module tb_wl_iccg;
  import rsp_pkg::*;
  localparam int N = 32;
  localparam int XB = 0, VB = 64;
  localparam int NLEV = 5;
  localparam int NCYC = 33;
  localparam int LOFF  [NLEV] = '{0, 9, 15, 21, 27};
  localparam int NIT   [NLEV] = '{16, 8, 4, 2, 1};
  localparam int IPNT  [NLEV] = '{0, 32, 48, 56, 60};
  localparam int IPNTP [NLEV] = '{32, 48, 56, 60, 62};

  function automatic ctx_t op_at(int r, int c, int t);
    ctx_t x;
    int j, s, p, k, i;
    x = '0;
    for (int l = 0; l < NLEV; l++)
      for (int g = 0; g < 2; g++) begin
        if (g == 1 && l != 0) continue;
        j = r + 8 * g;
        if (j >= NIT[l] || c < 3 * g || c > 3 * g + 2) continue;
        s = t - (LOFF[l] + 3 * g);
        if (s < 0 || s > 5) continue;
        p = c - 3 * g;
        k = IPNT[l] + 1 + 2 * j;
        i = IPNTP[l] + 1 + j;
        case (p)
          0: case (s)
               0: begin x.op = OP_LD; x.addr_a = addr_t'(XB + k - 1); x.addr_b = addr_t'(VB + k); end
               1: begin x.op = OP_MUL; x.src_a = SRC_R0; x.src_b = SRC_R1; x.mul_sel = 0; end
               default: ;
             endcase
          1: case (s)
               2: begin x.op = OP_LD; x.addr_a = addr_t'(XB + k); x.addr_b = addr_t'(XB + k); end
               3: begin x.op = OP_SUB; x.src_a = SRC_R0; x.src_b = SRC_W; end
               4: begin x.op = OP_SUB; x.src_a = SRC_R0; x.src_b = SRC_E; end
               5: begin x.op = OP_ST; x.src_a = SRC_R0; x.addr_a = addr_t'(XB + i); end
               default: ;
             endcase
          default: case (s)
               1: begin x.op = OP_LD; x.addr_a = addr_t'(XB + k + 1); x.addr_b = addr_t'(VB + k + 1); end
               2: begin x.op = OP_MUL; x.src_a = SRC_R0; x.src_b = SRC_R1; x.mul_sel = 1; end
               default: ;
             endcase
        endcase
      end
    return x;
  endfunction

`include "rsp_tb_host.svh"

  word_t xm [2 * N];
  word_t v  [2 * N];

  initial begin
    int cycles, ii, ipnt, ipntp, i;
    word_t got;
    host_reset();
    for (int a = 0; a < 2 * N; a++) begin
      xm[a] = word_t'($urandom_range(0, 200)) - 16'd100;
      v[a]  = word_t'($urandom_range(0, 16)) - 16'd8;
      host_mem_write(XB + a, xm[a]);
      host_mem_write(VB + a, v[a]);
    end
    // reference: the loop as written, in 16-bit arithmetic
    ii = N; ipntp = 0;
    do begin
      ipnt = ipntp; ipntp += ii; ii /= 2; i = ipntp;
      for (int k = ipnt + 1; k < ipntp; k += 2) begin
        i++;
        xm[i] = xm[k] - v[k] * xm[k-1] - v[k+1] * xm[k+1];
      end
    end while (ii > 0);
    load_program(NCYC);
    run_straight(NCYC, cycles);
    checks++;
    if (cycles != NCYC) begin failures++; $display("run took %0d cycles, expected %0d", cycles, NCYC); end
    checks++;
    if (conflict) begin failures++; $display("bus conflict"); end
    for (int a = N + 1; a < 2 * N; a++) begin
      host_mem_read(XB + a, got);
      check_eq($sformatf("x[%0d]", a), got, xm[a]);
    end
    $display("ICCG: 31 iterations in 5 levels, %0d cycles", cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
