// tb_wl_inner_product: Livermore loop 3 (inner product) on the full-size
// array.   q = sum_{k=0}^{127} z[k] * x[k]
// Phase 1: PE (r,c) forms the products for k = 16r + 2c + n, n = 0, 1 (the
// load counters step the addresses). Per iteration: Ld z,x | 1* | 2* |
// + west, so each row sums its products along the row, column c one cycle
// after column c-1; column 7 stores the row's partial sum. Columns 0-3 use
// the row's multiplier 0, columns 4-7 multiplier 1.
// Phase 2 (column 0): each row loads its two partials, adds them and the
// sums ripple down the column; row 7 stores q.
// Checks q, the 16 partial sums and the run length (31 cycles).
module tb_wl_inner_product;
  import rsp_pkg::*;
  localparam int N = 128, ITER = 2;
  localparam int ZB = 0, XB = 128, PB = 512, QA = 600;
  localparam int T2 = 8 * ITER + 4;      // first cycle of phase 2
  localparam int NCYC = T2 + 11;

  function automatic ctx_t op_at(int r, int c, int t);
    ctx_t x;
    int s;
    x = '0;
    if (t >= c && t < c + 8 * ITER) begin
      s = (t - c) % 8;
      x.mul_sel = MSELW'(c / 4);
      case (s)
        0: begin
          x.op = OP_LD;
          x.addr_a = addr_t'(ZB + 16 * r + 2 * c); x.stride_a = 4'd1;
          x.addr_b = addr_t'(XB + 16 * r + 2 * c); x.stride_b = 4'd1;
        end
        1: begin x.op = OP_MUL; x.src_a = SRC_R0; x.src_b = SRC_R1; end
        3: begin x.op = OP_ADD; x.src_a = SRC_R0; x.src_b = SRC_W; end
        4: if (c == 7) begin
          x.op = OP_ST; x.src_a = SRC_R0; x.addr_a = addr_t'(PB + 2 * r); x.stride_a = 4'd1;
        end
        default: ;
      endcase
    end else if (c == 0 && t >= T2) begin
      if (t == T2) begin
        x.op = OP_LD; x.addr_a = addr_t'(PB + 2 * r); x.addr_b = addr_t'(PB + 2 * r + 1);
      end else if (t == T2 + 1) begin
        x.op = OP_ADD; x.src_a = SRC_R0; x.src_b = SRC_R1;
      end else if (t == T2 + 2 + r) begin
        x.op = OP_ADD; x.src_a = SRC_R0; x.src_b = SRC_N;
      end else if (r == 7 && t == T2 + 10) begin
        x.op = OP_ST; x.src_a = SRC_R0; x.addr_a = addr_t'(QA);
      end
    end
    return x;
  endfunction

`include "rsp_tb_host.svh"

  word_t z [N], xv [N];

  initial begin
    int cycles, q;
    word_t got;
    host_reset();
    for (int k = 0; k < N; k++) begin
      z[k]  = word_t'($urandom_range(0, 100)) - 16'd50;
      xv[k] = word_t'($urandom_range(0, 100)) - 16'd50;
      host_mem_write(ZB + k, z[k]);
      host_mem_write(XB + k, xv[k]);
    end
    load_program(NCYC);
    run_straight(NCYC, cycles);
    checks++;
    if (cycles != NCYC) begin failures++; $display("run took %0d cycles, expected %0d", cycles, NCYC); end
    checks++;
    if (conflict) begin failures++; $display("bus conflict"); end
    q = 0;
    for (int r = 0; r < 8; r++)
      for (int n = 0; n < ITER; n++) begin
        int p;
        p = 0;
        for (int c = 0; c < 8; c++) p += int'($signed(z[16*r + 2*c + n])) * int'($signed(xv[16*r + 2*c + n]));
        q += p;
        host_mem_read(PB + 2 * r + n, got);
        check_eq($sformatf("partial[%0d][%0d]", r, n), got, word_t'(p));
      end
    host_mem_read(QA, got);
    check_eq("q", got, word_t'(q));
    $display("inner product: %0d terms in %0d cycles", N, cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
