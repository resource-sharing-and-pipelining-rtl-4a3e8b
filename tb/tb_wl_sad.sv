// tb_wl_sad: sum of absolute differences of two 16 x 16 pixel blocks (the
// SAD kernel of a video encoder) on the full-size array; no multiplier is
// used. Phase 1: PE (r,c) handles pixels 32r + 4c + n, n = 0..3. Per
// iteration: Ld a,b | sub | abs | + west; column 7 stores the row's partial
// sum. Phase 2: columns 0 and 1 load the four partials of their row, add
// them pairwise, column 0 adds column 1's sum and the row sums ripple down
// column 0; row 7 stores the SAD. Checks the SAD, the 32 partials and the
// run length (49 cycles).
module tb_wl_sad;
  import rsp_pkg::*;
  localparam int ITER = 4;
  localparam int AB = 0, BB = 256, PB = 768, SA = 900;
  localparam int T2 = 8 * ITER + 4;
  localparam int NCYC = T2 + 13;

  function automatic ctx_t op_at(int r, int c, int t);
    ctx_t x;
    int s;
    x = '0;
    if (t >= c && t < c + 8 * ITER) begin
      s = (t - c) % 8;
      case (s)
        0: begin
          x.op = OP_LD;
          x.addr_a = addr_t'(AB + 32 * r + 4 * c); x.stride_a = 4'd1;
          x.addr_b = addr_t'(BB + 32 * r + 4 * c); x.stride_b = 4'd1;
        end
        1: begin x.op = OP_SUB; x.src_a = SRC_R0; x.src_b = SRC_R1; end
        2: begin x.op = OP_ABS; x.src_a = SRC_R0; end
        3: begin x.op = OP_ADD; x.src_a = SRC_R0; x.src_b = SRC_W; end
        4: if (c == 7) begin
          x.op = OP_ST; x.src_a = SRC_R0; x.addr_a = addr_t'(PB + 4 * r); x.stride_a = 4'd1;
        end
        default: ;
      endcase
    end else if (c <= 1 && t >= T2) begin
      if (t == T2 + c) begin
        x.op = OP_LD; x.addr_a = addr_t'(PB + 4 * r + 2 * c); x.addr_b = addr_t'(PB + 4 * r + 2 * c + 1);
      end else if (t == T2 + c + 1) begin
        x.op = OP_ADD; x.src_a = SRC_R0; x.src_b = SRC_R1;
      end else if (c == 0 && t == T2 + 3) begin
        x.op = OP_ADD; x.src_a = SRC_R0; x.src_b = SRC_E;
      end else if (c == 0 && t == T2 + 4 + r) begin
        x.op = OP_ADD; x.src_a = SRC_R0; x.src_b = SRC_N;
      end else if (c == 0 && r == 7 && t == T2 + 12) begin
        x.op = OP_ST; x.src_a = SRC_R0; x.addr_a = addr_t'(SA);
      end
    end
    return x;
  endfunction

`include "rsp_tb_host.svh"

  word_t pa [256], pb [256];

  initial begin
    int cycles, sad;
    word_t got;
    host_reset();
    for (int i = 0; i < 256; i++) begin
      pa[i] = word_t'($urandom_range(0, 255));
      pb[i] = word_t'($urandom_range(0, 255));
      host_mem_write(AB + i, pa[i]);
      host_mem_write(BB + i, pb[i]);
    end
    load_program(NCYC);
    run_straight(NCYC, cycles);
    checks++;
    if (cycles != NCYC) begin failures++; $display("run took %0d cycles, expected %0d", cycles, NCYC); end
    checks++;
    if (conflict) begin failures++; $display("bus conflict"); end
    sad = 0;
    for (int r = 0; r < 8; r++)
      for (int n = 0; n < ITER; n++) begin
        int p, d;
        p = 0;
        for (int c = 0; c < 8; c++) begin
          d = int'(pa[32*r + 4*c + n]) - int'(pb[32*r + 4*c + n]);
          p += (d < 0) ? -d : d;
        end
        sad += p;
        host_mem_read(PB + 4 * r + n, got);
        check_eq($sformatf("partial[%0d][%0d]", r, n), got, word_t'(p));
      end
    host_mem_read(SA, got);
    check_eq("sad", got, word_t'(sad));
    $display("sad: 256 pixel pairs in %0d cycles", cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
