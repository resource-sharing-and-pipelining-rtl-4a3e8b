// tb_wl_mvm: matrix-vector multiplication y = A * x (8 x 8, 64
// multiplications) on the full-size array.
// PE (r,c) loads A[r][c] and x[c] on row r's two read buses, multiplies on
// the row's shared multiplier (columns 0-3: multiplier 0, 4-7: multiplier 1)
// and adds the running sum of its west neighbour; column c runs c cycles
// after column 0, so the sum travels along the row and column 7 stores
// y[r]. Checks all eight results and the run length (12 cycles).
module tb_wl_mvm;
  import rsp_pkg::*;
  localparam int AB = 0, XB = 64, YB = 128;
  localparam int NCYC = 12;

  function automatic ctx_t op_at(int r, int c, int t);
    ctx_t x;
    x = '0;
    x.mul_sel = MSELW'(c / 4);
    case (t - c)
      0: begin x.op = OP_LD; x.addr_a = addr_t'(AB + 8 * r + c); x.addr_b = addr_t'(XB + c); end
      1: begin x.op = OP_MUL; x.src_a = SRC_R0; x.src_b = SRC_R1; end
      3: begin x.op = OP_ADD; x.src_a = SRC_R0; x.src_b = SRC_W; end
      4: if (c == 7) begin x.op = OP_ST; x.src_a = SRC_R0; x.addr_a = addr_t'(YB + r); end
      default: ;
    endcase
    return x;
  endfunction

`include "rsp_tb_host.svh"

  word_t a [8][8], xv [8];

  initial begin
    int cycles;
    word_t got;
    host_reset();
    for (int c = 0; c < 8; c++) begin xv[c] = word_t'($urandom_range(0, 200)) - 16'd100; host_mem_write(XB + c, xv[c]); end
    for (int r = 0; r < 8; r++) for (int c = 0; c < 8; c++) begin
      a[r][c] = word_t'($urandom_range(0, 200)) - 16'd100;
      host_mem_write(AB + 8 * r + c, a[r][c]);
    end
    load_program(NCYC);
    run_straight(NCYC, cycles);
    checks++;
    if (cycles != NCYC) begin failures++; $display("run took %0d cycles, expected %0d", cycles, NCYC); end
    checks++;
    if (conflict) begin failures++; $display("bus conflict"); end
    for (int r = 0; r < 8; r++) begin
      int e;
      e = 0;
      for (int c = 0; c < 8; c++) e += int'($signed(a[r][c])) * int'($signed(xv[c]));
      host_mem_read(YB + r, got);
      check_eq($sformatf("y[%0d]", r), got, word_t'(e));
    end
    $display("mvm: 64 multiplications in %0d cycles", cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
