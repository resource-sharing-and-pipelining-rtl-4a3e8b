// tb_wl_matmul_rs: the resource-sharing example without pipelining, on a
// 4 x 4 array with two unpipelined (single-stage) multipliers per row, i.e.
// eight multipliers shared by sixteen PEs.
//
// Workload: Z = C * X * Y for 4 x 4 matrices, columns of Z computed by the
// four array columns, loop-pipelined with the 6-cycle iteration
//   Ld, *, +, +, *, St
// and column c starting c cycles after column 0 (so a column issues its next
// Ld six cycles after the previous one). The first multiplication of each
// iteration uses the row's multiplier 0, the multiplication by C (row 1
// only) multiplier 1; with single-cycle multiplies both are needed because
// column 0's "* C" and column 3's first "*" fall in the same cycle.
// X is ITER x 4; in iteration n, column c computes Z(n, c). Checks every Z element, the run length 6*ITER + 3 and that no
// bus conflict occurred.
module tb_wl_matmul_rs;
  import rsp_pkg::*;
  localparam int ROWS = 4, COLS = 4, II = 6, ITER = 4, M = ITER;
  localparam word_t C = 16'd5;
  localparam int XB = 0, YB = 64, ZB = 128;
  localparam int NCYC = II * ITER + COLS - 1;

  logic clk = 0, rst_n = 0;
  logic cfg_we;
  logic [1:0] cfg_row, cfg_col;
  logic [4:0] cfg_addr;
  ctx_t cfg_data;
  logic mem_we;
  addr_t mem_addr;
  word_t mem_wdata, mem_rdata;
  logic start;
  logic [4:0] loop_start, loop_end, last;
  logic [15:0] loop_count;
  logic busy, done, conflict;
  int checks = 0, failures = 0;
  int n_mul1 = 0;

  rsp_array #(.ROWS(ROWS), .COLS(COLS), .NMUL_ROW(2), .MUL_STAGES(1), .CTX_DEPTH(32)) dut (
    .clk, .rst_n, .cfg_we, .cfg_row, .cfg_col, .cfg_addr, .cfg_data,
    .mem_we, .mem_addr, .mem_wdata, .mem_rdata, .start, .loop_start, .loop_end,
    .loop_count, .last, .busy, .done, .conflict);

  always #5 clk = ~clk;

  always @(posedge clk) if (rst_n) for (int r = 0; r < ROWS; r++) if (dut.row_mreq[r][1].valid) n_mul1++;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Context of PE (r,c) at cycle t; iteration n of column c computes Z(n, c).
  function automatic ctx_t op_at(int r, int c, int t);
    ctx_t x;
    int s;
    x = '0;
    if (t < c || t >= c + II * ITER) return x;
    s = (t - c) % II;
    case (s)
      0: begin
        x.op = OP_LD;
        x.addr_a = addr_t'(XB + r);         x.stride_a = 4'd4;   // X(n, r)
        x.addr_b = addr_t'(YB + 4 * r + c); x.stride_b = 4'd0;   // Y(r, c)
      end
      1: begin x.op = OP_MUL; x.src_a = SRC_R0; x.src_b = SRC_R1; x.mul_sel = 0; end
      2: begin
        if (r == 1) begin x.op = OP_ADD; x.src_a = SRC_R0; x.src_b = SRC_N; end
        if (r == 2) begin x.op = OP_ADD; x.src_a = SRC_R0; x.src_b = SRC_S; end
      end
      3: if (r == 1) begin x.op = OP_ADD; x.src_a = SRC_R0; x.src_b = SRC_S; end
      4: if (r == 1) begin x.op = OP_MUL; x.src_a = SRC_R0; x.src_b = SRC_IMM; x.imm = C; x.mul_sel = 1; end
      5: if (r == 1) begin x.op = OP_ST; x.src_a = SRC_R0; x.addr_a = addr_t'(ZB + c); x.stride_a = 4'd4; end
      default: ;
    endcase
    return x;
  endfunction

  word_t X [M][4], Y [4][4];

  initial begin
    int cycles;
    cfg_we = 0; cfg_row = 0; cfg_col = 0; cfg_addr = 0; cfg_data = '0;
    mem_we = 0; mem_addr = 0; mem_wdata = 0; start = 0;
    loop_start = 0; loop_end = 0; loop_count = 0; last = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < M; i++) for (int k = 0; k < 4; k++) begin
      X[i][k] = word_t'($urandom_range(0, 200)) - 16'd100;
      @(negedge clk); mem_we = 1; mem_addr = addr_t'(XB + 4 * i + k); mem_wdata = X[i][k];
    end
    for (int k = 0; k < 4; k++) for (int j = 0; j < 4; j++) begin
      Y[k][j] = word_t'($urandom_range(0, 200)) - 16'd100;
      @(negedge clk); mem_we = 1; mem_addr = addr_t'(YB + 4 * k + j); mem_wdata = Y[k][j];
    end
    @(negedge clk); mem_we = 0;
    for (int r = 0; r < ROWS; r++) for (int c = 0; c < COLS; c++) for (int i = 0; i < 32; i++) begin
      @(negedge clk);
      cfg_we = 1; cfg_row = 2'(r); cfg_col = 2'(c); cfg_addr = 5'(i);
      cfg_data = (i < NCYC) ? op_at(r, c, i) : '0;
    end
    @(negedge clk);
    cfg_we = 0;
    loop_start = 0; loop_end = 0; loop_count = 16'd1; last = 5'(NCYC - 1);
    start = 1;
    @(negedge clk);
    start = 0;
    cycles = 0;
    while (!done) begin @(negedge clk); cycles++; end
    checks++;
    if (cycles != NCYC) begin failures++; $display("run took %0d cycles, expected %0d", cycles, NCYC); end
    checks++;
    if (conflict) begin failures++; $display("bus conflict"); end
    checks++;
    if (n_mul1 == 0) begin failures++; $display("second multiplier never used"); end
    for (int i = 0; i < M; i++) for (int j = 0; j < 4; j++) begin
      int acc;
      acc = 0;
      for (int k = 0; k < 4; k++) acc += int'($signed(X[i][k])) * int'($signed(Y[k][j]));
      @(negedge clk);
      mem_addr = addr_t'(ZB + 4 * i + j);
      #1;
      checks++;
      if (mem_rdata !== word_t'(int'(C) * acc)) begin
        failures++; $display("Z(%0d,%0d) = %0d, expected %0d", i, j, $signed(mem_rdata), $signed(word_t'(int'(C) * acc)));
      end
    end
    $display("unpipelined 4x4 matrix product: %0d iterations per column in %0d cycles", ITER, cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
