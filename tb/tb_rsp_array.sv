// tb_rsp_array: end-to-end test of the RSP array at its full default size
// (8x8 PEs, two 2-stage pipelined multipliers per row).
//
// Workload: the scaled matrix product Z = C * X * Y of the architecture's
// running example, computed with the loop-pipelined schedule for a pipelined
// multiplier: every column runs the 8-cycle iteration
//   Ld, 1*, 2*, +, +, 1*, 2*, St
// and column c starts c cycles after column 0. Rows 0-3 and rows 4-7 each
// hold an independent problem: the four PEs of a column form the products
// X(i,k)*Y(k,j) for k = 0..3, reduce them over the vertical neighbour links
// (rows 0+1 and 2+3, then the two partial sums), multiply by C from the
// context immediate and store Z(i,j). Column c computes column j = c mod 4
// of Z; columns 0-3 use the row's multiplier 0 and columns 4-7 multiplier 1,
// so in every row both shared multipliers are busy and each of them carries
// two different PEs' products in its two stages at once. X is (2*ITER) x 4,
// Y is 4 x 4; every column runs ITER iterations.
//
// The contexts are stored as prologue (7), kernel (8, repeated ITER-1
// times) and epilogue (8) and are generated here from the slot function.
// Checks: every Z element against a model, the run length 8*ITER + 7 cycles,
// no bus conflict, then a deliberately conflicting program must raise the
// conflict flag. Mechanism counters (shared-multiplier issues per
// multiplier, two-stage overlap, 1-cycle ALU ops finishing while a product
// is in flight, two-bus loads, stores, kernel loop-backs) must all be non-zero.
module tb_rsp_array;
  import rsp_pkg::*;
  localparam int ROWS = 8, COLS = 8, ITER = 3, M = 2 * ITER;
  localparam int II = 8;
  localparam word_t C = 16'd3;

  logic clk = 0, rst_n = 0;
  logic cfg_we;
  logic [2:0] cfg_row, cfg_col;
  logic [5:0] cfg_addr;
  ctx_t cfg_data;
  logic mem_we;
  addr_t mem_addr;
  word_t mem_wdata, mem_rdata;
  logic start;
  logic [5:0] loop_start, loop_end, last;
  logic [15:0] loop_count;
  logic busy, done, conflict;
  int checks = 0, failures = 0;

  rsp_array dut (.clk, .rst_n, .cfg_we, .cfg_row, .cfg_col, .cfg_addr, .cfg_data,
    .mem_we, .mem_addr, .mem_wdata, .mem_rdata, .start, .loop_start, .loop_end,
    .loop_count, .last, .busy, .done, .conflict);

  always #5 clk = ~clk;

  // ---------------- mechanism counters ----------------
  int n_mul_issue [2];
  int n_overlap, n_alu_during_mul, n_ld, n_st, n_loopback, n_busy;
  always @(posedge clk) if (rst_n) begin
    if (busy) n_busy++;
    if (busy && dut.ptr == loop_end && dut.u_ctrl.pass + 16'd1 < loop_count) n_loopback++;
    for (int r = 0; r < ROWS; r++) begin
      for (int c = 0; c < COLS; c++) begin
        if (dut.rd_req[r][c].valid) n_ld++;
        if (dut.wr_req[r][c].valid) n_st++;
      end
      for (int m = 0; m < 2; m++) begin
        if (dut.row_mreq[r][m].valid) n_mul_issue[m]++;
      end
    end
  end
  // stage-2 occupancy of every multiplier, and 1-cycle ops alongside it
  for (genvar r = 0; r < ROWS; r++) begin : g_r
    for (genvar m = 0; m < 2; m++) begin : g_m
      always @(posedge clk) if (rst_n) begin
        if (dut.g_row[r].g_mul[m].u_mul.g_pipe.v_q && dut.row_mreq[r][m].valid) n_overlap++;
      end
    end
    for (genvar c = 0; c < COLS; c++) begin : g_c
      always @(posedge clk) if (rst_n) begin
        if (dut.g_row[r].g_col[c].u_pe.op == OP_ADD &&
            (dut.g_row[r].g_mul[0].u_mul.g_pipe.v_q || dut.g_row[r].g_mul[1].u_mul.g_pipe.v_q))
          n_alu_during_mul++;
      end
    end
  end

  // ---------------- watchdog ----------------
  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- schedule ----------------
  function automatic int xb(int g); return g * 64; endfunction
  function automatic int yb(int g); return g * 64 + 32; endfunction
  function automatic int zb(int g); return 128 + g * 64; endfunction

  // Context of PE (r,c) at absolute cycle t of the run.
  function automatic ctx_t op_at(int r, int c, int t);
    ctx_t x;
    int g, k, h, j, s;
    x = '0;
    g = r / 4; k = r % 4; h = c / 4; j = c % 4;
    if (t < c || t >= c + II * ITER) return x;
    s = (t - c) % II;
    x.mul_sel = MSELW'(h);
    case (s)
      0: begin
        x.op = OP_LD;
        x.addr_a = addr_t'(xb(g) + h * 4 + k); x.stride_a = 4'd8;   // X(h+2n, k)
        x.addr_b = addr_t'(yb(g) + k * 4 + j); x.stride_b = 4'd0;   // Y(k, j)
      end
      1: begin x.op = OP_MUL; x.src_a = SRC_R0; x.src_b = SRC_R1; x.dst = 1'b0; end
      3: begin
        if (k == 1) begin x.op = OP_ADD; x.src_a = SRC_R0; x.src_b = SRC_N; end
        if (k == 2) begin x.op = OP_ADD; x.src_a = SRC_R0; x.src_b = SRC_S; end
      end
      4: if (k == 1) begin x.op = OP_ADD; x.src_a = SRC_R0; x.src_b = SRC_S; end
      5: if (k == 1) begin x.op = OP_MUL; x.src_a = SRC_R0; x.src_b = SRC_IMM; x.imm = C; end
      7: if (k == 1) begin
        x.op = OP_ST; x.src_a = SRC_R0;
        x.addr_a = addr_t'(zb(g) + h * 4 + j); x.stride_a = 4'd8;   // Z(h+2n, j)
      end
      default: ;
    endcase
    return x;
  endfunction

  // Context index -> absolute cycle (prologue 0..6, kernel 7..14, epilogue 15..22).
  function automatic int idx_time(int idx);
    if (idx < 15) return idx;
    return 7 + II * (ITER - 1) + (idx - 15);
  endfunction

  word_t X [2][M][4];
  word_t Y [2][4][4];

  task automatic host_mem_write(int a, word_t d);
    @(negedge clk);
    mem_we = 1; mem_addr = addr_t'(a); mem_wdata = d;
    @(negedge clk);
    mem_we = 0;
  endtask

  task automatic load_contexts(bit with_conflict);
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++)
        for (int i = 0; i < 64; i++) begin
          @(negedge clk);
          cfg_we = 1; cfg_row = 3'(r); cfg_col = 3'(c); cfg_addr = 6'(i);
          cfg_data = (i <= 22) ? op_at(r, c, idx_time(i)) : '0;
          if (with_conflict && i == 0 && r == 5 && c == 1) begin
            // column 1 loads in the same cycle as column 0 of row 5
            cfg_data = op_at(r, 0, 0);
          end
        end
    @(negedge clk);
    cfg_we = 0;
  endtask

  task automatic run_program(output int cycles);
    @(negedge clk);
    loop_start = 6'd7; loop_end = 6'd14; loop_count = 16'(ITER - 1); last = 6'd22;
    start = 1;
    @(negedge clk);
    start = 0;
    cycles = 0;
    while (!done) begin
      @(negedge clk);
      cycles++;
    end
  endtask

  initial begin
    int cycles;
    cfg_we = 0; cfg_row = 0; cfg_col = 0; cfg_addr = 0; cfg_data = '0;
    mem_we = 0; mem_addr = 0; mem_wdata = 0; start = 0;
    loop_start = 0; loop_end = 0; loop_count = 0; last = 0;
    n_mul_issue[0] = 0; n_mul_issue[1] = 0;
    n_overlap = 0; n_alu_during_mul = 0; n_ld = 0; n_st = 0; n_loopback = 0; n_busy = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // operands (signed, small) and a cleared result area
    for (int g = 0; g < 2; g++) begin
      for (int i = 0; i < M; i++) for (int k = 0; k < 4; k++) begin
        X[g][i][k] = word_t'($urandom_range(0, 200)) - 16'd100;
        host_mem_write(xb(g) + i * 4 + k, X[g][i][k]);
      end
      for (int k = 0; k < 4; k++) for (int j = 0; j < 4; j++) begin
        Y[g][k][j] = word_t'($urandom_range(0, 200)) - 16'd100;
        host_mem_write(yb(g) + k * 4 + j, Y[g][k][j]);
      end
      for (int a = 0; a < 64; a++) host_mem_write(zb(g) + a, 16'hdead);
    end

    load_contexts(0);
    run_program(cycles);

    // run length: ITER iterations of II cycles plus COLS-1 cycles of skew
    checks++;
    if (cycles != II * ITER + COLS - 1) begin
      failures++; $display("run took %0d cycles, expected %0d", cycles, II * ITER + COLS - 1);
    end
    checks++;
    if (conflict) begin failures++; $display("unexpected bus conflict"); end

    // results
    for (int g = 0; g < 2; g++)
      for (int i = 0; i < M; i++)
        for (int j = 0; j < 4; j++) begin
          int acc;
          word_t expv;
          acc = 0;
          for (int k = 0; k < 4; k++) acc += int'($signed(X[g][i][k])) * int'($signed(Y[g][k][j]));
          expv = word_t'(int'(C) * acc);
          @(negedge clk);
          mem_addr = addr_t'(zb(g) + i * 4 + j);
          #1;
          checks++;
          if (mem_rdata !== expv) begin
            failures++; $display("Z%0d(%0d,%0d) = %0d, expected %0d", g, i, j, $signed(mem_rdata), $signed(expv));
          end
        end

    // a program that breaks the compile-time bus mapping must be flagged
    load_contexts(1);
    run_program(cycles);
    checks++;
    if (!conflict) begin failures++; $display("conflict not flagged"); end

    $display("mechanisms: mul0 issues=%0d mul1 issues=%0d two-stage overlaps=%0d adds beside in-flight products=%0d loads=%0d stores=%0d kernel loop-backs=%0d busy cycles=%0d",
             n_mul_issue[0], n_mul_issue[1], n_overlap, n_alu_during_mul, n_ld, n_st, n_loopback, n_busy);
    checks++; if (n_mul_issue[0] == 0) begin failures++; $display("multiplier 0 never used"); end
    checks++; if (n_mul_issue[1] == 0) begin failures++; $display("multiplier 1 never used"); end
    checks++; if (n_overlap == 0) begin failures++; $display("no two-stage overlap"); end
    checks++; if (n_alu_during_mul == 0) begin failures++; $display("no 1-cycle op beside a product in flight"); end
    checks++; if (n_ld == 0) begin failures++; $display("no loads"); end
    checks++; if (n_st == 0) begin failures++; $display("no stores"); end
    checks++; if (n_loopback == 0) begin failures++; $display("kernel never repeated"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
