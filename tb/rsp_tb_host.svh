// rsp_tb_host.svh: host side shared by the workload testbenches.
//
// Included inside a testbench module that has already declared
//   function automatic ctx_t op_at(int r, int c, int t);
// giving the context of PE (r,c) in cycle t of a straight-line program.
// Provides: the rsp_array instance at its default size, a clock, a
// watchdog, host writes/reads of the data memory, loading a program of
// n contexts into all 64 configuration caches and running it, either
// straight through or with a repeated kernel.

  localparam int ROWS = 8, COLS = 8, NCTX = 64;

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

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic host_reset();
    cfg_we = 0; cfg_row = 0; cfg_col = 0; cfg_addr = 0; cfg_data = '0;
    mem_we = 0; mem_addr = 0; mem_wdata = 0; start = 0;
    loop_start = 0; loop_end = 0; loop_count = 0; last = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
  endtask

  task automatic host_mem_write(int a, word_t d);
    @(negedge clk);
    mem_we = 1; mem_addr = addr_t'(a); mem_wdata = d;
    @(negedge clk);
    mem_we = 0;
  endtask

  task automatic host_mem_read(int a, output word_t d);
    @(negedge clk);
    mem_addr = addr_t'(a);
    #1;
    d = mem_rdata;
  endtask

  task automatic load_program(int n);
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++)
        for (int i = 0; i < NCTX; i++) begin
          @(negedge clk);
          cfg_we = 1; cfg_row = 3'(r); cfg_col = 3'(c); cfg_addr = 6'(i);
          cfg_data = (i < n) ? op_at(r, c, i) : '0;
        end
    @(negedge clk);
    cfg_we = 0;
  endtask

  // Run contexts 0..n-1 once; returns the number of busy cycles.
  task automatic run_straight(int n, output int cycles);
    @(negedge clk);
    loop_start = 0; loop_end = 0; loop_count = 16'd1; last = 6'(n - 1);
    start = 1;
    @(negedge clk);
    start = 0;
    cycles = 0;
    while (!done) begin
      @(negedge clk);
      cycles++;
    end
  endtask

  // Run a program with prologue 0..ls-1, kernel ls..le repeated lc times and
  // epilogue le+1..la; returns the number of busy cycles.
  task automatic run_loop(int ls, int le, int lc, int la, output int cycles);
    @(negedge clk);
    loop_start = 6'(ls); loop_end = 6'(le); loop_count = 16'(lc); last = 6'(la);
    start = 1;
    @(negedge clk);
    start = 0;
    cycles = 0;
    while (!done) begin
      @(negedge clk);
      cycles++;
    end
  endtask

  task automatic check_eq(string what, word_t got, word_t exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("%s = %0d (%h), expected %0d (%h)", what, $signed(got), got, $signed(exp), exp);
    end
  endtask
