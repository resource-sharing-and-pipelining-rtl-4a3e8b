// tb_rsp_controller: self-checking test of the context sequencer.
// Runs several programs (prologue / repeated kernel / epilogue shapes) and
// compares the context pointer in every running cycle with the sequence
// expected from the program registers. Also checks the run length, the
// one-cycle done pulse and that clear coincides with the accepted start.
module tb_rsp_controller;
  logic clk = 0, rst_n = 0;
  logic start;
  logic [4:0] loop_start, loop_end, last, ptr;
  logic [15:0] loop_count;
  logic run, clear, done;
  int checks = 0, failures = 0;

  rsp_controller #(.CTX_DEPTH(32)) dut (.clk, .rst_n, .start, .loop_start, .loop_end,
    .loop_count, .last, .ptr, .run, .clear, .done);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_prog(int ls, int le, int lc, int la);
    int exp[$];
    int passes;
    exp = {};
    for (int i = 0; i < ls; i++) exp.push_back(i);
    passes = (lc == 0) ? 1 : lc;
    for (int p = 0; p < passes; p++) for (int i = ls; i <= le; i++) exp.push_back(i);
    for (int i = le + 1; i <= la; i++) exp.push_back(i);
    @(negedge clk);
    loop_start = 5'(ls); loop_end = 5'(le); loop_count = 16'(lc); last = 5'(la);
    start = 1;
    #1;
    checks++;
    if (!clear || run) begin failures++; $display("clear/run wrong at start"); end
    @(negedge clk);
    start = 0;
    foreach (exp[k]) begin
      checks++;
      if (!run || int'(ptr) != exp[k]) begin
        failures++;
        $display("prog(%0d,%0d,%0d,%0d) step %0d: run=%b ptr=%0d exp=%0d", ls, le, lc, la, k, run, ptr, exp[k]);
      end
      @(negedge clk);
    end
    checks++;
    if (run || !done) begin failures++; $display("run did not end after %0d cycles", exp.size()); end
    @(negedge clk);
    checks++;
    if (done) begin failures++; $display("done longer than one cycle"); end
  endtask

  initial begin
    start = 0; loop_start = 0; loop_end = 0; loop_count = 0; last = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    run_prog(7, 14, 3, 22);
    run_prog(0, 5, 4, 5);
    run_prog(2, 3, 0, 6);
    run_prog(0, 0, 10, 0);
    run_prog(4, 9, 1, 31);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
