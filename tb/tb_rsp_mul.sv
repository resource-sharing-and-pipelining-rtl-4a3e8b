// tb_rsp_mul: self-checking test of the shared multiplier.
// Streams a new random operand pair every cycle into a 2-stage instance and
// a 1-stage instance. The 2-stage product must appear exactly one cycle after
// its request (so two requests are in flight in the two stages at once); the
// 1-stage product in the same cycle. Expected values are signed 32-bit
// products computed by the testbench.
module tb_rsp_mul;
  import rsp_pkg::*;
  logic     clk = 0, rst_n = 0;
  mul_req_t req;
  prod_t    p2, p1;
  logic     v2, v1;
  int       checks = 0, failures = 0;
  int       overlap = 0;

  rsp_mul #(.STAGES(2)) dut2 (.clk, .rst_n, .req, .product(p2), .product_valid(v2));
  rsp_mul #(.STAGES(1)) dut1 (.clk, .rst_n, .req, .product(p1), .product_valid(v1));

  always #5 clk = ~clk;

  function automatic prod_t ref_mul(word_t a, word_t b);
    longint x;
    x = longint'($signed(a)) * longint'($signed(b));
    return prod_t'(x);
  endfunction

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  mul_req_t prev;
  initial begin
    req = '0;
    prev = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 300; i++) begin
      @(negedge clk);
      req.valid = (i % 7 != 3);
      req.a = word_t'($urandom);
      req.b = word_t'($urandom);
      if (i == 0) begin req.a = 16'h8000; req.b = 16'h8000; end
      if (i == 1) begin req.a = 16'h7fff; req.b = 16'h8000; end
      #1;
      // 1-stage: combinational
      if (req.valid) begin
        checks++;
        if (p1 !== ref_mul(req.a, req.b) || !v1) begin
          failures++;
          $display("1-stage mismatch %h*%h = %h", req.a, req.b, p1);
        end
      end
      // 2-stage: result of the previous cycle's request
      checks++;
      if (v2 !== prev.valid) begin
        failures++;
        $display("2-stage valid wrong at %0d", i);
      end
      if (prev.valid) begin
        if (req.valid) overlap++;
        checks++;
        if (p2 !== ref_mul(prev.a, prev.b)) begin
          failures++;
          $display("2-stage mismatch %h*%h = %h", prev.a, prev.b, p2);
        end
      end
      @(posedge clk);
      prev = req;
    end
    checks++;
    if (overlap == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
