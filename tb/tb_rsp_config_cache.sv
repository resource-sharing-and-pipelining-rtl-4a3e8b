// tb_rsp_config_cache: self-checking test of a PE configuration cache.
// Writes a random context into every entry, then reads all entries back in
// a random order and compares with a copy kept by the testbench.
module tb_rsp_config_cache;
  import rsp_pkg::*;
  localparam int D = 32;
  logic clk = 0;
  logic we;
  logic [4:0] waddr, raddr;
  ctx_t wdata, ctx;
  ctx_t shadow [D];
  int checks = 0, failures = 0;

  rsp_config_cache #(.DEPTH(D)) dut (.clk, .we, .waddr, .wdata, .raddr, .ctx);
  always #5 clk = ~clk;

  function automatic ctx_t rnd_ctx();
    logic [$bits(ctx_t)-1:0] v;
    for (int i = 0; i < $bits(ctx_t); i++) v[i] = 1'($urandom);
    return ctx_t'(v);
  endfunction

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; waddr = 0; raddr = 0; wdata = '0;
    for (int i = 0; i < D; i++) begin
      @(negedge clk);
      we = 1; waddr = 5'(i); wdata = rnd_ctx(); shadow[i] = wdata;
    end
    @(negedge clk);
    we = 0;
    for (int i = 0; i < 3 * D; i++) begin
      @(negedge clk);
      raddr = 5'($urandom % D);
      #1;
      checks++;
      if (ctx !== shadow[raddr]) begin failures++; $display("entry %0d mismatch", raddr); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
