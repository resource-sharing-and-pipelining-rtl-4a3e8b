// tb_rsp_data_memory: self-checking test of the multi-bus data memory.
// Fills the memory through the host port, then in every cycle lets each row
// write a random word (distinct addresses) and reads all 2*ROWS read buses at
// random addresses, comparing with a shadow array in the testbench. Also
// checks that a host write is dropped in a cycle with a row write.
module tb_rsp_data_memory;
  import rsp_pkg::*;
  localparam int R = 8;
  logic clk = 0;
  addr_t   rd_addr [R][2];
  word_t   rd_data [R][2];
  wr_req_t wr [R];
  logic    host_we;
  addr_t   host_addr;
  word_t   host_wdata, host_rdata;
  word_t   shadow [1024];
  int checks = 0, failures = 0;

  rsp_data_memory #(.ROWS(R), .DEPTH(1024)) dut (.clk, .rd_addr, .rd_data, .wr,
    .host_we, .host_addr, .host_wdata, .host_rdata);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < R; r++) begin wr[r] = '0; rd_addr[r][0] = 0; rd_addr[r][1] = 0; end
    host_we = 0; host_addr = 0; host_wdata = 0;
    for (int i = 0; i < 1024; i++) begin
      @(negedge clk);
      host_we = 1; host_addr = addr_t'(i); host_wdata = word_t'($urandom); shadow[i] = host_wdata;
    end
    @(negedge clk);
    host_we = 0;
    for (int t = 0; t < 200; t++) begin
      @(negedge clk);
      // check reads of the current contents
      for (int r = 0; r < R; r++) begin
        rd_addr[r][0] = addr_t'($urandom);
        rd_addr[r][1] = addr_t'($urandom);
        wr[r].valid = ($urandom % 2) == 1;
        wr[r].addr  = addr_t'(r * 128 + ($urandom % 128));
        wr[r].data  = word_t'($urandom);
      end
      host_we = (t % 5 == 0);
      host_addr = addr_t'($urandom);
      host_wdata = word_t'($urandom);
      #1;
      for (int r = 0; r < R; r++) for (int k = 0; k < 2; k++) begin
        checks++;
        if (rd_data[r][k] !== shadow[rd_addr[r][k]]) begin
          failures++; $display("read row %0d bus %0d addr %0d mismatch", r, k, rd_addr[r][k]);
        end
      end
      checks++;
      if (host_rdata !== shadow[host_addr]) begin failures++; $display("host read mismatch"); end
      begin
        bit any;
        any = 0;
        for (int r = 0; r < R; r++) any |= wr[r].valid;
        if (host_we && !any) shadow[host_addr] = host_wdata;
        for (int r = 0; r < R; r++) if (wr[r].valid) shadow[wr[r].addr] = wr[r].data;
      end
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
