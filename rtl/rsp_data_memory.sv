// rsp_data_memory: the data memory behind the row buses of the array.
//
// Every row of PEs has two read buses and one write bus of its own, so the
// memory has 2*ROWS asynchronous read ports (rd_addr[r][0/1] ->
// rd_data[r][0/1] in the same cycle) and ROWS write ports written at the
// clock edge. A host port (write plus asynchronous read) loads operands and
// fetches results while the array is idle; a host write is ignored in a cycle
// in which any row writes. If two rows write the same word in one cycle the
// higher row wins. The bus count per row follows the source architecture;
// the single shared array, its depth, the read timing and the host port are
// this design's choices. DEPTH should be 2**AW (1024): addresses are AW bits.
module rsp_data_memory
  import rsp_pkg::*;
#(
  parameter int unsigned ROWS  = 8,
  parameter int unsigned DEPTH = 1024
) (
  input  logic    clk,
  input  addr_t   rd_addr [ROWS][2],
  output word_t   rd_data [ROWS][2],
  input  wr_req_t wr      [ROWS],
  input  logic    host_we,
  input  addr_t   host_addr,
  input  word_t   host_wdata,
  output word_t   host_rdata
);

  word_t mem [DEPTH];

  logic any_row_wr;
  always_comb begin
    any_row_wr = 1'b0;
    for (int unsigned r = 0; r < ROWS; r++) any_row_wr |= wr[r].valid;
  end

  always_ff @(posedge clk) begin
    if (host_we && !any_row_wr) mem[host_addr] <= host_wdata;
    for (int unsigned r = 0; r < ROWS; r++) begin
      if (wr[r].valid) mem[wr[r].addr] <= wr[r].data;
    end
  end

  always_comb begin
    for (int unsigned r = 0; r < ROWS; r++) begin
      rd_data[r][0] = mem[rd_addr[r][0]];
      rd_data[r][1] = mem[rd_addr[r][1]];
    end
  end

  assign host_rdata = mem[host_addr];

endmodule
