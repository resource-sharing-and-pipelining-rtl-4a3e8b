// rsp_config_cache: the configuration cache of one PE.
//
// A small memory of DEPTH context words. The host writes it through
// we/waddr/wdata while the array is idle; during a run the controller's
// context pointer `raddr` selects the word that drives the PE and its bus
// switch in the same cycle (asynchronous read from a registered pointer).
// One cache per PE follows the source architecture; the depth and the
// loading port are this design's choices.
module rsp_config_cache
  import rsp_pkg::*;
#(
  parameter int unsigned DEPTH = 64,
  localparam int unsigned IW = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [IW-1:0] waddr,
  input  ctx_t          wdata,
  input  logic [IW-1:0] raddr,
  output ctx_t          ctx
);

  ctx_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  assign ctx = mem[raddr];

endmodule
