// rsp_mul: the shared array multiplier, optionally cut into two pipeline
// stages.
//
// Multiplies two signed 16-bit operands into a signed 32-bit product. With
// STAGES = 2 (the pipelined multiplier of the RSP architecture) a register
// sits inside the multiplier: the front stage forms the two half products
// a * b[7:0] (b's low byte taken unsigned) and a * b[15:8] (signed), the
// register holds them, and the end stage adds them with the high one shifted
// left by 8. An operand pair accepted in cycle t then gives `product` during
// cycle t+1, so the issuing PE captures it at the end of its second cycle,
// while a different PE can already present new operands in that cycle. With
// STAGES = 1 (the unpipelined shared multiplier) the same logic is
// combinational and the product appears in the cycle of the request.
// The position of the cut is this design's choice; that the multiplier is
// cut in two by one register follows the source architecture.
//
// Interface: `req` (valid + operands) from the row's multiplier bus;
// `product`/`product_valid` back onto the row's product bus.
module rsp_mul
  import rsp_pkg::*;
#(
  parameter int unsigned STAGES = 2
) (
  input  logic     clk,
  input  logic     rst_n,
  input  mul_req_t req,
  output prod_t    product,
  output logic     product_valid
);

  localparam int unsigned HW = DW / 2;

  // Front: two half products.
  logic signed [DW+HW:0]   lo_f;   // a * unsigned low byte
  logic signed [DW+HW-1:0] hi_f;   // a * signed high byte
  assign lo_f = $signed(req.a) * $signed({1'b0, req.b[HW-1:0]});
  assign hi_f = $signed(req.a) * $signed(req.b[DW-1:HW]);

  logic signed [DW+HW:0]   lo_e;
  logic signed [DW+HW-1:0] hi_e;
  logic                    v_e;

  if (STAGES == 1) begin : g_comb
    assign lo_e = lo_f;
    assign hi_e = hi_f;
    assign v_e  = req.valid;
  end else begin : g_pipe
    logic signed [DW+HW:0]   lo_q;
    logic signed [DW+HW-1:0] hi_q;
    logic                    v_q;
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        lo_q <= '0;
        hi_q <= '0;
        v_q  <= 1'b0;
      end else begin
        v_q <= req.valid;
        if (req.valid) begin
          lo_q <= lo_f;
          hi_q <= hi_f;
        end
      end
    end
    assign lo_e = lo_q;
    assign hi_e = hi_q;
    assign v_e  = v_q;
  end

  // End: sum of the shifted half products.
  assign product       = prod_t'((PW'(hi_e) <<< HW) + PW'(lo_e));
  assign product_valid = v_e;

  initial begin
    assert (STAGES == 1 || STAGES == 2)
      else $error("rsp_mul: STAGES must be 1 or 2");
  end

endmodule
