// rsp_bus_switch: the bus switch that sits beside every PE and connects it
// to the multipliers shared by its row.
//
// When the PE issues a multiplication, the switch places the two 16-bit
// operands on the bus of the multiplier named by the context's multiplier
// select (`req_sel`, the mapping fixed at compile time and read from the
// configuration cache); the buses of the other multipliers see an idle,
// all-zero request, so a row can combine its switches with a plain OR. When
// the product comes back, the switch picks the 32-bit product bus of the
// multiplier named by `wb_sel` and hands it to the PE. Both directions are
// combinational. That the switch routes operands out and the 2n-bit product
// back, under control of the configuration cache, follows the source
// architecture; the OR-combinable idle value and the separate `wb_sel`
// are this design's choices.
module rsp_bus_switch
  import rsp_pkg::*;
#(
  parameter int unsigned NMUL = 2
) (
  input  mul_req_t         pe_req,
  input  logic [MSELW-1:0] req_sel,
  input  logic [MSELW-1:0] wb_sel,
  output mul_req_t         mul_req     [NMUL],
  input  prod_t            mul_product [NMUL],
  output prod_t            pe_product
);

  always_comb begin
    for (int unsigned m = 0; m < NMUL; m++) begin
      mul_req[m] = (pe_req.valid && req_sel == MSELW'(m)) ? pe_req : '0;
    end
  end

  always_comb begin
    pe_product = '0;
    for (int unsigned m = 0; m < NMUL; m++) begin
      if (wb_sel == MSELW'(m)) pe_product = mul_product[m];
    end
  end

endmodule
