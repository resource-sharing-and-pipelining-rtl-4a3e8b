// tb_rsp_bus_switch: self-checking test of the per-PE bus switch.
// Random operand requests and multiplier selects: the request must appear
// on exactly the selected multiplier bus and zero on the other; the product
// of the multiplier named by wb_sel must come back to the PE.
module tb_rsp_bus_switch;
  import rsp_pkg::*;
  localparam int N = 2;
  mul_req_t         pe_req;
  logic [MSELW-1:0] req_sel, wb_sel;
  mul_req_t         mul_req [N];
  prod_t            mul_product [N];
  prod_t            pe_product;
  int checks = 0, failures = 0;

  rsp_bus_switch #(.NMUL(N)) dut (.pe_req, .req_sel, .wb_sel, .mul_req, .mul_product, .pe_product);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 300; i++) begin
      pe_req.valid = ($urandom % 4) != 0;
      pe_req.a = word_t'($urandom);
      pe_req.b = word_t'($urandom);
      req_sel = MSELW'($urandom % N);
      wb_sel  = MSELW'($urandom % N);
      for (int m = 0; m < N; m++) mul_product[m] = prod_t'($urandom);
      #1;
      for (int m = 0; m < N; m++) begin
        checks++;
        if (pe_req.valid && m == int'(req_sel)) begin
          if (mul_req[m] !== pe_req) begin failures++; $display("req not routed to %0d", m); end
        end else if (mul_req[m] !== '0) begin
          failures++; $display("bus %0d not idle", m);
        end
      end
      checks++;
      if (pe_product !== mul_product[int'(wb_sel)]) begin failures++; $display("product from wrong bus"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
