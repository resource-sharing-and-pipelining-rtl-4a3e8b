// tb_rsp_pe: self-checking test of the primitive PE.
// Feeds a random stream of contexts (ALU, shift, load, store, multiply with
// random operand sources and destinations) and compares, every cycle, the
// PE's bus requests and its output register with a reference model of the
// PE kept in the testbench. The testbench plays the two shared multipliers of
// a row: a request in cycle t returns its product on the bus of the chosen
// multiplier in cycle t+1, so the model checks the 2-cycle multiply latency.
// After a MUL the next context never writes the same register (the "2*"
// slot rule the PE asserts).
module tb_rsp_pe;
  import rsp_pkg::*;
  logic clk = 0, rst_n = 0;
  logic run, clear;
  ctx_t ctx;
  word_t nb_n, nb_s, nb_e, nb_w, rd0, rd1, out_r;
  rd_req_t rd_req;
  wr_req_t wr_req;
  mul_req_t mul_req;
  logic [MSELW-1:0] mul_sel, wb_sel;
  prod_t product;
  int checks = 0, failures = 0;
  int n_mul = 0, n_ld = 0, n_st = 0;

  rsp_pe #(.MUL_STAGES(2)) dut (.clk, .rst_n, .run, .clear, .ctx, .nb_n, .nb_s, .nb_e, .nb_w,
    .rd_data0(rd0), .rd_data1(rd1), .rd_req, .wr_req, .mul_req, .mul_sel, .wb_sel, .product, .out_r);

  always #5 clk = ~clk;

  // Behaviour of the two shared multipliers seen through the bus switch.
  prod_t mstage [2];
  always_ff @(posedge clk) if (mul_req.valid) mstage[mul_sel[0]] <= prod_t'($signed(mul_req.a) * $signed(mul_req.b));
  assign product = mstage[wb_sel[0]];

  // Reference model state.
  word_t m_r0, m_r1;
  int    m_ld, m_st;
  bit    m_pv, m_pdst;
  word_t m_pval;

  function automatic word_t src(src_e s);
    case (s)
      SRC_R0: return m_r0;
      SRC_R1: return m_r1;
      SRC_N: return nb_n;
      SRC_S: return nb_s;
      SRC_E: return nb_e;
      SRC_W: return nb_w;
      SRC_IMM: return ctx.imm;
      default: return '0;
    endcase
  endfunction

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    op_e ops[13] = '{OP_NOP, OP_ADD, OP_SUB, OP_ABS, OP_AND, OP_OR, OP_XOR, OP_MOV,
                     OP_SHL, OP_SHR, OP_LD, OP_ST, OP_MUL};
    word_t a, b, y;
    bit wr;
    bit last_mul_dst;
    bit last_was_mul;
    run = 0; clear = 0; ctx = '0;
    nb_n = 0; nb_s = 0; nb_e = 0; nb_w = 0; rd0 = 0; rd1 = 0;
    m_r0 = 0; m_r1 = 0; m_ld = 0; m_st = 0; m_pv = 0; m_pdst = 0; m_pval = 0;
    last_was_mul = 0; last_mul_dst = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    clear = 1;
    @(negedge clk);
    clear = 0;
    run = 1;
    for (int t = 0; t < 1500; t++) begin
      // new context and environment
      ctx.op = ops[$urandom % 13];
      ctx.src_a = src_e'($urandom % 8);
      ctx.src_b = src_e'($urandom % 8);
      ctx.dst = 1'($urandom);
      ctx.mul_sel = MSELW'($urandom % 2);
      ctx.addr_a = addr_t'($urandom);
      ctx.addr_b = addr_t'($urandom);
      ctx.stride_a = 4'($urandom);
      ctx.stride_b = 4'($urandom);
      ctx.imm = word_t'($urandom);
      if (last_was_mul && (ctx.op == OP_LD || (ctx.op inside {[OP_ADD:OP_SHR]} && ctx.dst == last_mul_dst)))
        ctx.op = OP_NOP;
      run = (t % 97 != 50);
      nb_n = word_t'($urandom); nb_s = word_t'($urandom);
      nb_e = word_t'($urandom); nb_w = word_t'($urandom);
      rd0 = word_t'($urandom); rd1 = word_t'($urandom);
      #1;
      a = src(ctx.src_a);
      b = src(ctx.src_b);
      wr = 0;
      y = 0;
      if (run) begin
        case (ctx.op)
          OP_ADD: begin y = a + b; wr = 1; end
          OP_SUB: begin y = a - b; wr = 1; end
          OP_ABS: begin y = a[15] ? -a : a; wr = 1; end
          OP_AND: begin y = a & b; wr = 1; end
          OP_OR:  begin y = a | b; wr = 1; end
          OP_XOR: begin y = a ^ b; wr = 1; end
          OP_MOV: begin y = a; wr = 1; end
          OP_SHL: begin y = a << b[3:0]; wr = 1; end
          OP_SHR: begin y = $signed(a) >>> b[3:0]; wr = 1; end
          default: ;
        endcase
      end
      // bus requests
      checks++;
      if (rd_req.valid !== (run && ctx.op == OP_LD) ||
          (rd_req.valid && (rd_req.addr0 !== addr_t'(ctx.addr_a + m_ld * ctx.stride_a) ||
                            rd_req.addr1 !== addr_t'(ctx.addr_b + m_ld * ctx.stride_b)))) begin
        failures++; $display("t=%0d read request wrong", t);
      end
      checks++;
      if (wr_req.valid !== (run && ctx.op == OP_ST) ||
          (wr_req.valid && (wr_req.addr !== addr_t'(ctx.addr_a + m_st * ctx.stride_a) || wr_req.data !== a))) begin
        failures++; $display("t=%0d write request wrong", t);
      end
      checks++;
      if (mul_req.valid !== (run && ctx.op == OP_MUL) ||
          (mul_req.valid && (mul_req.a !== a || mul_req.b !== b || mul_sel !== ctx.mul_sel))) begin
        failures++; $display("t=%0d multiply request wrong", t);
      end
      @(posedge clk);
      // model update
      if (run && ctx.op == OP_LD) begin m_r0 = rd0; m_r1 = rd1; m_ld++; n_ld++; end
      else if (wr) begin if (ctx.dst) m_r1 = y; else m_r0 = y; end
      if (run && ctx.op == OP_ST) begin m_st++; n_st++; end
      if (m_pv) begin if (m_pdst) m_r1 = m_pval; else m_r0 = m_pval; end
      m_pv = run && ctx.op == OP_MUL;
      if (m_pv) begin
        m_pdst = ctx.dst;
        m_pval = word_t'($signed(a) * $signed(b));
        n_mul++;
      end
      last_was_mul = m_pv;
      last_mul_dst = ctx.dst;
      @(negedge clk);
      checks++;
      if (out_r !== m_r0) begin failures++; $display("t=%0d R0=%h exp %h", t, out_r, m_r0); end
    end
    checks++;
    if (n_mul == 0 || n_ld == 0 || n_st == 0) failures++;
    $display("PE: %0d multiplies, %0d loads, %0d stores", n_mul, n_ld, n_st);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
