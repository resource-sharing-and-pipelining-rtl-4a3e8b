// rsp_pe: primitive processing element of the RSP array, i.e. a PE from
// which the multiplier has been taken out and moved to the row's shared pool.
//
// Each cycle the PE executes the context word its configuration cache
// presents (a NOP while the array is not running). Two operand multiplexers
// pick A and B among the PE's own registers, the output registers of its four
// mesh neighbours and the context immediate. The result of the ALU or the
// shift logic is written at the clock edge into R0 (the output register that
// the neighbours read) or R1 (a local register).
//
// Memory traffic uses the row's shared buses. OP_LD puts two addresses on
// the row's two read buses and loads R0 from bus 0 and R1 from bus 1 in the
// same cycle; OP_ST puts operand A and an address on the row's write bus.
// Addresses are base + count * stride, where base and stride come from the
// context and count is the number of loads (or stores) this PE has done since
// the array was started, so one kernel context walks through successive loop
// iterations.
//
// OP_MUL sends A and B through the bus switch to the shared multiplier chosen
// by the context. With MUL_STAGES = 2 the product arrives one cycle later:
// the PE remembers the multiplier and destination, presents the multiplier on
// `wb_sel`, and writes the low 16 bits of the product into the destination at
// the end of that second cycle. The context of that second cycle (the "2*"
// slot of a pipelined schedule) must not write the same register; an
// assertion checks this. With MUL_STAGES = 1 the product is written at the end
// of the issuing cycle.
//
// The component list (multiplexers, ALU, shift logic, shared multiplier,
// output register seen by neighbours, row read/write buses) follows the
// source architecture. The register R1, the address generation, the
// low-word writeback and the zero value read at array edges are this
// design's choices.
module rsp_pe
  import rsp_pkg::*;
#(
  parameter int unsigned MUL_STAGES = 2
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             run,       // array is executing contexts
  input  logic             clear,     // start of a run: clear counters
  input  ctx_t             ctx,
  input  word_t            nb_n,
  input  word_t            nb_s,
  input  word_t            nb_e,
  input  word_t            nb_w,
  input  word_t            rd_data0,
  input  word_t            rd_data1,
  output rd_req_t          rd_req,
  output wr_req_t          wr_req,
  output mul_req_t         mul_req,
  output logic [MSELW-1:0] mul_sel,
  output logic [MSELW-1:0] wb_sel,
  input  prod_t            product,
  output word_t            out_r
);

  word_t r0, r1;
  op_e   op;
  word_t opa, opb;
  word_t alu_y, sh_y;
  addr_t ld_cnt, st_cnt;

  assign op    = run ? ctx.op : OP_NOP;
  assign out_r = r0;

  function automatic word_t pick(src_e s, word_t r0v, word_t r1v, word_t n, word_t so,
                                 word_t e, word_t w, word_t imm);
    unique case (s)
      SRC_R0:  return r0v;
      SRC_R1:  return r1v;
      SRC_N:   return n;
      SRC_S:   return so;
      SRC_E:   return e;
      SRC_W:   return w;
      SRC_IMM: return imm;
      default: return '0;
    endcase
  endfunction

  assign opa = pick(ctx.src_a, r0, r1, nb_n, nb_s, nb_e, nb_w, ctx.imm);
  assign opb = pick(ctx.src_b, r0, r1, nb_n, nb_s, nb_e, nb_w, ctx.imm);

  rsp_alu   u_alu   (.op(op), .a(opa), .b(opb), .y(alu_y));
  rsp_shift u_shift (.op(op), .a(opa), .b(opb), .y(sh_y));

  // Row buses.
  always_comb begin
    rd_req.valid = (op == OP_LD);
    rd_req.addr0 = ctx.addr_a + addr_t'(ld_cnt * ctx.stride_a);
    rd_req.addr1 = ctx.addr_b + addr_t'(ld_cnt * ctx.stride_b);
    wr_req.valid = (op == OP_ST);
    wr_req.addr  = ctx.addr_a + addr_t'(st_cnt * ctx.stride_a);
    wr_req.data  = opa;
    mul_req.valid = (op == OP_MUL);
    mul_req.a     = opa;
    mul_req.b     = opb;
    mul_sel       = ctx.mul_sel;
  end

  // Product writeback bookkeeping.
  logic             wb_now;
  logic             wb_dst;
  if (MUL_STAGES == 1) begin : g_wb_comb
    assign wb_now = (op == OP_MUL);
    assign wb_dst = ctx.dst;
    assign wb_sel = ctx.mul_sel;
  end else begin : g_wb_pipe
    logic             p_valid;
    logic             p_dst;
    logic [MSELW-1:0] p_sel;
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        p_valid <= 1'b0;
        p_dst   <= 1'b0;
        p_sel   <= '0;
      end else begin
        p_valid <= (op == OP_MUL);
        if (op == OP_MUL) begin
          p_dst <= ctx.dst;
          p_sel <= ctx.mul_sel;
        end
      end
    end
    assign wb_now = p_valid;
    assign wb_dst = p_dst;
    assign wb_sel = p_sel;
  end

  // Does this cycle's context write a register (other than by a product)?
  logic  ctx_wr;
  word_t ctx_y;
  always_comb begin
    ctx_wr = 1'b0;
    ctx_y  = alu_y;
    unique case (op)
      OP_ADD, OP_SUB, OP_ABS, OP_AND, OP_OR, OP_XOR, OP_MOV: ctx_wr = 1'b1;
      OP_SHL, OP_SHR: begin ctx_wr = 1'b1; ctx_y = sh_y; end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r0 <= '0;
      r1 <= '0;
      ld_cnt <= '0;
      st_cnt <= '0;
    end else begin
      if (op == OP_LD) begin
        r0 <= rd_data0;
        r1 <= rd_data1;
      end else if (ctx_wr) begin
        if (ctx.dst) r1 <= ctx_y;
        else         r0 <= ctx_y;
      end
      if (wb_now) begin
        if (wb_dst) r1 <= product[DW-1:0];
        else        r0 <= product[DW-1:0];
      end
      if (clear) begin
        ld_cnt <= '0;
        st_cnt <= '0;
      end else begin
        if (op == OP_LD) ld_cnt <= ld_cnt + 1'b1;
        if (op == OP_ST) st_cnt <= st_cnt + 1'b1;
      end
    end
  end

  // A returning product must not collide with a write of the same register
  // by the current context.
  a_wb_no_collision: assert property (@(posedge clk) disable iff (!rst_n)
    (MUL_STAGES > 1 && wb_now) |-> (op != OP_LD && !(ctx_wr && ctx.dst == wb_dst)))
    else $error("rsp_pe: product writeback collides with context write");

endmodule
