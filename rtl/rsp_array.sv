// rsp_array: top level of the resource-sharing and pipelining (RSP)
// coarse-grained reconfigurable array, architecture #2: an 8x8 mesh of
// primitive PEs in which the eight PEs of every row share two 2-stage
// pipelined array multipliers, one at each end of the row.
//
// Structure. Every PE has its own configuration cache and bus switch. All
// caches are indexed by one context pointer from the controller, so in each
// cycle every PE runs its own context word; a loop-pipelined schedule is
// obtained by giving neighbouring columns the same operations shifted in
// time. A PE reads the output registers of its N/S/E/W neighbours (zero at the
// array edges). Each row has a pair of read buses and a write bus to the data
// memory, and one operand bus plus one product bus per shared multiplier.
// Row buses are formed by OR-ing the idle-zero requests of the row's PEs;
// which PE uses which bus in which cycle is fixed when the contexts are
// compiled. `conflict` is a sticky flag (cleared by `start`) that records a
// cycle in which two PEs of a row drove the same read, write or multiplier
// bus, i.e. a context program that breaks the compile-time mapping.
//
// Timing. A multiplication issued in cycle t occupies stage 1 of its
// multiplier in cycle t and stage 2 in cycle t+1, where the product is
// routed back through the issuing PE's bus switch and written at the end of
// t+1. Another PE of the row may issue to the same multiplier in cycle t+1.
// Loads and stores complete in the cycle they are issued (asynchronous
// memory read, write at the clock edge).
//
// Host side (no host processor is modelled): the configuration caches are
// written through cfg_* and the data memory through mem_*, while idle;
// start/loop_start/loop_end/loop_count/last launch a run; done pulses at its
// end.
//
// Taken from the source architecture: 8x8 mesh, 16-bit data, per-PE
// configuration cache and bus switch, two read and one write bus per row,
// two shared multipliers per row pipelined in two stages, compile-time
// multiplier mapping. This design's own: bus combining by OR, the conflict
// flag, the controller, the host ports and all encodings.
module rsp_array
  import rsp_pkg::*;
#(
  parameter int unsigned ROWS       = 8,
  parameter int unsigned COLS       = 8,
  parameter int unsigned NMUL_ROW   = 2,
  parameter int unsigned MUL_STAGES = 2,
  parameter int unsigned CTX_DEPTH  = 64,
  parameter int unsigned MEM_DEPTH  = 1024,
  localparam int unsigned IW = $clog2(CTX_DEPTH),
  localparam int unsigned RW = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int unsigned CW = (COLS > 1) ? $clog2(COLS) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  // configuration loading
  input  logic          cfg_we,
  input  logic [RW-1:0] cfg_row,
  input  logic [CW-1:0] cfg_col,
  input  logic [IW-1:0] cfg_addr,
  input  ctx_t          cfg_data,
  // data memory host port
  input  logic          mem_we,
  input  addr_t         mem_addr,
  input  word_t         mem_wdata,
  output word_t         mem_rdata,
  // run control
  input  logic          start,
  input  logic [IW-1:0] loop_start,
  input  logic [IW-1:0] loop_end,
  input  logic [15:0]   loop_count,
  input  logic [IW-1:0] last,
  output logic          busy,
  output logic          done,
  output logic          conflict
);

  logic [IW-1:0] ptr;
  logic          run, clear;

  rsp_controller #(.CTX_DEPTH(CTX_DEPTH)) u_ctrl (
    .clk, .rst_n, .start, .loop_start, .loop_end, .loop_count, .last,
    .ptr, .run, .clear, .done
  );
  assign busy = run;

  ctx_t             ctx      [ROWS][COLS];
  word_t            out_r    [ROWS][COLS];
  rd_req_t          rd_req   [ROWS][COLS];
  wr_req_t          wr_req   [ROWS][COLS];
  mul_req_t         pe_mreq  [ROWS][COLS];
  logic [MSELW-1:0] pe_msel  [ROWS][COLS];
  logic [MSELW-1:0] pe_wbsel [ROWS][COLS];
  prod_t            pe_prod  [ROWS][COLS];
  mul_req_t         sw_mreq  [ROWS][COLS][NMUL_ROW];

  mul_req_t         row_mreq [ROWS][NMUL_ROW];
  prod_t            row_prod [ROWS][NMUL_ROW];
  addr_t            row_rdaddr [ROWS][2];
  word_t            row_rddata [ROWS][2];
  wr_req_t          row_wr   [ROWS];

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      word_t nb_n, nb_s, nb_e, nb_w;
      if (r > 0)        begin : g_n assign nb_n = out_r[r-1][c]; end else begin : g_n0 assign nb_n = '0; end
      if (r < ROWS - 1) begin : g_s assign nb_s = out_r[r+1][c]; end else begin : g_s0 assign nb_s = '0; end
      if (c < COLS - 1) begin : g_e assign nb_e = out_r[r][c+1]; end else begin : g_e0 assign nb_e = '0; end
      if (c > 0)        begin : g_w assign nb_w = out_r[r][c-1]; end else begin : g_w0 assign nb_w = '0; end

      rsp_config_cache #(.DEPTH(CTX_DEPTH)) u_cache (
        .clk,
        .we    (cfg_we && cfg_row == RW'(r) && cfg_col == CW'(c)),
        .waddr (cfg_addr),
        .wdata (cfg_data),
        .raddr (ptr),
        .ctx   (ctx[r][c])
      );

      rsp_pe #(.MUL_STAGES(MUL_STAGES)) u_pe (
        .clk, .rst_n, .run, .clear,
        .ctx      (ctx[r][c]),
        .nb_n, .nb_s, .nb_e, .nb_w,
        .rd_data0 (row_rddata[r][0]),
        .rd_data1 (row_rddata[r][1]),
        .rd_req   (rd_req[r][c]),
        .wr_req   (wr_req[r][c]),
        .mul_req  (pe_mreq[r][c]),
        .mul_sel  (pe_msel[r][c]),
        .wb_sel   (pe_wbsel[r][c]),
        .product  (pe_prod[r][c]),
        .out_r    (out_r[r][c])
      );

      rsp_bus_switch #(.NMUL(NMUL_ROW)) u_sw (
        .pe_req      (pe_mreq[r][c]),
        .req_sel     (pe_msel[r][c]),
        .wb_sel      (pe_wbsel[r][c]),
        .mul_req     (sw_mreq[r][c]),
        .mul_product (row_prod[r]),
        .pe_product  (pe_prod[r][c])
      );
    end

    for (genvar m = 0; m < NMUL_ROW; m++) begin : g_mul
      rsp_mul #(.STAGES(MUL_STAGES)) u_mul (
        .clk, .rst_n,
        .req           (row_mreq[r][m]),
        .product       (row_prod[r][m]),
        .product_valid ()
      );
    end
  end

  // Row bus combining and conflict detection.
  logic conflict_now;
  always_comb begin
    conflict_now = 1'b0;
    for (int unsigned r = 0; r < ROWS; r++) begin
      int unsigned n_rd, n_wr;
      n_rd = 0;
      n_wr = 0;
      row_rdaddr[r][0] = '0;
      row_rdaddr[r][1] = '0;
      row_wr[r]        = '0;
      for (int unsigned m = 0; m < NMUL_ROW; m++) row_mreq[r][m] = '0;
      for (int unsigned c = 0; c < COLS; c++) begin
        if (rd_req[r][c].valid) begin
          row_rdaddr[r][0] |= rd_req[r][c].addr0;
          row_rdaddr[r][1] |= rd_req[r][c].addr1;
          n_rd++;
        end
        if (wr_req[r][c].valid) begin
          row_wr[r] |= wr_req[r][c];
          n_wr++;
        end
      end
      if (n_rd > 1 || n_wr > 1) conflict_now = 1'b1;
      for (int unsigned m = 0; m < NMUL_ROW; m++) begin
        int unsigned n_m;
        n_m = 0;
        for (int unsigned c = 0; c < COLS; c++) begin
          row_mreq[r][m] |= sw_mreq[r][c][m];
          if (sw_mreq[r][c][m].valid) n_m++;
        end
        if (n_m > 1) conflict_now = 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)          conflict <= 1'b0;
    else if (clear)      conflict <= 1'b0;
    else if (conflict_now) conflict <= 1'b1;
  end


  rsp_data_memory #(.ROWS(ROWS), .DEPTH(MEM_DEPTH)) u_mem (
    .clk,
    .rd_addr    (row_rdaddr),
    .rd_data    (row_rddata),
    .wr         (row_wr),
    .host_we    (mem_we),
    .host_addr  (mem_addr),
    .host_wdata (mem_wdata),
    .host_rdata (mem_rdata)
  );

endmodule
