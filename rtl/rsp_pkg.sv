// rsp_pkg: types and constants shared by the resource-sharing/pipelining
// (RSP) reconfigurable array.
//
// The data path is 16 bits wide (n = 16) and a multiplication returns a
// 2n = 32-bit product, as in the array this RTL describes. Everything else
// here is this design's own choice: the opcode set, the operand-source
// encoding and the layout of a context word (one configuration instruction
// of one PE for one cycle). A context word carries the operation, the two
// operand selects, the destination register, the index of the shared
// multiplier the PE uses (fixed at compile time and fed to the PE's bus
// switch), two data-memory base addresses with strides for loads and stores,
// and a 16-bit immediate (e.g. the constant C of a scaled matrix product).
package rsp_pkg;

  localparam int unsigned DW = 16;           // data word
  localparam int unsigned PW = 2 * DW;       // product word
  localparam int unsigned AW = 10;           // data-memory address (1024 words)
  localparam int unsigned SW = 4;            // address stride field
  localparam int unsigned MSELW = 2;         // shared multiplier select (up to 4 per row)

  typedef logic [DW-1:0] word_t;
  typedef logic [PW-1:0] prod_t;
  typedef logic [AW-1:0] addr_t;

  // Operations of a PE context.
  typedef enum logic [3:0] {
    OP_NOP = 4'd0,   // hold registers
    OP_ADD = 4'd1,   // dst = A + B
    OP_SUB = 4'd2,   // dst = A - B
    OP_ABS = 4'd3,   // dst = |A|
    OP_AND = 4'd4,
    OP_OR  = 4'd5,
    OP_XOR = 4'd6,
    OP_MOV = 4'd7,   // dst = A
    OP_SHL = 4'd8,   // dst = A << B[3:0]
    OP_SHR = 4'd9,   // dst = A >>> B[3:0] (arithmetic)
    OP_LD  = 4'd10,  // R0 = mem[addr_a + n*stride_a] (read bus 0), R1 = mem[addr_b + n*stride_b] (read bus 1)
    OP_ST  = 4'd11,  // mem[addr_a + m*stride_a] = A (write bus)
    OP_MUL = 4'd12   // A * B on shared multiplier mul_sel; low word lands in dst
  } op_e;

  // Operand sources.
  typedef enum logic [2:0] {
    SRC_R0  = 3'd0,  // own output register
    SRC_R1  = 3'd1,  // own local register
    SRC_N   = 3'd2,  // output register of the PE in the row above
    SRC_S   = 3'd3,  // ... row below
    SRC_E   = 3'd4,  // ... column to the right
    SRC_W   = 3'd5,  // ... column to the left
    SRC_IMM = 3'd6,  // context immediate
    SRC_ZERO = 3'd7
  } src_e;

  typedef struct packed {
    op_e              op;
    src_e             src_a;
    src_e             src_b;
    logic             dst;       // 0: R0, 1: R1
    logic [MSELW-1:0] mul_sel;   // which shared multiplier of the row
    addr_t            addr_a;    // load base (bus 0) / store base
    addr_t            addr_b;    // load base (bus 1)
    logic [SW-1:0]    stride_a;
    logic [SW-1:0]    stride_b;
    word_t            imm;
  } ctx_t;

  // Operands offered to a shared multiplier.
  typedef struct packed {
    logic  valid;
    word_t a;
    word_t b;
  } mul_req_t;

  // Request on one row's pair of read buses.
  typedef struct packed {
    logic  valid;
    addr_t addr0;
    addr_t addr1;
  } rd_req_t;

  // Request on one row's write bus.
  typedef struct packed {
    logic  valid;
    addr_t addr;
    word_t data;
  } wr_req_t;

endpackage
