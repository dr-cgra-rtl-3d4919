// drcgra_pkg: types and constants shared by the DR-CGRA grid.
//
// Every value that travels through the grid is a tagged token: a data word
// plus the thread ID of the loop iteration it belongs to. One loop iteration
// runs as one thread, and a thread group holds up to 2**TID_W threads (512,
// the largest thread group evaluated for DR-CGRA). The data width, the
// opcode set and the configuration word layout are choices of this RTL; the
// paper fixes none of them.
package drcgra_pkg;

  // Thread-ID width: 9 bits address a thread group of 512 threads.
  localparam int unsigned TID_W  = 9;
  // Data word width (not given by the paper).
  localparam int unsigned DATA_W = 32;

  typedef logic [TID_W-1:0]  tid_t;
  typedef logic [DATA_W-1:0] data_t;

  // Tagged token: thread ID (tag) and operand.
  typedef struct packed {
    tid_t  tid;
    data_t data;
  } token_t;

  // Integer operations of a compute unit. OP_PASS copies operand 1 and is
  // the only single-operand operation (operand 2 is not waited for).
  typedef enum logic [3:0] {
    OP_ADD  = 4'd0,
    OP_SUB  = 4'd1,
    OP_MUL  = 4'd2,
    OP_AND  = 4'd3,
    OP_OR   = 4'd4,
    OP_XOR  = 4'd5,
    OP_SHL  = 4'd6,
    OP_SHR  = 4'd7,
    OP_MIN  = 4'd8,
    OP_MAX  = 4'd9,
    OP_PASS = 4'd10
  } alu_op_e;

  // Configuration of one compute unit.
  typedef struct packed {
    alu_op_e op;          // operation
    logic    dep_en;      // loop-carried dependency through the ILDR enabled
    logic    dep_operand; // which input (0 = OP1, 1 = OP2) is the dependent one
    tid_t    diff;        // iteration distance from producer to consumer
  } cu_cfg_t;

  // Configuration of one load/store unit.
  typedef struct packed {
    logic is_store;       // 0: load (OP1 = address), 1: store (OP1 = address, OP2 = data)
  } lsu_cfg_t;

  // Configuration bus address map (word addresses).
  localparam logic [7:0] CFG_TG_SIZE   = 8'h00; // [TID_W:0] threads in the group
  localparam logic [7:0] CFG_ROUTE_BASE = 8'h10; // +d: [15] enable, [SEL_W-1:0] source index
  localparam logic [7:0] CFG_CU_BASE   = 8'h40; // +u: [3:0] op, [4] dep_en, [5] dep_operand, [24:16] diff
  localparam logic [7:0] CFG_LSU_BASE  = 8'h60; // +l: [0] is_store

endpackage
