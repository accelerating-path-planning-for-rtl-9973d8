// morton_pkg: types and constants shared by the Morton store blocks.
//
// The Morton store is a small fully-associative content-addressable memory that
// memoizes recent results of nearest-neighbour search and collision detection for a
// sampling-based path planner (RRT over (x, y, t)). Each line is tagged by the masked
// Morton code of a point and holds eight 8-byte slots; each slot is a node address
// whose top 8 bits carry that node's collision state.
//
// Numbers that follow the paper: 32-bit coordinates, 64-bit Morton codes, k = 18
// masked low bits, 32 KB of line storage, 64-byte lines (8 x 8-byte slots), a 2-cycle
// access latency, collision state in the 8 most significant address bits.
// This design's own choices: the opcode and result encodings below, 21 bits of each
// coordinate interleaved (the usual 3-D 64-bit Morton layout, x at bit 0, y at bit 1,
// t at bit 2), and "non-zero state byte = collision".
package morton_pkg;

  localparam int unsigned COORD_W   = 32;             // width of x, y and t
  localparam int unsigned MORTON_W  = 64;             // width of a Morton code
  localparam int unsigned DEF_BITS_PER_DIM = 21;          // coordinate bits interleaved (3 x 21 = 63)
  localparam int unsigned DEF_K_MASK    = 18;             // masked low Morton bits
  localparam int unsigned WORD_W    = 64;             // one slot: 8-byte node address
  localparam int unsigned ST_W      = 8;              // state field = top 8 bits of a slot
  localparam int unsigned DEF_SLOTS     = 8;              // slots per 64-byte line
  localparam int unsigned LINE_BYTES = 64;
  localparam int unsigned STORE_BYTES = 32 * 1024;    // 32 KB of line storage
  localparam int unsigned DEF_LINES     = STORE_BYTES / LINE_BYTES;  // 512
  localparam int unsigned LATENCY   = 2;              // cycles from request to response

  // The three instructions of the ISA extension.
  typedef enum logic [1:0] {
    OP_UPDATE = 2'd0,   // morton_update <x|y>, <t>, <addr>
    OP_COL    = 2'd1,   // morton_col    <x|y>, <t>, <st>
    OP_NN     = 2'd2    // morton_nn     <x|y>, <t>, <addr>
  } morton_op_e;

  // Value written to the destination register by morton_col.
  typedef enum logic [1:0] {
    ST_NO_COLLISION = 2'd0,
    ST_COLLISION    = 2'd1,
    ST_MISS         = 2'd2
  } col_state_e;

  // Request on the CPU-to-store port: the instruction's two source registers
  // (<x|y> packs x in the upper and y in the lower 32 bits) and, for
  // morton_update, the node address whose top 8 bits hold its collision state.
  typedef struct packed {
    morton_op_e         op;
    logic [2*COORD_W-1:0] xy;
    logic [COORD_W-1:0] t;
    logic [WORD_W-1:0]  addr;
  } morton_req_t;

  // Response: the destination register value and whether the tag matched.
  typedef struct packed {
    morton_op_e        op;
    logic              hit;
    logic [WORD_W-1:0] data;   // morton_col: col_state_e, zero-extended; morton_nn: node address (0 on miss)
  } morton_resp_t;

endpackage
