// morton_store: hardware Morton store, a content-addressable memo of recent
// nearest-neighbour and collision-detection results for a sampling-based planner.
//
// The CPU reaches it through a private port with three instructions:
//   morton_update <x|y>,<t>,<addr>  record node addr (its state in addr[63:56]) under
//                                   the tag of (x,y,t); allocate a line on a miss.
//   morton_col    <x|y>,<t>,<st>    st = NO_COLLISION / COLLISION from the tag's line,
//                                   or MISS; collision if any slot of the line says so.
//   morton_nn     <x|y>,<t>,<addr>  addr = a collision-free node of the tag's line
//                                   (an approximate nearest neighbour), 0 if none.
// The tag is the Morton code of (x,y,t) with its K_MASK low bits cleared
// (morton_encoder). A tagstore of LINES lines with one comparator each
// (morton_tagstore) finds the line; a line array (morton_line_array) holds SLOTS
// node addresses per line; collision_reduce and nn_select form the two results.
// A read miss changes nothing. A write miss evicts the line referenced longest ago.
//
// Timing: request handshake req_valid/req_ready. A request accepted in cycle c
// is encoded and its tag compared in cycle c. The line is read, the result formed
// and any write done in cycle c+1. resp_valid is high for one cycle, in cycle c+2
// (LATENCY = 2). One request is in flight at a time: req_ready is low in cycle c+1
// and high again in c+2, so a blocking CPU can issue its next instruction in the
// cycle it receives a result, and that instruction sees the previous write.
// Reset: synchronous, active low; the store starts empty.
//
// From the paper: the three instructions and their operands, 64-bit Morton tags masked
// by k = 18 bits, a fully-associative store of 32 KB with 64-byte lines holding eight
// 8-byte addresses, state in the top 8 address bits, the OR rule for collision, the
// read-miss and write-miss behaviour, the 2-cycle latency. This design's own choices:
// the port handshake, <x|y> as x in bits 63:32 and y in 31:0, the result
// encodings, the slot fill order and the NN selection rule.
module morton_store
  import morton_pkg::*;
#(
  parameter int unsigned LINES  = morton_pkg::DEF_LINES,
  parameter int unsigned SLOTS  = morton_pkg::DEF_SLOTS,
  parameter int unsigned K_MASK = morton_pkg::DEF_K_MASK,
  localparam int unsigned TAG_W = MORTON_W - K_MASK,
  localparam int unsigned IW    = (LINES > 1) ? $clog2(LINES) : 1,
  localparam int unsigned SW    = (SLOTS > 1) ? $clog2(SLOTS) : 1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         req_valid,
  output logic         req_ready,
  input  morton_req_t  req,
  output logic         resp_valid,
  output morton_resp_t resp
);

  // ---------------- cycle c: encode and compare ----------------
  logic [MORTON_W-1:0] code, tag;
  logic                ts_hit;
  logic [IW-1:0]       ts_hit_idx, ts_victim_idx;

  morton_encoder #(.K_MASK(K_MASK)) u_enc (
    .x    (req.xy[2*COORD_W-1:COORD_W]),
    .y    (req.xy[COORD_W-1:0]),
    .t    (req.t),
    .code (code),
    .tag  (tag)
  );

  // Stage register between the compare and the line access.
  logic             s1_valid;
  morton_op_e       s1_op;
  logic             s1_hit;
  logic [IW-1:0]    s1_idx;      // hit line, or victim line on a miss
  logic [TAG_W-1:0] s1_tag;
  logic [WORD_W-1:0] s1_addr;

  logic accept;
  assign req_ready = !s1_valid;
  assign accept    = req_valid && req_ready;

  // ---------------- cycle c+1: line access, result, write ----------------
  logic [SLOTS*WORD_W-1:0] line;
  logic [SLOTS-1:0]        line_valid;
  logic [SW-1:0]           line_newest;
  logic [SLOTS*ST_W-1:0]   line_st;
  logic                    line_col;
  logic                    nn_found;
  logic [WORD_W-1:0]       nn_addr;

  logic is_update;
  logic touch, alloc;
  assign is_update = s1_valid && (s1_op == OP_UPDATE);
  // Hits are references for every instruction; only an update allocates on a miss.
  assign touch = s1_valid && (s1_hit || s1_op == OP_UPDATE);
  assign alloc = is_update && !s1_hit;

  morton_tagstore #(.LINES(LINES), .TAG_W(TAG_W)) u_tags (
    .clk        (clk),
    .rst_n      (rst_n),
    .lookup_tag (tag[MORTON_W-1:K_MASK]),
    .hit        (ts_hit),
    .hit_idx    (ts_hit_idx),
    .victim_idx (ts_victim_idx),
    .touch      (touch),
    .touch_idx  (s1_idx),
    .alloc      (alloc),
    .wr_tag     (s1_tag)
  );

  morton_line_array #(.LINES(LINES), .SLOTS(SLOTS)) u_lines (
    .clk       (clk),
    .rst_n     (rst_n),
    .rd_idx    (s1_idx),
    .rd_line   (line),
    .rd_valid  (line_valid),
    .rd_newest (line_newest),
    .wr_en     (is_update),
    .wr_new    (!s1_hit),
    .wr_idx    (s1_idx),
    .wr_word   (s1_addr)
  );

  always_comb begin
    for (int unsigned i = 0; i < SLOTS; i++)
      line_st[i*ST_W +: ST_W] = line[i*WORD_W + WORD_W - ST_W +: ST_W];
  end

  collision_reduce #(.SLOTS(SLOTS)) u_col (
    .st        (line_st),
    .valid     (line_valid),
    .collision (line_col)
  );

  nn_select #(.SLOTS(SLOTS)) u_nn (
    .words  (line),
    .valid  (line_valid),
    .newest (line_newest),
    .found  (nn_found),
    .addr   (nn_addr)
  );

  morton_resp_t resp_d;
  col_state_e   col_st;
  always_comb begin
    if (!s1_hit)       col_st = ST_MISS;
    else if (line_col) col_st = ST_COLLISION;
    else               col_st = ST_NO_COLLISION;

    resp_d      = '0;
    resp_d.op   = s1_op;
    resp_d.hit  = s1_hit;
    unique case (s1_op)
      OP_COL:  resp_d.data = WORD_W'(col_st);
      OP_NN:   resp_d.data = (s1_hit && nn_found) ? nn_addr : '0;
      default: resp_d.data = '0;
    endcase
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      s1_valid   <= 1'b0;
      resp_valid <= 1'b0;
    end else begin
      s1_valid   <= accept;
      resp_valid <= s1_valid;
    end
  end

  always_ff @(posedge clk) begin
    if (accept) begin
      s1_op   <= req.op;
      s1_hit  <= ts_hit;
      s1_idx  <= ts_hit ? ts_hit_idx : ts_victim_idx;
      s1_tag  <= tag[MORTON_W-1:K_MASK];
      s1_addr <= req.addr;
    end
    if (s1_valid) resp <= resp_d;
  end

  // ---------------- port rules ----------------
  // The CPU issues only the three defined instructions.
  assert property (@(posedge clk) disable iff (!rst_n)
                   req_valid |-> req.op inside {OP_UPDATE, OP_COL, OP_NN})
    else $error("morton_store: undefined opcode");
  // A request not yet accepted stays on the port unchanged.
  assert property (@(posedge clk) disable iff (!rst_n)
                   req_valid && !req_ready |=> req_valid && $stable(req))
    else $error("morton_store: request dropped or changed before acceptance");
  // The result arrives exactly LATENCY cycles after acceptance.
  assert property (@(posedge clk) disable iff (!rst_n)
                   accept |-> ##(LATENCY) resp_valid)
    else $error("morton_store: response not LATENCY cycles after request");

endmodule
