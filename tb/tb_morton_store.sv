// tb_morton_store: end-to-end, self-checking test of the Morton store at its full
// default size (512 lines of 8 slots, k = 18).
//
// A driver plays the CPU: it keeps issuing morton_update / morton_col / morton_nn
// requests back to back through the valid/ready port. A reference model in the bench
// keeps the store's content by tag: up to 512 lines, each with the cycle of its last
// reference, eight slots with valid bits and a fill count. Every response is compared
// with the model's answer, and must arrive exactly 2 cycles after its request was
// accepted.
//
// Phases: (1) a few hand-made requests with known answers; (2) random traffic over
// 96 cells (mostly hits, lines overfilled past 8 slots); (3) random traffic over 3000
// cells (the store fills and lines are evicted); (4) a directed oldest-referenced
// eviction check. The bench counts each mechanism and fails any that never occurred:
// stall of the port, update hit, update miss into a free line, update miss with
// eviction, slot overwrite in a full line, col no-collision, col collision, col
// miss, nn found, nn hit with no collision-free node, nn miss.
module tb_morton_store;
  import morton_pkg::*;

  localparam int L = DEF_LINES;
  localparam int S = DEF_SLOTS;

  logic clk = 0, rst_n = 0;
  logic req_valid, req_ready, resp_valid;
  morton_req_t  req;
  morton_resp_t resp;

  morton_store dut (.clk(clk), .rst_n(rst_n), .req_valid(req_valid), .req_ready(req_ready),
                    .req(req), .resp_valid(resp_valid), .resp(resp));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  // ---------------- reference model, keyed by tag ----------------
  typedef struct {
    logic        v;
    logic [45:0] tag;
    int          last;
    logic [63:0] w [S];
    logic [S-1:0] sv;
    int          cnt;
  } mline_t;
  mline_t m [L];
  int ref_time = 0;

  // mechanism counters
  int n_stall = 0, n_upd_hit = 0, n_upd_free = 0, n_upd_evict = 0, n_slot_over = 0;
  int n_col_nc = 0, n_col_c = 0, n_col_miss = 0, n_nn_found = 0, n_nn_none = 0, n_nn_miss = 0;

  // Tag of (x,y,t) worked out independently: bits 18..62 of the interleaved code are
  // bits 6..20 of the coordinates, so the tag equals the interleave of (x>>6, y>>6, t>>6).
  function automatic logic [45:0] tag_of(logic [31:0] x, logic [31:0] y, logic [31:0] t);
    logic [45:0] r = '0;
    for (int i = 0; i < 15; i++) begin
      r[3*i]   = x[6+i];
      r[3*i+1] = y[6+i];
      r[3*i+2] = t[6+i];
    end
    return r;
  endfunction

  function automatic int find(logic [45:0] tg);
    for (int i = 0; i < L; i++) if (m[i].v && m[i].tag == tg) return i;
    return -1;
  endfunction

  // Apply one request to the model; return the expected response data and hit.
  function automatic void model(morton_req_t r, output logic ehit, output logic [63:0] edata);
    logic [45:0] tg = tag_of(r.xy[63:32], r.xy[31:0], r.t);
    int li = find(tg);
    int s, k, oldest;
    ref_time++;
    ehit = (li >= 0);
    edata = '0;
    case (r.op)
      OP_UPDATE: begin
        if (li >= 0) begin
          n_upd_hit++;
          s = m[li].cnt % S;
          if (m[li].cnt >= S) n_slot_over++;
        end else begin
          li = -1;
          for (int i = 0; i < L; i++) if (!m[i].v) begin li = i; break; end
          if (li >= 0) n_upd_free++;
          else begin
            n_upd_evict++;
            oldest = 1 << 30;
            for (int i = 0; i < L; i++) if (m[i].last < oldest) begin oldest = m[i].last; li = i; end
          end
          m[li].v = 1; m[li].tag = tg; m[li].sv = '0; m[li].cnt = 0;
          s = 0;
        end
        m[li].w[s] = r.addr; m[li].sv[s] = 1; m[li].cnt++; m[li].last = ref_time;
      end
      OP_COL: begin
        if (li < 0) begin edata = 64'(ST_MISS); n_col_miss++; end
        else begin
          logic c = 0;
          for (int j = 0; j < S; j++) if (m[li].sv[j] && m[li].w[j][63:56] != 0) c = 1;
          edata = c ? 64'(ST_COLLISION) : 64'(ST_NO_COLLISION);
          if (c) n_col_c++; else n_col_nc++;
          m[li].last = ref_time;
        end
      end
      default: begin // OP_NN
        if (li < 0) n_nn_miss++;
        else begin
          // newest first: slot of write number cnt-1, cnt-2, ...
          for (k = 1; k <= S; k++) begin
            s = ((m[li].cnt - k) % S + S) % S;
            if (m[li].sv[s] && m[li].w[s][63:56] == 0) begin edata = {8'h00, m[li].w[s][55:0]}; break; end
          end
          if (edata != 0) n_nn_found++; else n_nn_none++;
          m[li].last = ref_time;
        end
      end
    endcase
  endfunction

  // ---------------- driver and checker ----------------
  morton_req_t q_req [$];
  logic        q_hit [$];
  logic [63:0] q_data [$];
  int          q_acc [$];

  task automatic chk(string what, logic c);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL %s at cycle %0d", what, cycle); end
  endtask

  // Issue one request and wait until it is accepted (the store model runs at
  // acceptance). req_valid stays high, so the next call presents its request right
  // after this acceptance and meets the store busy: back-to-back traffic.
  task automatic issue(morton_req_t r);
    logic eh; logic [63:0] ed;
    req_valid = 1; req = r;
    forever begin
      @(posedge clk);
      if (req_ready) break;
      n_stall++;
    end
    model(r, eh, ed);
    q_req.push_back(r); q_hit.push_back(eh); q_data.push_back(ed); q_acc.push_back(cycle);
    #1;
  endtask

  task automatic idle();
    req_valid = 0;
    repeat (4) @(posedge clk);
    #1;
  endtask

  always @(posedge clk) if (rst_n && resp_valid) begin
    if (q_req.size() == 0) chk("response without request", 0);
    else begin
      morton_req_t r;
      logic        eh;
      logic [63:0] ed;
      int          acc;
      r = q_req.pop_front(); eh = q_hit.pop_front(); ed = q_data.pop_front(); acc = q_acc.pop_front();
      chk("latency is 2 cycles", cycle - acc == LATENCY);
      chk("op echoed", resp.op == r.op);
      chk("hit", resp.hit == eh);
      if (r.op != OP_UPDATE) chk("data", resp.data == ed);
      if (resp.data != ed && failures < 20) $display("  op=%s got %h expected %h", r.op.name(), resp.data, ed);
    end
  end

  function automatic morton_req_t mk(morton_op_e op, int cx, int cy, int ct, logic [63:0] a);
    morton_req_t r;
    logic [31:0] x = 32'(cx * 64 + $urandom_range(0, 63));
    logic [31:0] y = 32'(cy * 64 + $urandom_range(0, 63));
    logic [31:0] t = 32'(ct * 64 + $urandom_range(0, 63));
    r.op = op; r.xy = {x, y}; r.t = t; r.addr = a;
    return r;
  endfunction

  function automatic logic [63:0] rand_addr(bit collide);
    logic [7:0] st = collide ? 8'($urandom_range(1, 255)) : 8'h00;
    return {st, 24'($urandom_range(1, 1 << 20)), 32'($urandom) | 32'h8};
  endfunction

  task automatic random_phase(int n, int cells);
    for (int i = 0; i < n; i++) begin
      int c = $urandom_range(0, cells - 1);
      int op = $urandom_range(0, 2);
      morton_req_t r = mk(morton_op_e'(op), c % 16, (c / 16) % 16, c / 256,
                          rand_addr($urandom_range(0, 3) == 0));
      issue(r);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    req_valid = 0; req = '0;
    for (int i = 0; i < L; i++) begin m[i].v = 0; m[i].last = 0; m[i].cnt = 0; m[i].sv = '0; end
    repeat (3) @(posedge clk);
    #1 rst_n = 1;

    // (1) directed: a miss, an update, then lookups of another point in the same cell
    issue(mk(OP_COL, 1, 2, 3, 0));                       // miss -> ST_MISS
    issue(mk(OP_NN, 1, 2, 3, 0));                        // miss -> 0
    issue(mk(OP_UPDATE, 1, 2, 3, 64'h0000_0000_7fff_1000));
    issue(mk(OP_NN, 1, 2, 3, 0));                        // -> 0x7fff1000
    issue(mk(OP_COL, 1, 2, 3, 0));                       // -> NO_COLLISION
    issue(mk(OP_UPDATE, 1, 2, 3, 64'h0100_0000_7fff_2000));
    issue(mk(OP_COL, 1, 2, 3, 0));                       // -> COLLISION
    issue(mk(OP_NN, 1, 2, 3, 0));                        // -> still 0x7fff1000
    issue(mk(OP_COL, 1, 2, 4, 0));                       // next cell in t -> MISS
    idle();
    chk("directed answers compared", checks > 20);

    // (2) small working set: hits and overfilled lines
    random_phase(6000, 96);
    // (3) large working set: capacity misses and evictions
    random_phase(8000, 3000);

    // (4) directed eviction: fill 512 fresh lines, re-reference the first, add one more.
    for (int i = 0; i < L; i++) issue(mk(OP_UPDATE, i % 16, (i / 16) % 16, 100 + i / 256, rand_addr(0)));
    issue(mk(OP_COL, 0, 0, 100, 0));                     // touch line 0 (hit)
    issue(mk(OP_UPDATE, 5, 5, 300, rand_addr(0)));        // evicts line 1, the oldest
    issue(mk(OP_COL, 0, 0, 100, 0));                     // still a hit
    issue(mk(OP_COL, 1, 0, 100, 0));                     // evicted: miss
    idle();
    chk("all responses received", q_req.size() == 0);

    $display("stall=%0d upd_hit=%0d upd_free=%0d upd_evict=%0d slot_overwrite=%0d",
             n_stall, n_upd_hit, n_upd_free, n_upd_evict, n_slot_over);
    $display("col_nocollision=%0d col_collision=%0d col_miss=%0d nn_found=%0d nn_none=%0d nn_miss=%0d",
             n_col_nc, n_col_c, n_col_miss, n_nn_found, n_nn_none, n_nn_miss);
    chk("stall seen", n_stall > 0);
    chk("update hit seen", n_upd_hit > 0);
    chk("update into free line seen", n_upd_free > 0);
    chk("eviction seen", n_upd_evict > 0);
    chk("slot overwrite seen", n_slot_over > 0);
    chk("col no-collision seen", n_col_nc > 0);
    chk("col collision seen", n_col_c > 0);
    chk("col miss seen", n_col_miss > 0);
    chk("nn found seen", n_nn_found > 0);
    chk("nn hit without free node seen", n_nn_none > 0);
    chk("nn miss seen", n_nn_miss > 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
