// tb_rrt_workload: runs the planner workloads on the Morton store, the way the CPU
// uses it, and checks the store's answers and the planner's outcome.
//
// The bench is the software side. It plans a path on a square map of edge l from
// (0,0) to (l,l) over T time steps, among N round obstacles that move in straight
// lines from random start to random end positions. It follows the memoized RRT loop:
//   1. draw a random point (x, y, t), the goal with 10 % probability;
//   2. morton_nn; on a miss, or a node that is not earlier in time, search all
//      nodes exhaustively (the baseline nearest-neighbour search);
//   3. steer one step of STEP map units towards the point, one time step later;
//   4. morton_col; unless it answers NO_COLLISION, run the exact collision test;
//   5. morton_update with the new node's address, the state in its top byte;
//   6. add the node to the tree if its state is NO_COLLISION.
// On reaching the goal, every segment of the path is checked exactly. An unsafe
// path (possible, since a memoized "no collision" is approximate) is counted and
// planning continues.
//
// Checks: every response arrives 2 cycles after its request; every morton_nn and
// morton_col answer equals the answer worked out from the bench's own record of
// the last 8 updates per tag; a returned node is in the tree and in the query's
// cell; each run reaches the goal with a path that passes the exact check and
// goes forward in time. Each run uses fewer than 512 tags, so no line is evicted
// and the bench's record stays exact. The bench fails any mechanism that never
// happened: nn hit, nn fallback, collision check skipped, collision fallback.
//
// Sizes: the 12 synthetic configurations (edge 100 or 200, 10 or 100 time steps,
// 5, 10 or 20 obstacles) and the 5-obstacle, edge-100, 20-step example; one random
// case each. Obstacle radius (l/10), step length (2l/T), goal tolerance and the
// integer map units are this bench's own choices.
module tb_rrt_workload;
  import morton_pkg::*;

  logic clk = 0, rst_n = 0;
  logic req_valid = 0, req_ready, resp_valid;
  morton_req_t  req;
  morton_resp_t resp;

  morton_store dut (.clk(clk), .rst_n(rst_n), .req_valid(req_valid), .req_ready(req_ready),
                    .req(req), .resp_valid(resp_valid), .resp(resp));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_evict = 0, n_nn_hit = 0, n_nn_fallback = 0, n_col_skip = 0, n_col_fallback = 0, n_unsafe = 0;

  task automatic chk(string what, logic c);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL %s at %0t", what, $time); end
  endtask

  // One instruction, blocking like the CPU; checks the 2-cycle latency.
  task automatic store_op(morton_op_e op, int x, int y, int t, logic [63:0] addr,
                          output logic [63:0] data);
    int lat = 0;
    @(negedge clk);
    req.op = op; req.xy = {32'(x), 32'(y)}; req.t = 32'(t); req.addr = addr;
    req_valid = 1;
    @(posedge clk);
    while (!req_ready) @(posedge clk);
    @(negedge clk);
    req_valid = 0;
    forever begin
      @(posedge clk);
      lat++;
      if (resp_valid) break;
    end
    chk("latency 2 cycles", lat == LATENCY);
    data = resp.data;
  endtask

  // ---------------- tree, obstacles ----------------
  localparam int MAXN = 12000;
  localparam logic [63:0] BASE = 64'h0000_7ffd_0000_0000;   // node i lives at BASE + 16 i
  real nx [MAXN], ny [MAXN];
  int  nt [MAXN], npar [MAXN];
  bit  dead [MAXN];   // on a segment that failed the exact path check
  int  nnodes;
  real ox0 [20], oy0 [20], ox1 [20], oy1 [20];
  int  nobs, T;
  real L, R, STEP;

  // Fixed-point coordinates handed to the store: 8 steps per map unit and 8 per
  // time step, so one masked-Morton cell is 8 x 8 map units by 8 time steps.
  localparam int XY_SCALE = 8;
  localparam int T_SCALE  = 8;
  function automatic int ix(real v); return int'($floor(v * XY_SCALE)); endfunction
  function automatic int it(int t); return t * T_SCALE; endfunction

  function automatic logic [45:0] tag_of(int x, int y, int t);
    logic [45:0] r = '0;
    logic [31:0] xx = 32'(x), yy = 32'(y), tt = 32'(t);
    for (int i = 0; i < 15; i++) begin
      r[3*i] = xx[6+i]; r[3*i+1] = yy[6+i]; r[3*i+2] = tt[6+i];
    end
    return r;
  endfunction

  function automatic bit point_collides(real x, real y, int t);
    for (int o = 0; o < nobs; o++) begin
      real f = real'(t) / real'(T);
      real cx = ox0[o] + (ox1[o] - ox0[o]) * f;
      real cy = oy0[o] + (oy1[o] - oy0[o]) * f;
      if ((x - cx) * (x - cx) + (y - cy) * (y - cy) < R * R) return 1;
    end
    return 0;
  endfunction

  // exact test of a segment from node a to point (x, y, t): samples along the way
  function automatic bit segment_collides(int a, real x, real y, int t);
    for (int s = 0; s <= 8; s++) begin
      real f = real'(s) / 8.0;
      if (point_collides(nx[a] + (x - nx[a]) * f, ny[a] + (y - ny[a]) * f,
                         (f < 0.5) ? nt[a] : t)) return 1;
    end
    return 0;
  endfunction

  // ---------------- the bench's record of what it stored, per tag ----------------
  logic [63:0] rec [logic [45:0]][$];
  longint      last_ref [logic [45:0]];
  longint      now = 0;

  // A hit of any instruction is a reference; a miss of morton_col / morton_nn
  // changes nothing; a morton_update miss evicts the tag referenced longest ago
  // once DEF_LINES tags are held.
  task automatic rec_touch(logic [45:0] tg);
    now++;
    if (rec.exists(tg)) last_ref[tg] = now;
  endtask

  task automatic rec_update(logic [45:0] tg, logic [63:0] a);
    now++;
    if (!rec.exists(tg)) begin
      if (rec.num() == DEF_LINES) begin
        logic [45:0] vt; longint oldest = 64'h7fff_ffff_ffff_ffff;
        foreach (last_ref[k]) if (last_ref[k] < oldest) begin oldest = last_ref[k]; vt = k; end
        rec.delete(vt); last_ref.delete(vt);
        n_evict++;
      end
    end
    rec[tg].push_back(a);
    if (rec[tg].size() > DEF_SLOTS) void'(rec[tg].pop_front());
    last_ref[tg] = now;
  endtask

  function automatic logic [63:0] exp_col(logic [45:0] tg);
    if (!rec.exists(tg)) return 64'(ST_MISS);
    foreach (rec[tg][i]) if (rec[tg][i][63:56] != 0) return 64'(ST_COLLISION);
    return 64'(ST_NO_COLLISION);
  endfunction

  function automatic logic [63:0] exp_nn(logic [45:0] tg);
    if (!rec.exists(tg)) return 0;
    for (int i = rec[tg].size() - 1; i >= 0; i--) if (rec[tg][i][63:56] == 0) return rec[tg][i];
    return 0;
  endfunction

  // ---------------- one planning run ----------------
  task automatic run_config(int map_edge, int steps, int obstacles);
    int iters = 0, goal = -1;
    int rx, ry, rt, near, tn;
    real best, d, sx, sy, dx, dy;
    logic [63:0] data, a;
    logic [45:0] tg;
    bit st;
    L = real'(map_edge); T = steps; nobs = obstacles;
    R = L / 10.0; STEP = 2.0 * L / real'(T);
    if (STEP < 2.0) STEP = 2.0;
    rec.delete(); last_ref.delete();
    // reset the store: each run starts empty
    rst_n = 0; repeat (2) @(posedge clk); @(negedge clk); rst_n = 1;
    for (int o = 0; o < nobs; o++) begin
      ox0[o] = 0.2 * L + 0.6 * L * $urandom_range(0, 1000) / 1000.0;
      oy0[o] = 0.2 * L + 0.6 * L * $urandom_range(0, 1000) / 1000.0;
      ox1[o] = 0.2 * L + 0.6 * L * $urandom_range(0, 1000) / 1000.0;
      oy1[o] = 0.2 * L + 0.6 * L * $urandom_range(0, 1000) / 1000.0;
    end
    nx[0] = 0; ny[0] = 0; nt[0] = 0; npar[0] = -1; dead[0] = 0; nnodes = 1;
    while (goal < 0 && iters < 30000 && nnodes < MAXN) begin
      iters++;
      if ($urandom_range(0, 9) == 0) begin rx = map_edge; ry = map_edge; rt = T; end
      else begin rx = $urandom_range(0, map_edge); ry = $urandom_range(0, map_edge); rt = $urandom_range(1, T); end
      // nearest neighbour: Morton store first
      tg = tag_of(ix(rx), ix(ry), it(rt));
      store_op(OP_NN, ix(rx), ix(ry), it(rt), 0, data);
      chk("nn answer", data == exp_nn(tg));
      rec_touch(tg);
      near = -1;
      if (data != 0) begin
        tn = int'((data - BASE) >> 4);
        chk("nn node in tree", tn >= 0 && tn < nnodes);
        chk("nn node in query cell", tag_of(ix(nx[tn]), ix(ny[tn]), it(nt[tn])) == tg);
        if (nt[tn] < rt && !dead[tn]) begin near = tn; n_nn_hit++; end
      end
      if (near < 0) begin
        n_nn_fallback++;
        best = 1.0e30;
        for (int i = 0; i < nnodes; i++) if (nt[i] < rt && !dead[i]) begin
          d = (nx[i] - rx) * (nx[i] - rx) + (ny[i] - ry) * (ny[i] - ry);
          if (d < best) begin best = d; near = i; end
        end
      end
      if (near < 0 || nt[near] >= T) continue;
      // steer
      dx = rx - nx[near]; dy = ry - ny[near];
      d = $sqrt(dx * dx + dy * dy);
      if (d > STEP) begin sx = nx[near] + dx * STEP / d; sy = ny[near] + dy * STEP / d; end
      else begin sx = rx; sy = ry; end
      if (sx < 0) sx = 0; if (sy < 0) sy = 0;
      // collision: Morton store first
      tg = tag_of(ix(sx), ix(sy), it(nt[near] + 1));
      store_op(OP_COL, ix(sx), ix(sy), it(nt[near] + 1), 0, data);
      chk("col answer", data == exp_col(tg));
      rec_touch(tg);
      if (data == 64'(ST_NO_COLLISION)) begin st = 0; n_col_skip++; end
      else begin st = segment_collides(near, sx, sy, nt[near] + 1); n_col_fallback++; end
      // memoize
      a = BASE + 64'(nnodes) * 16;
      a[63:56] = st ? 8'h01 : 8'h00;
      store_op(OP_UPDATE, ix(sx), ix(sy), it(nt[near] + 1), a, data);
      rec_update(tg, a);
      if (!st) begin
        nx[nnodes] = sx; ny[nnodes] = sy; nt[nnodes] = nt[near] + 1; npar[nnodes] = near;
        dead[nnodes] = 0;
        if ((L - sx) * (L - sx) + (L - sy) * (L - sy) <= STEP * STEP) begin
          // candidate solution: exact check of each segment
          // a failing segment retires its end node and the subtree below it,
          // and the exact result is memoized
          bit safe = 1;
          for (int v = nnodes; npar[v] >= 0; v = npar[v])
            if (segment_collides(npar[v], nx[v], ny[v], nt[v])) begin
              safe = 0;
              dead[v] = 1;
              a = BASE + 64'(v) * 16;
              a[63:56] = 8'h01;
              tg = tag_of(ix(nx[v]), ix(ny[v]), it(nt[v]));
              store_op(OP_UPDATE, ix(nx[v]), ix(ny[v]), it(nt[v]), a, data);
              rec_update(tg, a);
            end
          if (safe) goal = nnodes;
          else begin
            n_unsafe++;
            // parents have lower indices: one forward pass retires whole subtrees
            for (int i = 1; i <= nnodes; i++) if (dead[npar[i]]) dead[i] = 1;
          end
        end
        nnodes++;
      end
    end
    chk("goal reached", goal >= 0);
    if (goal >= 0) begin
      real len = 0; int hops = 0;
      for (int v = goal; npar[v] >= 0; v = npar[v]) begin
        chk("time goes forward", nt[npar[v]] < nt[v]);
        len += $sqrt((nx[v] - nx[npar[v]]) ** 2 + (ny[v] - ny[npar[v]]) ** 2);
        hops++;
      end
      $display("edge=%0d steps=%0d obstacles=%0d: %0d iterations, %0d nodes, path %0d hops, length %0.1f",
               map_edge, steps, obstacles, iters, nnodes, hops, len);
    end else
      $display("edge=%0d steps=%0d obstacles=%0d: no path in %0d iterations", map_edge, steps, obstacles, iters);
  endtask

  initial begin
    #400ms;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    req = '0;
    run_config(100, 20, 5);      // the example map of 5 obstacles, edge 100, 20 steps
    foreach (int_edges[e]) foreach (int_steps[s]) foreach (int_obs[o])
      run_config(int_edges[e], int_steps[s], int_obs[o]);
    $display("evictions=%0d", n_evict);
    $display("nn_hit=%0d nn_fallback=%0d col_skip=%0d col_fallback=%0d unsafe_paths=%0d",
             n_nn_hit, n_nn_fallback, n_col_skip, n_col_fallback, n_unsafe);
    chk("nn hit seen", n_nn_hit > 0);
    chk("nn fallback seen", n_nn_fallback > 0);
    chk("collision check skipped", n_col_skip > 0);
    chk("collision fallback seen", n_col_fallback > 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int int_edges [2] = '{100, 200};
  int int_steps [2] = '{10, 100};
  int int_obs   [3] = '{5, 10, 20};
endmodule
