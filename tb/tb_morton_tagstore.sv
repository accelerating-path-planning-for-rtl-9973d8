// tb_morton_tagstore: self-checking test of the fully-associative tagstore and its
// oldest-referenced replacement.
//
// Runs a small store (8 lines, 8-bit tags) through random references drawn from 12
// tags, the way the Morton store uses it: look up, on a hit touch the line, on a
// miss allocate the victim. The bench keeps its own model: per line a tag, a valid
// bit and the cycle of its last reference. It checks hit, hit_idx, and that the
// victim is the lowest invalid line while any is left and afterwards the line whose
// last reference is oldest. Counts evictions so that replacement is exercised.
module tb_morton_tagstore;
  import morton_pkg::*;

  localparam int L = 8;
  localparam int TW = 8;

  logic clk = 0, rst_n = 0;
  logic [TW-1:0] lookup_tag, wr_tag;
  logic hit, touch, alloc;
  logic [2:0] hit_idx, victim_idx, touch_idx;
  int checks = 0, failures = 0, evictions = 0, hits = 0;

  morton_tagstore #(.LINES(L), .TAG_W(TW)) dut (
    .clk(clk), .rst_n(rst_n), .lookup_tag(lookup_tag), .hit(hit), .hit_idx(hit_idx),
    .victim_idx(victim_idx), .touch(touch), .touch_idx(touch_idx), .alloc(alloc), .wr_tag(wr_tag));

  always #5 clk = ~clk;

  logic [TW-1:0] m_tag  [L];
  logic          m_vld  [L];
  int            m_last [L];

  task automatic chk(string what, logic c);
    checks++;
    if (!c) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int exp_idx, exp_victim, oldest;
    logic exp_hit;
    touch = 0; alloc = 0; lookup_tag = 0; wr_tag = 0; touch_idx = 0;
    for (int i = 0; i < L; i++) begin m_vld[i] = 0; m_tag[i] = 0; m_last[i] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 1; n <= 3000; n++) begin
      @(negedge clk);
      touch = 0; alloc = 0;
      lookup_tag = TW'($urandom_range(0, 11) * 17 + 3);
      #1;
      exp_hit = 0; exp_idx = 0;
      for (int i = 0; i < L; i++) if (m_vld[i] && m_tag[i] == lookup_tag) begin exp_hit = 1; exp_idx = i; end
      exp_victim = -1;
      for (int i = L - 1; i >= 0; i--) if (!m_vld[i]) exp_victim = i;
      if (exp_victim < 0) begin
        oldest = 1 << 30;
        for (int i = 0; i < L; i++) if (m_last[i] < oldest) begin oldest = m_last[i]; exp_victim = i; end
      end
      chk("hit", hit == exp_hit);
      if (exp_hit) chk("hit_idx", hit_idx == 3'(exp_idx));
      chk("victim", victim_idx == 3'(exp_victim));
      // reference
      touch = 1;
      if (hit) begin
        hits++;
        touch_idx = hit_idx;
      end else begin
        alloc = 1; touch_idx = victim_idx; wr_tag = lookup_tag;
        if (m_vld[exp_victim]) evictions++;
      end
      if (exp_hit) m_last[exp_idx] = n;
      else begin m_vld[exp_victim] = 1; m_tag[exp_victim] = lookup_tag; m_last[exp_victim] = n; end
    end
    @(negedge clk); touch = 0; alloc = 0;
    chk("evictions happened", evictions > 100);
    chk("hits happened", hits > 100);
    $display("hits=%0d evictions=%0d", hits, evictions);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
