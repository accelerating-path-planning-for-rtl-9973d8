// tb_morton_line_array: self-checking test of the line data array.
//
// A 4-line array is written at random, sometimes as a fresh allocation (wr_new) and
// sometimes as an append, and after every write the whole line is read back and
// compared with a model kept in the bench: a fresh allocation leaves only slot 0
// valid; an append writes the slot after the last written one, wrapping after slot
// 7; rd_newest names the slot written last. Counts wraps so that overwriting of a
// full line is exercised.
module tb_morton_line_array;
  import morton_pkg::*;

  localparam int L = 4;

  logic clk = 0, rst_n = 0;
  logic [1:0]   rd_idx, wr_idx;
  logic [511:0] rd_line;
  logic [7:0]   rd_valid;
  logic [2:0]   rd_newest;
  logic         wr_en, wr_new;
  logic [63:0]  wr_word;
  int checks = 0, failures = 0, wraps = 0;

  morton_line_array #(.LINES(L)) dut (
    .clk(clk), .rst_n(rst_n), .rd_idx(rd_idx), .rd_line(rd_line), .rd_valid(rd_valid),
    .rd_newest(rd_newest), .wr_en(wr_en), .wr_new(wr_new), .wr_idx(wr_idx), .wr_word(wr_word));

  always #5 clk = ~clk;

  logic [63:0] m_w   [L][8];
  logic [7:0]  m_v   [L];
  int          m_cnt [L];   // writes since the line was allocated

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
    int l, s;
    wr_en = 0; wr_new = 0; wr_idx = 0; rd_idx = 0; wr_word = 0;
    for (int i = 0; i < L; i++) begin m_v[i] = 0; m_cnt[i] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int i = 0; i < L; i++) begin rd_idx = 2'(i); #1; chk("empty after reset", rd_valid == 0); end
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      l = $urandom_range(0, L - 1);
      wr_en = 1; wr_idx = 2'(l);
      wr_new = (m_v[l] == 0) || ($urandom_range(0, 15) == 0);
      wr_word = {$urandom, $urandom};
      if (wr_new) begin m_v[l] = 0; m_cnt[l] = 0; end
      s = m_cnt[l] % 8;
      if (m_cnt[l] >= 8) wraps++;
      m_w[l][s] = wr_word; m_v[l][s] = 1'b1; m_cnt[l]++;
      @(negedge clk);
      wr_en = 0; rd_idx = 2'(l); #1;
      chk("valid", rd_valid == m_v[l]);
      chk("newest", rd_newest == 3'(s));
      for (int j = 0; j < 8; j++) if (m_v[l][j]) chk("data", rd_line[64*j +: 64] == m_w[l][j]);
    end
    chk("wraps happened", wraps > 50);
    $display("wraps=%0d", wraps);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
