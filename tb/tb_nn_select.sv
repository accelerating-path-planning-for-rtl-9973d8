// tb_nn_select: self-checking test of the nearest-neighbour slot selection.
//
// The expected answer is found by listing the slots in write order, newest first
// (newest, newest-1, ... wrapping), and taking the first valid slot whose state
// byte is zero; the returned address must have a zero state byte. Directed cases
// cover an empty line, a line where every node collides, a wrap past slot 0 and a
// colliding newest slot; then random lines.
module tb_nn_select;
  import morton_pkg::*;

  logic [511:0] words;
  logic [7:0]   valid;
  logic [2:0]   newest;
  logic         found;
  logic [63:0]  addr;
  int checks = 0, failures = 0;

  nn_select dut (.words(words), .valid(valid), .newest(newest), .found(found), .addr(addr));

  task automatic apply_check(logic [511:0] w, logic [7:0] v, logic [2:0] n);
    int order [8];
    logic        ef = 1'b0;
    logic [63:0] ea = '0;
    words = w; valid = v; newest = n; #1;
    for (int k = 0; k < 8; k++) order[k] = (int'(n) - k + 8) % 8;
    foreach (order[k])
      if (!ef && v[order[k]] && w[64*order[k] + 56 +: 8] == 0) begin
        ef = 1'b1;
        ea = w[64*order[k] +: 64];
      end
    checks++;
    if (found !== ef || addr !== ea) begin
      failures++;
      $display("FAIL valid=%b newest=%0d got %b/%h expected %b/%h", v, n, found, addr, ef, ea);
    end
  endtask

  function automatic logic [511:0] line_of(int collide_mask);
    logic [511:0] w;
    for (int j = 0; j < 8; j++)
      w[64*j +: 64] = {(collide_mask >> j) & 1 ? 8'($urandom_range(1, 255)) : 8'h00,
                       24'($urandom), 32'($urandom)};
    return w;
  endfunction

  initial begin
    #100000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    apply_check(line_of(0), 8'h00, 3'd3);          // empty line
    apply_check(line_of(8'hFF), 8'hFF, 3'd3);      // every node collides
    apply_check(line_of(0), 8'hFF, 3'd0);          // newest is slot 0
    apply_check(line_of(8'h01), 8'hFF, 3'd0);      // slot 0 collides: wrap to slot 7
    apply_check(line_of(8'h18), 8'h1F, 3'd4);      // slots 4,3 collide: slot 2
    apply_check(line_of(0), 8'h01, 3'd5);          // only slot 0 valid
    for (int i = 0; i < 3000; i++)
      apply_check(line_of($urandom_range(0, 255)), 8'($urandom), 3'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
