// tb_collision_reduce: self-checking test of the per-line collision OR.
//
// Directed cases (empty line, all clear, one colliding slot among clear ones, a
// colliding byte in an invalid slot) and random lines, each compared with the rule
// "collision if some valid slot has a non-zero state byte" evaluated in the bench.
module tb_collision_reduce;
  import morton_pkg::*;

  logic [63:0] st;
  logic [7:0]  valid;
  logic        collision;
  int checks = 0, failures = 0;

  collision_reduce dut (.st(st), .valid(valid), .collision(collision));

  task automatic apply_check(logic [63:0] s, logic [7:0] v);
    logic exp = 1'b0;
    st = s; valid = v; #1;
    for (int i = 0; i < 8; i++) if (v[i] && s[8*i +: 8] != 0) exp = 1'b1;
    checks++;
    if (collision !== exp) begin
      failures++;
      $display("FAIL st=%h valid=%b got %b expected %b", s, v, collision, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    apply_check('0, '0);
    apply_check('0, 8'hFF);
    apply_check(64'h0000_0100_0000_0000, 8'hFF);   // slot 5 collides
    apply_check(64'h0000_0100_0000_0000, 8'hDF);   // slot 5 collides but is invalid
    apply_check(64'h8000_0000_0000_0000, 8'h80);
    apply_check(64'h0000_0000_0000_0001, 8'h01);
    apply_check(64'hFFFF_FFFF_FFFF_FFFF, 8'h00);
    for (int i = 0; i < 2000; i++) begin
      logic [63:0] s = '0;
      for (int j = 0; j < 8; j++) if ($urandom_range(0, 5) == 0) s[8*j +: 8] = 8'($urandom_range(1, 255));
      apply_check(s, 8'($urandom));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
