// tb_morton_encoder: self-checking test of the Morton encoder and tag mask.
//
// Checks hand-worked codes (single bits of x, y, t land at bits 0, 1, 2; all-ones
// coordinates give 63 ones), then random points against a reference that builds the
// code one output bit at a time (bit j comes from coordinate j mod 3, bit j / 3),
// and that the tag is the code with its 18 low bits cleared, so that points of one
// 64 x 64 x 64 cell share a tag and neighbouring cells do not.
module tb_morton_encoder;
  import morton_pkg::*;

  logic [31:0] x, y, t;
  logic [63:0] code, tag;
  int checks = 0, failures = 0;

  morton_encoder dut (.x(x), .y(y), .t(t), .code(code), .tag(tag));

  function automatic logic [63:0] ref_code(logic [31:0] rx, logic [31:0] ry, logic [31:0] rt);
    logic [63:0] c = '0;
    for (int j = 0; j < 63; j++)
      case (j % 3)
        0: c[j] = rx[j/3];
        1: c[j] = ry[j/3];
        default: c[j] = rt[j/3];
      endcase
    return c;
  endfunction

  task automatic check(string what, logic [63:0] got, logic [63:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h (x=%0d y=%0d t=%0d)", what, got, exp, x, y, t);
    end
  endtask

  task automatic apply(logic [31:0] ax, logic [31:0] ay, logic [31:0] at);
    x = ax; y = ay; t = at; #1;
  endtask

  initial begin
    #100000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] tag_a;
    apply(1, 0, 0); check("x bit0", code, 64'h1);
    apply(0, 1, 0); check("y bit0", code, 64'h2);
    apply(0, 0, 1); check("t bit0", code, 64'h4);
    apply(2, 0, 0); check("x bit1", code, 64'h8);
    apply(0, 0, 32'h10_0000); check("t bit20", code, 64'h1 << 62);
    apply(32'h1F_FFFF, 32'h1F_FFFF, 32'h1F_FFFF); check("all ones", code, 64'h7FFF_FFFF_FFFF_FFFF);
    check("all ones tag", tag, 64'h7FFF_FFFF_FFFC_0000);
    apply(32'hFFE0_0000, 32'hFFE0_0000, 32'hFFE0_0000); check("bits above 21 ignored", code, 64'h0);
    // a 64x64x64 cell shares one tag, the next cell in each dimension differs
    apply(64, 128, 192); tag_a = tag;
    apply(127, 191, 255); check("same cell tag", tag, tag_a);
    apply(128, 128, 192); checks++; if (tag == tag_a) begin failures++; $display("FAIL x cell"); end
    apply(64, 192, 192);  checks++; if (tag == tag_a) begin failures++; $display("FAIL y cell"); end
    apply(64, 128, 256);  checks++; if (tag == tag_a) begin failures++; $display("FAIL t cell"); end
    for (int i = 0; i < 2000; i++) begin
      apply($urandom, $urandom, $urandom);
      check("random code", code, ref_code(x, y, t));
      check("random tag", tag, {ref_code(x, y, t)[63:18], 18'b0});
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
