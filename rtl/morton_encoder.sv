// morton_encoder: maps a point (x, y, t) to its 64-bit Morton code and to the
// masked code that tags a Morton store line.
//
// The Morton (Z-order) code interleaves the coordinate bits so that points close in
// space and time tend to get close codes. Clearing the K_MASK low bits of the code
// (M' = M & ~((1 << k) - 1)) merges every point of one small (x, y, t) cell into the
// same tag, which is what lets the store return "a node near this one".
//
// Interface: x, y, t in (32 bits each); code and tag out (64 bits). Purely
// combinational: no clock, the result is valid in the same cycle. In gates the
// block is only wiring: every output bit is one input bit or a constant zero.
//
// Follows the paper: 32-bit coordinates, 64-bit code, the mask of the k low bits,
// k = 18 by default. This design's choice: three 32-bit coordinates do not fit in 64
// bits, so the BITS_PER_DIM = 21 low bits of each are interleaved, x at bit 0, y at
// bit 1, t at bit 2 (the common 3-D 64-bit Morton layout); bit 63 is zero.
module morton_encoder
  import morton_pkg::*;
#(
  parameter int unsigned BITS_PER_DIM = morton_pkg::DEF_BITS_PER_DIM,
  parameter int unsigned K_MASK       = morton_pkg::DEF_K_MASK
) (
  input  logic [COORD_W-1:0]  x,
  input  logic [COORD_W-1:0]  y,
  input  logic [COORD_W-1:0]  t,
  output logic [MORTON_W-1:0] code,
  output logic [MORTON_W-1:0] tag
);

  initial begin
    assert (3 * BITS_PER_DIM <= MORTON_W) else $error("interleaved code wider than MORTON_W");
    assert (K_MASK < MORTON_W) else $error("K_MASK must leave some tag bits");
  end

  always_comb begin
    code = '0;
    for (int unsigned i = 0; i < BITS_PER_DIM; i++) begin
      code[3*i]     = x[i];
      code[3*i + 1] = y[i];
      code[3*i + 2] = t[i];
    end
  end

  // Eq. (1): keep the 64-k high bits, clear the k low bits.
  assign tag = code & ~((MORTON_W'(1) << K_MASK) - MORTON_W'(1));

endmodule
