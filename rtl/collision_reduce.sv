// collision_reduce: turns the state bytes of one Morton store line into a single
// collision verdict.
//
// Each slot of a line holds a node address whose top 8 bits are that node's
// collision state. The line reports "collision" as soon as any one valid slot
// reports collision; it reports "no collision" only when every valid slot is clear.
// The OR over the line is the paper's rule; treating a non-zero state byte as
// collision, and ignoring empty (invalid) slots, are this design's choices.
//
// Interface: st (SLOTS state bytes, slot i in bits [8*i +: 8]), valid (one bit per
// slot) in; collision out. Combinational.
module collision_reduce
  import morton_pkg::*;
#(
  parameter int unsigned SLOTS = morton_pkg::DEF_SLOTS
) (
  input  logic [SLOTS*ST_W-1:0] st,
  input  logic [SLOTS-1:0]      valid,
  output logic                  collision
);

  logic [SLOTS-1:0] slot_col;

  always_comb begin
    for (int unsigned i = 0; i < SLOTS; i++)
      slot_col[i] = valid[i] && (st[i*ST_W +: ST_W] != '0);
  end

  assign collision = |slot_col;

endmodule
