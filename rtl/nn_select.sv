// nn_select: picks the node address that morton_nn returns from a hit line.
//
// All nodes in a line share the masked Morton code of the query, so any of them is an
// approximate nearest neighbour. This block returns the most recently written valid
// slot whose state byte says "no collision" (only collision-free nodes are in the
// planner's tree). It scans the slots backwards in write order, starting at the
// newest one. The returned address has its state byte cleared, giving back the plain
// node address. The paper names this selection stage but not its rule: the rule is
// this design's choice.
//
// Interface: words (SLOTS 64-bit slots, slot i in [64*i +: 64]), valid (per slot),
// newest (index of the slot written last) in; found and addr out. Combinational.
module nn_select
  import morton_pkg::*;
#(
  parameter int unsigned SLOTS = morton_pkg::DEF_SLOTS,
  localparam int unsigned SW   = (SLOTS > 1) ? $clog2(SLOTS) : 1
) (
  input  logic [SLOTS*WORD_W-1:0] words,
  input  logic [SLOTS-1:0]        valid,
  input  logic [SW-1:0]           newest,
  output logic                    found,
  output logic [WORD_W-1:0]       addr
);

  always_comb begin
    logic [SW-1:0]     idx;
    logic [WORD_W-1:0] w;
    found = 1'b0;
    addr  = '0;
    for (int unsigned k = 0; k < SLOTS; k++) begin
      idx = SW'((int'(newest) + SLOTS - k) % SLOTS);   // newest, newest-1, ... (wrapping)
      w   = words[idx*WORD_W +: WORD_W];
      if (!found && valid[idx] && w[WORD_W-1 -: ST_W] == '0) begin
        found = 1'b1;
        addr  = {{ST_W{1'b0}}, w[WORD_W-ST_W-1:0]};
      end
    end
  end

endmodule
