// morton_tagstore: the fully-associative tag side of the Morton store.
//
// Every line has a stored tag (the unmasked high bits of a masked Morton code), a
// valid bit and one equality comparator; a lookup compares the query tag against all
// lines at once and reports the matching line. Lines are only allocated after a
// miss, so at most one line ever matches.
//
// Replacement keeps exact least-recently-referenced order. Each line holds an age
// rank, 0 for the line referenced last and LINES-1 for the one referenced longest
// ago; the ranks always form a permutation of 0..LINES-1. A reference ("touch") sets
// the touched line's rank to 0 and ages by one every line that was younger than it.
// The victim for a new allocation is the first invalid line, or else the line of
// rank LINES-1, the oldest referenced one.
//
// Interface: lookup_tag in, hit / hit_idx out (combinational); victim_idx out
// (combinational from state). touch with touch_idx updates the order at the next
// clock edge; alloc together with touch also writes wr_tag into line touch_idx and
// makes it valid. Reset (active low, synchronous) invalidates every line.
//
// From the paper: fully associative, one comparator per line, "on a write miss,
// the oldest referenced memoryline is evicted", 512 lines for 32 KB of 64-byte
// lines. This design's choices: filling invalid lines first, counting read hits as
// references, storing only the 64-K_MASK tag bits that are not masked away.
module morton_tagstore
  import morton_pkg::*;
#(
  parameter int unsigned LINES = morton_pkg::DEF_LINES,
  parameter int unsigned TAG_W = MORTON_W - DEF_K_MASK,
  localparam int unsigned IW   = (LINES > 1) ? $clog2(LINES) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  // lookup
  input  logic [TAG_W-1:0] lookup_tag,
  output logic             hit,
  output logic [IW-1:0]    hit_idx,
  // replacement
  output logic [IW-1:0]    victim_idx,
  // update
  input  logic             touch,
  input  logic [IW-1:0]    touch_idx,
  input  logic             alloc,
  input  logic [TAG_W-1:0] wr_tag
);

  logic [TAG_W-1:0] tags  [LINES];
  logic [LINES-1:0] valid;
  logic [IW-1:0]    age   [LINES];
  logic [LINES-1:0] match;

  // One comparator per line.
  always_comb begin
    for (int unsigned i = 0; i < LINES; i++)
      match[i] = valid[i] && (tags[i] == lookup_tag);
  end

  assign hit = |match;

  always_comb begin
    hit_idx = '0;
    for (int unsigned i = 0; i < LINES; i++)
      if (match[i]) hit_idx = IW'(i);
  end

  // Victim: lowest-numbered invalid line, else the oldest-referenced line.
  always_comb begin
    logic found_inv;
    found_inv  = 1'b0;
    victim_idx = '0;
    for (int unsigned i = 0; i < LINES; i++)
      if (age[i] == IW'(LINES - 1)) victim_idx = IW'(i);
    for (int unsigned i = 0; i < LINES; i++)
      if (!found_inv && !valid[i]) begin
        found_inv  = 1'b1;
        victim_idx = IW'(i);
      end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      valid <= '0;
      for (int unsigned i = 0; i < LINES; i++) age[i] <= IW'(i);
    end else if (touch) begin
      for (int unsigned i = 0; i < LINES; i++)
        if (age[i] < age[touch_idx]) age[i] <= age[i] + IW'(1);
      age[touch_idx] <= '0;
      if (alloc) valid[touch_idx] <= 1'b1;
    end
  end

  // Tag array: no reset needed, every read is qualified by valid.
  always_ff @(posedge clk) begin
    if (touch && alloc) tags[touch_idx] <= wr_tag;
  end

  // At most one line may match a tag.
  assert property (@(posedge clk) disable iff (!rst_n) $onehot0(match))
    else $error("morton_tagstore: several lines match one tag");

endmodule
