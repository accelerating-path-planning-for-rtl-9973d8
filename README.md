# A Morton store: hardware memoization for sampling-based path planning

A planner for a vehicle among moving obstacles searches in three dimensions:
`(x, y, t)`. A rapidly-exploring random tree (RRT) spends most of its time on two
questions, asked once per iteration:

* which tree node is nearest to a new random point?
* does the new edge collide with an obstacle?

Both answers change little between points that lie close together in space and
time. The idea behind this design is to remember recent answers in a small
content-addressable memory. The memory is indexed by a coarsened space-filling-curve
code of the point. A new query that falls into the same small `(x, y, t)` cell as an
earlier one gets the remembered answer in two cycles. It then skips a kd-tree
search or an exact collision test. This memory is called the **Morton store**. A
processor reaches it through three instructions.

This RTL implements the Morton store described by M. Luo and G. E. Suh, *Accelerating
Path Planning for Autonomous Driving with Hardware-Assisted Memoization*. The
publication fixes what the store does and its main sizes. The rest (port timing,
encodings, slot fill order, selection rule) is filled in here and marked as such
below.

## 1. The tag: a masked Morton code

A Morton (Z-order) code interleaves the bits of the coordinates. Points that are close
in all three coordinates then share long common prefixes of their codes.
`morton_encoder` builds a 64-bit code from 21 bits of each coordinate:

```
code bit 3i   = x[i]
code bit 3i+1 = y[i]        i = 0 .. 20
code bit 3i+2 = t[i]
code bit 63   = 0
```

The tag is this code with its `k` low bits cleared, `M' = M & ~(2^k - 1)`, with
`k = 18` by default. Clearing 18 interleaved bits removes the 6 low bits of each
coordinate. So all points of one aligned 64 x 64 x 64 cell of integer coordinates
share one tag. `k` sets the grain of the memo: a larger `k` gives more hits but
coarser answers. Only the 46 bits above the mask are stored in the tag array.

The coordinates reach the store as 32-bit integers. How a planner scales its map to
integers decides what a cell means physically. The workload bench (section 6) uses 8
integer steps per map unit and per time step, so a cell is 8 x 8 map units by 8 time
steps.

## 2. Organisation

```
            tag (46 b)          line index
 (x,y,t) --> morton_encoder --> morton_tagstore ------------+
                                 512 tags, 512 comparators   |
                                 LRU age ranks               v
                                                   morton_line_array
                                                   512 lines x 8 slots x 64 b
                                                         |  selected line
                                          +--------------+--------------+
                                          v                             v
                                  collision_reduce                 nn_select
                                  (OR of state bytes)   (newest collision-free slot)
                                          |                             |
                                   collision state                node address
```

* **Lines and slots.** The store holds 32 KB of data in 64-byte lines, which gives
  512 lines. A line holds eight 8-byte slots. A slot is the address of a tree node
  in the processor's memory. Those addresses have zero upper bits, so the top 8
  bits of a slot carry the node's collision state. Here any non-zero state byte
  means "collision".
* **Tagstore.** The tagstore is fully associative: each line has a tag, a valid bit
  and one equality comparator. A lookup compares all 512 tags at once. Lines are
  allocated only after a miss, so two lines never hold the same tag. An assertion
  checks this.
* **Replacement.** After a write miss the store evicts the line referenced longest
  ago. `morton_tagstore` keeps an exact order. Every line has a 9-bit age rank, and
  the ranks always form a permutation of 0..511. A reference sets the referenced
  line's rank to 0 and adds one to every line that was younger. The victim is the
  line of rank 511. While invalid lines remain, the lowest-numbered one is filled
  first. Hits of all three instructions count as references. Read misses change
  nothing.
* **Filling a line.** Each line has a round-robin fill pointer. An update that hits
  writes the next slot, so a full line overwrites its oldest node. A line that has
  just been allocated keeps only the new slot valid and drops the evicted tag's
  nodes.
* **Collision answer.** `collision_reduce` reports a collision if any valid slot of
  the line reports one. One colliding node in the cell is enough to distrust the
  whole cell.
* **Nearest-neighbour answer.** `nn_select` scans the slots from the newest written
  to the oldest and returns the first valid slot with a zero state byte. Only
  collision-free nodes enter the tree, so only they can be parents. The state byte
  is cleared in the returned address. It returns 0 when there is no such slot.

## 3. The instruction interface

| instruction | source operands | result |
|---|---|---|
| `morton_update <x\|y>, <t>, <addr>` | x, y, t; `addr` = node address with its state in bits 63:56 | none. On a hit, writes a slot of the line. On a miss, allocates a line. |
| `morton_col <x\|y>, <t>, <st>` | x, y, t | `st` = 0 no collision, 1 collision, 2 miss |
| `morton_nn <x\|y>, <t>, <addr>` | x, y, t | `addr` = a collision-free node of the cell, or 0 |

`<x|y>` is one 64-bit register with x in bits 63:32 and y in bits 31:0. The request
and response types are `morton_req_t` and `morton_resp_t` in `morton_pkg`. The response
also returns a `hit` bit (the tag matched) and echoes the opcode. A miss of `morton_col`
and a collision answer both send the software to its exact collision test. A 0
from `morton_nn` sends it to its full nearest-neighbour search.

## 4. Timing of the port

The store sits beside the processor on a private port (`req_valid`/`req_ready`,
`resp_valid`) and serves one instruction at a time:

| cycle | store |
|---|---|
| c   | `req_valid && req_ready`: encode, compare all tags, pick the hit or victim line, register them |
| c+1 | `req_ready` low. Read the line, form the answer, perform the update write and the replacement update. |
| c+2 | `resp_valid` high for one cycle with the result. `req_ready` high again. |

The latency is 2 cycles and the throughput is one instruction every 2 cycles. A
processor that blocks on each result can present its next instruction in cycle c+2.
That instruction is compared against tags that already include the previous write,
so back-to-back updates and lookups of one cell behave as if in order. Assertions in
`morton_store` check three rules: a request waiting for `req_ready` stays unchanged,
only the three defined opcodes are issued, and a response arrives exactly 2 cycles
after acceptance. Reset is synchronous and active-low and empties the store. The
data and tag arrays are not reset; valid bits qualify every read of them.

## 5. How a planner uses it

One RRT iteration with the store looks like this:

1. Draw a random point.
2. `morton_nn`. If it returns 0, or a node that is not earlier in time than the
   point, run the normal nearest-neighbour search. Time only runs forward along a
   path, and the slots hold no time stamp, so software enforces this.
3. Steer one step from the nearest node towards the point, one time step later.
4. `morton_col` on the new point. Only if the answer is not "no collision", run the
   exact collision test.
5. `morton_update` with the new node's address and its state byte.
6. Add the node to the tree if its state is collision-free.

The publication's pseudocode passes two points, the new node and its parent, to
the collision lookup. Its instruction table gives `morton_col` a single point. The
store follows the table and looks up the new node's cell.

A "no collision" from the store is approximate, so the finished path is checked
exactly, segment by segment. One line of the publication's pseudocode applies an
exact test before every tree insertion. Its text, however, says exact checking is
needed only for the solution path. The workload bench follows the text. When the
final check rejects a segment, the bench retires that node and its subtree. It also
records the exact result in the store as a collision.

## 6. Verification

Every block has a self-checking testbench in `tb/`. Each ends by printing
`TB_RESULT checks=N failures=M` and has a cycle or time watchdog.

| testbench | block | what it checks |
|---|---|---|
| `tb_morton_encoder` | `morton_encoder` | Hand-worked codes. 2000 random points against a bit-by-bit reference. One tag per 64^3 cell and different tags for neighbouring cells. |
| `tb_morton_tagstore` | `morton_tagstore` (8 lines) | Hit, hit index and victim against a model that keeps the last-reference time per line. Over 1000 evictions. |
| `tb_morton_line_array` | `morton_line_array` (4 lines) | Read-back of every line after random appends and reallocations. Slot wrap-around. |
| `tb_collision_reduce` | `collision_reduce` | Directed and random lines against the OR rule. |
| `tb_nn_select` | `nn_select` | Newest-first choice, wrap past slot 0, lines with no collision-free node. |
| `tb_morton_store` | `morton_store`, full size | 14,500 back-to-back instructions against a tag-keyed reference model. The 2-cycle latency. A directed oldest-line eviction. It counts 11 mechanisms and fails any that never occurred: port stall, update hit, fill of a free line, eviction, slot overwrite, each of the three collision answers, NN found, NN hit with no usable node, NN miss. |
| `tb_rrt_workload` | `morton_store`, full size | The planning loop of section 5 on the 12 synthetic configurations (map edge 100 or 200, 10 or 100 time steps, 5, 10 or 20 moving obstacles) and a 5-obstacle, edge-100, 20-step map. |

In `tb_rrt_workload`, every store answer must equal the answer worked out from the
bench's own record of the last eight updates per tag. That record includes
oldest-referenced eviction. Every run must reach the goal with a path that passes
the exact check and moves forward in time. Obstacle radius (edge/10), step length
(2 x edge / steps) and the coordinate scale are the bench's own choices. The obstacle
paths are random. With these choices the collision memo skips the exact test in
roughly half of the iterations. The nearest-neighbour memo hits in about 1 % of
them: a cell covers 8 time steps, and a usable node must be earlier in time than the
query. The bench measures the store's correctness, not the speed-up.

To run a testbench with Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Irtl -y rtl rtl/morton_pkg.sv \
          tb/tb_morton_store.sv --top-module tb_morton_store
./obj_dir/Vtb_morton_store
```

Substitute any other testbench name. The benches use `$urandom` only, with no
constraint solver and no external files. The whole-design benches finish in well
under a second of simulation time at the full 512-line size.

## 7. Parameters

| parameter | default | meaning |
|---|---|---|
| `LINES` | 512 | lines in the store (32 KB / 64 B) |
| `SLOTS` | 8 | node addresses per line |
| `K_MASK` | 18 | low Morton-code bits cleared to form the tag |
| `BITS_PER_DIM` | 21 | coordinate bits interleaved (`morton_encoder`) |
| `LATENCY` | 2 | cycles from acceptance to response (package constant, fixed by the two-stage structure) |

`LINES` and `SLOTS` need not be powers of two. Changing `K_MASK` changes the tag width
and the cell size.

Synthesised at the defaults to generic cells, the store comes to about 8,900
word-level cells. These include 512 tag comparators and 1,024 small adders and
comparators for the age ranks. It also needs about 295,000 memory bits: 262,144 of
line data, 23,552 of tags and 4,608 of age ranks, plus valid bits and fill pointers.
The data array is written as a register array. A chip would use an SRAM macro for
the line data and a CAM macro or custom array for the tags.

## 8. What follows the publication and what does not

Taken from the publication:

* the three instructions and their operands;
* 32-bit coordinates, 64-bit Morton codes as tags, and the mask of `k = 18` low bits;
* a fully-associative store of 32 KB with 64-byte lines of eight 8-byte node
  addresses, and the state in the top 8 address bits;
* the OR rule for a line's collision answer;
* no change on a read miss, and eviction of the oldest-referenced line on a write
  miss;
* the 2-cycle access latency and the direct CPU-to-store connection.

The 32 KB figure is taken as the line data alone. The tags, valid bits and age ranks
come on top of it.

Choices made here:

* the 21-bit-per-coordinate interleave order;
* the port handshake and the one-at-a-time issue;
* packing x and y into one register;
* the result encodings, and treating any non-zero state byte as collision;
* counting read hits as references;
* filling invalid lines first, round-robin slot filling, and clearing a reallocated
  line;
* the newest-collision-free-slot rule for the nearest neighbour.

The publication measured the store inside a processor simulator with a simple
in-order core, split L1 caches, L2, L3 and DRAM. Those parts are standard and are
not included. The store's port is brought out as the top-level `req`/`resp` signals
of `morton_store`, where such a core would connect.

## 9. Files

| file | contents |
|---|---|
| `rtl/morton_pkg.sv` | constants, opcode and result enums, request/response structs |
| `rtl/morton_encoder.sv` | Morton code and tag mask |
| `rtl/morton_tagstore.sv` | tags, comparators, LRU ranks, victim choice |
| `rtl/morton_line_array.sv` | line data, slot valid bits, fill pointers |
| `rtl/collision_reduce.sv` | line collision answer |
| `rtl/nn_select.sv` | nearest-neighbour slot choice |
| `rtl/morton_store.sv` | top level: port, two-cycle pipeline, instruction behaviour |
| `tb/*.sv` | testbenches of section 6 |
