// morton_line_array: the data side of the Morton store, one 64-byte line per tag.
//
// A line holds SLOTS (8) slots of 64 bits. A slot is a node address whose top 8
// bits carry the node's collision state; the rest of the address is unchanged
// because node addresses have zero upper bits. Besides the data the array keeps a
// valid bit per slot and a round-robin fill pointer per line: an update writes the
// slot the pointer names and advances it, so a line keeps the SLOTS nodes written
// into it most recently. When a line has just been (re)allocated for a new tag
// (wr_new), the write goes to slot 0 and every other slot of that line is made
// invalid, dropping the evicted tag's nodes.
//
// Interface: rd_idx in; rd_line, rd_valid and rd_newest (slot written last) out,
// combinational from the state. wr_en, wr_new, wr_idx, wr_word write at the next
// rising clock edge. Synchronous active-low reset clears all slot valid bits.
//
// From the paper: 8 slots of 8 bytes per line, state in the 8 MSBs of an address,
// 32 KB in total (512 lines). This design's choices: the fill order, the clearing
// of a reallocated line, and a flip-flop array in place of an SRAM macro.
module morton_line_array
  import morton_pkg::*;
#(
  parameter int unsigned LINES = morton_pkg::DEF_LINES,
  parameter int unsigned SLOTS = morton_pkg::DEF_SLOTS,
  localparam int unsigned IW   = (LINES > 1) ? $clog2(LINES) : 1,
  localparam int unsigned SW   = (SLOTS > 1) ? $clog2(SLOTS) : 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [IW-1:0]           rd_idx,
  output logic [SLOTS*WORD_W-1:0] rd_line,
  output logic [SLOTS-1:0]        rd_valid,
  output logic [SW-1:0]           rd_newest,
  input  logic                    wr_en,
  input  logic                    wr_new,
  input  logic [IW-1:0]           wr_idx,
  input  logic [WORD_W-1:0]       wr_word
);

  logic [SLOTS*WORD_W-1:0] data  [LINES];
  logic [SLOTS-1:0]        vld   [LINES];
  logic [SW-1:0]           fillp [LINES];   // next slot to write

  assign rd_line   = data[rd_idx];
  assign rd_valid  = vld[rd_idx];
  assign rd_newest = SW'((int'(fillp[rd_idx]) + SLOTS - 1) % SLOTS);

  logic [SW-1:0] wslot;
  assign wslot = wr_new ? '0 : fillp[wr_idx];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int unsigned i = 0; i < LINES; i++) begin
        vld[i]   <= '0;
        fillp[i] <= '0;
      end
    end else if (wr_en) begin
      if (wr_new) vld[wr_idx] <= SLOTS'(1);
      else        vld[wr_idx][wslot] <= 1'b1;
      fillp[wr_idx] <= SW'((int'(wslot) + 1) % SLOTS);
    end
  end

  // Data array: no reset, every read is qualified by the slot valid bits.
  always_ff @(posedge clk) begin
    if (wr_en) data[wr_idx][wslot*WORD_W +: WORD_W] <= wr_word;
  end

endmodule
