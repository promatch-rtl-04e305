// edge_table: on-chip memory holding the decoding graph's edges and weights.
//
// Row k holds NBR_SLOTS entries {valid, neighbour index, weight} for the
// neighbours of node k whose index is larger than k, so every graph edge is
// stored once. The table is written one entry per cycle through the load port
// (the host fills it ahead of decoding, e.g. while syndromes are extracted) and
// read with one cycle of latency, one entry per cycle. A flat array addressed
// by {node, slot} keeps it a single memory block.
//
// The published design states only that edge weights live in an Edge Table in
// on-chip memory (3.6 KB for d=11, 6 KB for d=13); its row layout is this
// design's choice and, at 20 bits per slot, is larger (about 23.5 KB for d=13).
module edge_table
  import promatch_pkg::*;
#(
  parameter int unsigned NODES = N_DET,
  parameter int unsigned SLOTS = NBR_SLOTS
) (
  input  logic       clk,
  // load port
  input  logic       wr_en,
  input  det_idx_t   wr_node,
  input  logic [$clog2(SLOTS)-1:0] wr_slot,
  input  nbr_entry_t wr_data,
  // read port (1-cycle latency)
  input  logic       rd_en,
  input  det_idx_t   rd_node,
  input  logic [$clog2(SLOTS)-1:0] rd_slot,
  output nbr_entry_t rd_data
);
  localparam int unsigned DEPTH = NODES * SLOTS;
  localparam int unsigned AW    = $clog2(DEPTH);

  nbr_entry_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[AW'(wr_node) * AW'(SLOTS) + AW'(wr_slot)] <= wr_data;
    if (rd_en) rd_data <= mem[AW'(rd_node) * AW'(SLOTS) + AW'(rd_slot)];
  end
endmodule
