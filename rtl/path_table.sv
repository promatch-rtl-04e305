// path_table: n x n memory of path-weight groups between syndrome bits.
//
// Used by Step 3 to find the shortest path from a singleton to another flipped
// bit. Each cell holds one of four path-weight groups (2 bits); the published
// design reduces its 8-bit path weights to four groups because the algorithm
// only needs their order, and its storage figures (129 KB for d=11, 345 KB
// for d=13) are n*n*2 bits with n = N_DET. The host writes the table one cell
// per cycle through the load port; reads take one cycle. Cell (i,j) is at
// address i*n + j.
module path_table
  import promatch_pkg::*;
#(
  parameter int unsigned NODES = N_DET,
  parameter int unsigned CW    = PATH_W
) (
  input  logic          clk,
  input  logic          wr_en,
  input  det_idx_t      wr_i,
  input  det_idx_t      wr_j,
  input  logic [CW-1:0] wr_data,
  input  logic          rd_en,
  input  det_idx_t      rd_i,
  input  det_idx_t      rd_j,
  output logic [CW-1:0] rd_data
);
  localparam int unsigned DEPTH = NODES * NODES;
  localparam int unsigned AW    = $clog2(DEPTH);

  logic [CW-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[AW'(wr_i) * AW'(NODES) + AW'(wr_j)] <= wr_data;
    if (rd_en) rd_data <= mem[AW'(rd_i) * AW'(NODES) + AW'(rd_j)];
  end
endmodule
