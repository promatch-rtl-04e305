// edges_register: the edge list of the decoding subgraph.
//
// Holds up to MAX_E edges {valid, vertex slot a, vertex slot b, weight}. The
// subgraph generator appends edges one per cycle (`push`); an append beyond
// MAX_E sets `overflow` and is dropped. When vertices are matched, `kill`
// carries a mask over vertex slots and every edge touching a masked vertex is
// invalidated in that same cycle, which is how the published design removes
// the edges of matched bits from the subgraph. `rd_idx` selects the edge
// streamed into the pipeline (combinational read); the whole array is also an
// output for the degree recount.
module edges_register
  import promatch_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       clear,
  input  logic       push,
  input  sub_edge_t  push_edge,
  input  logic       kill_en,
  input  logic [MAX_V-1:0] kill,
  input  logic [E_W-1:0]   rd_idx,
  output sub_edge_t  rd_edge,
  output sub_edge_t  edges [MAX_E],
  output logic [E_W:0] count,
  output logic       overflow
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      count    <= '0;
      overflow <= 1'b0;
      for (int e = 0; e < MAX_E; e++) edges[e] <= '0;
    end else if (clear) begin
      count    <= '0;
      overflow <= 1'b0;
      for (int e = 0; e < MAX_E; e++) edges[e] <= '0;
    end else begin
      if (push) begin
        if (count < (E_W+1)'(MAX_E)) begin
          edges[count[E_W-1:0]] <= push_edge;
          count <= count + 1'b1;
        end else begin
          overflow <= 1'b1;
        end
      end
      if (kill_en) begin
        for (int e = 0; e < MAX_E; e++)
          if (kill[edges[e].a] || kill[edges[e].b]) edges[e].valid <= 1'b0;
      end
    end
  end

  assign rd_edge = edges[rd_idx];
endmodule
