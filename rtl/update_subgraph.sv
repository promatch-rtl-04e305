// update_subgraph: recomputes the vertex property arrays of the subgraph.
//
// After the subgraph is built and after every match, the degree of each
// vertex (number of valid subgraph edges touching it) and its #dependent
// count (number of its neighbours whose degree is 1) must be refreshed before
// the next pass. This unit does it in two registered steps from the whole
// edges register: on `start` it counts degrees (result in `deg` one cycle
// later), then it counts dependents from those degrees (result in `dep` one
// more cycle later), and raises `done` for one cycle when `dep` is valid, two
// cycles after `start`. The published design
// names the Update Subgraph block and the two arrays but not how they are
// refreshed; a parallel recount is this design's choice (it costs two cycles
// per round instead of a pass over the edges).
module update_subgraph
  import promatch_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      start,
  input  sub_edge_t edges [MAX_E],
  output cnt_t      deg [MAX_V],
  output cnt_t      dep [MAX_V],
  output logic      done
);
  logic phase1;
  cnt_t deg_c [MAX_V];
  cnt_t dep_c [MAX_V];

  always_comb begin
    for (int v = 0; v < MAX_V; v++) begin
      deg_c[v] = '0;
      dep_c[v] = '0;
    end
    for (int e = 0; e < MAX_E; e++) begin
      if (edges[e].valid) begin
        deg_c[edges[e].a] = deg_c[edges[e].a] + 1'b1;
        deg_c[edges[e].b] = deg_c[edges[e].b] + 1'b1;
        if (deg[edges[e].b] == cnt_t'(1)) dep_c[edges[e].a] = dep_c[edges[e].a] + 1'b1;
        if (deg[edges[e].a] == cnt_t'(1)) dep_c[edges[e].b] = dep_c[edges[e].b] + 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase1 <= 1'b0;
      done   <= 1'b0;
      for (int v = 0; v < MAX_V; v++) begin
        deg[v] <= '0;
        dep[v] <= '0;
      end
    end else begin
      phase1 <= start;
      done   <= phase1;
      if (start)  deg <= deg_c;
      if (phase1) dep <= dep_c;
    end
  end
endmodule
