// singleton_detect: "would matching edge (i,j) leave a singleton?"
//
// Stage 2 of the edge-processing pipeline. If node i has degree 1 it is one of
// j's dependents (neighbours whose only neighbour is j), so matching i with j
// strands #dependent_j - 1 other nodes; otherwise it strands all #dependent_j
// of them. The same holds with i and j swapped. Two multiplexers choose
// between #dependent and #dependent-1, an adder sums the two, and a zero test
// gives No_Singleton. This is the circuit of the published design's singleton
// detection figure. Purely combinational.
//
// Like the published circuit it only counts degree-1 neighbours: a node that
// is adjacent to both i and j with degree 2 also becomes a singleton but is not
// seen here.
module singleton_detect
  import promatch_pkg::*;
(
  input  logic deg_i_is1,
  input  logic deg_j_is1,
  input  cnt_t dep_i,        // #dependent_i
  input  cnt_t dep_j,        // #dependent_j
  output logic no_singleton
);
  cnt_t       strand_j, strand_i;
  logic [CNT_W:0] sum;

  always_comb begin
    strand_j     = deg_i_is1 ? cnt_t'(dep_j - 1'b1) : dep_j;
    strand_i     = deg_j_is1 ? cnt_t'(dep_i - 1'b1) : dep_i;
    sum          = {1'b0, strand_j} + {1'b0, strand_i};
    no_singleton = (sum == '0);
  end
endmodule
