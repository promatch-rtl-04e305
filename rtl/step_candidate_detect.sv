// step_candidate_detect: which step of Promatch may use edge (i,j).
//
// Stage 3 of the edge-processing pipeline. With a = (deg_i==1), b = (deg_j==1)
// and ns = No_Singleton:
//   S1   = a & b                 isolated pair
//   S2.1 = ns  & (a ^ b)         no singleton, one endpoint of degree 1
//   S2.2 = ns  & ~(a | b)        no singleton, neither endpoint of degree 1
//   S4.1 = ~ns & (a ^ b)         creates singletons, one endpoint of degree 1
//   S4.2 = ~ns & ~(a | b)        creates singletons, neither of degree 1
// The XOR, the NOR and the inverted No_Singleton are those of the published
// step-selection figure; the way they are combined follows the algorithm's
// description of each step. At most one output is high. Combinational.
module step_candidate_detect (
  input  logic deg_i_is1,
  input  logic deg_j_is1,
  input  logic no_singleton,
  output logic s1,
  output logic s21,
  output logic s22,
  output logic s41,
  output logic s42
);
  logic one_deg1, no_deg1;

  always_comb begin
    one_deg1 = deg_i_is1 ^ deg_j_is1;
    no_deg1  = ~(deg_i_is1 | deg_j_is1);
    s1       = deg_i_is1 & deg_j_is1;
    s21      = no_singleton  & one_deg1;
    s22      = no_singleton  & no_deg1;
    s41      = ~no_singleton & one_deg1;
    s42      = ~no_singleton & no_deg1;
  end
endmodule
