// edge_pipeline: the four-stage edge-processing pipeline of Promatch.
//
// One subgraph edge (i,j,w) enters per cycle while the controller sweeps the
// edges register.
//   stage 1  look up deg and #dependent of both endpoints, test deg == 1
//   stage 2  singleton detection (singleton_detect)
//   stage 3  step candidate detection (step_candidate_detect)
//   stage 4  an S1 edge is appended to the isolated pairs register; an S2.x or
//            S4.x edge is compared with that step's entry of the matching
//            candidates register and replaces it if lighter
// The stage split is the published one. Each stage is one register stage here,
// so an edge offered in cycle t has updated the candidate registers by the end
// of cycle t+3 (visible at t+4); `busy` is high while any edge is in flight.
// `clear` empties both candidate stores at the start of a pass. The vertex
// property arrays are read in stage 1 and must stay constant during a pass.
module edge_pipeline
  import promatch_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      clear,
  input  logic      in_valid,
  input  sub_edge_t in_edge,
  input  cnt_t      deg [MAX_V],
  input  cnt_t      dep [MAX_V],
  output cand_t     cand [4],
  output vid_t      iso_a [MAX_V/2],
  output vid_t      iso_b [MAX_V/2],
  output weight_t   iso_w [MAX_V/2],
  output logic [$clog2(MAX_V/2+1)-1:0] iso_count,
  output logic      busy
);
  // Stage registers
  typedef struct packed {
    logic    valid;
    vid_t    a;
    vid_t    b;
    weight_t w;
    logic    ai1;
    logic    bi1;
    cnt_t    dep_a;
    cnt_t    dep_b;
  } st1_t;
  typedef struct packed {
    logic    valid;
    vid_t    a;
    vid_t    b;
    weight_t w;
    logic    ai1;
    logic    bi1;
    logic    ns;
  } st2_t;
  typedef struct packed {
    logic    valid;
    vid_t    a;
    vid_t    b;
    weight_t w;
    logic    s1, s21, s22, s41, s42;
  } st3_t;

  st1_t r1;
  st2_t r2;
  st3_t r3;
  logic ns_c;
  logic s1_c, s21_c, s22_c, s41_c, s42_c;

  singleton_detect u_sd (
    .deg_i_is1(r1.ai1), .deg_j_is1(r1.bi1),
    .dep_i(r1.dep_a), .dep_j(r1.dep_b), .no_singleton(ns_c));

  step_candidate_detect u_scd (
    .deg_i_is1(r2.ai1), .deg_j_is1(r2.bi1), .no_singleton(r2.ns),
    .s1(s1_c), .s21(s21_c), .s22(s22_c), .s41(s41_c), .s42(s42_c));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r1 <= '0;
      r2 <= '0;
      r3 <= '0;
    end else if (clear) begin
      r1 <= '0;
      r2 <= '0;
      r3 <= '0;
    end else begin
      // stage 1
      r1.valid <= in_valid && in_edge.valid;
      r1.a     <= in_edge.a;
      r1.b     <= in_edge.b;
      r1.w     <= in_edge.w;
      r1.ai1   <= (deg[in_edge.a] == cnt_t'(1));
      r1.bi1   <= (deg[in_edge.b] == cnt_t'(1));
      r1.dep_a <= dep[in_edge.a];
      r1.dep_b <= dep[in_edge.b];
      // stage 2
      r2 <= '{valid: r1.valid, a: r1.a, b: r1.b, w: r1.w,
              ai1: r1.ai1, bi1: r1.bi1, ns: ns_c};
      // stage 3
      r3 <= '{valid: r2.valid, a: r2.a, b: r2.b, w: r2.w,
              s1: s1_c, s21: s21_c, s22: s22_c, s41: s41_c, s42: s42_c};
    end
  end

  // stage 4
  isolated_pairs_register u_ipr (
    .clk, .rst_n, .clear,
    .push(r3.valid && r3.s1), .a(r3.a), .b(r3.b), .w(r3.w),
    .pair_a(iso_a), .pair_b(iso_b), .pair_w(iso_w), .count(iso_count));

  matching_candidates_register u_mcr (
    .clk, .rst_n, .clear,
    .offer_valid(r3.valid), .s21(r3.s21), .s22(r3.s22), .s41(r3.s41), .s42(r3.s42),
    .a(r3.a), .b(r3.b), .w(r3.w), .cand(cand));

  assign busy = r1.valid | r2.valid | r3.valid;
endmodule
