// matching_candidates_register: best pair found so far for Steps 2.1, 2.2,
// 4.1 and 4.2.
//
// Stage 4 of the edge-processing pipeline. Each of the four entries holds a
// vertex pair and its edge weight. An edge offered with one step flag set
// replaces that step's entry when the entry is empty or the new weight is
// strictly lower (a lower weight is a more probable error chain); on equal
// weights the earlier edge stays. `clear` empties all entries at the start of
// a pass. Update is registered: a candidate offered in cycle t is visible in
// cycle t+1.
module matching_candidates_register
  import promatch_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  logic    clear,
  input  logic    offer_valid,
  input  logic    s21,
  input  logic    s22,
  input  logic    s41,
  input  logic    s42,
  input  vid_t    a,
  input  vid_t    b,
  input  weight_t w,
  output cand_t   cand [4]        // indexed by cand_class_e
);
  logic [3:0] sel;
  assign sel = {s42, s41, s22, s21};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < 4; c++) cand[c] <= '0;
    end else if (clear) begin
      for (int c = 0; c < 4; c++) cand[c] <= '0;
    end else if (offer_valid) begin
      for (int c = 0; c < 4; c++) begin
        if (sel[c] && (!cand[c].valid || w < cand[c].w))
          cand[c] <= '{valid: 1'b1, a: a, b: b, w: w};
      end
    end
  end

  // An edge belongs to at most one step class.
  // checked only out of reset, so rst_n also feeds this synchronous check
  assert property (@(posedge clk) disable iff (!rst_n) offer_valid |-> $onehot0(sel));
endmodule
