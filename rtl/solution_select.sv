// solution_select: final choice between Promatch + main decoder and Astrea-G.
//
// When Promatch (followed by the main decoder) and the Astrea-G decoder run
// side by side, the lighter of the two complete solutions wins, since the
// minimum total weight is the most probable correction. Each side presents a
// total weight with a valid strobe, in any order; once both have arrived the
// unit raises `sel_valid` for one cycle with `use_ag` set if Astrea-G's weight
// is strictly lower, and forgets both. A side flagged `fail` (aborted or not
// decodable in time) always loses. The published design budgets 10 cycles for
// this comparison; this unit needs one.
module solution_select
  import promatch_pkg::*;
#(
  parameter int unsigned TW = 16
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          pm_valid,
  input  logic          pm_fail,
  input  logic [TW-1:0] pm_weight,
  input  logic          ag_valid,
  input  logic          ag_fail,
  input  logic [TW-1:0] ag_weight,
  output logic          sel_valid,
  output logic          use_ag
);
  logic          pm_have, ag_have, pm_f, ag_f;
  logic [TW-1:0] pm_w, ag_w;
  logic          pm_have_n, ag_have_n, pm_f_n, ag_f_n;
  logic [TW-1:0] pm_w_n, ag_w_n;

  always_comb begin
    pm_have_n = pm_have || pm_valid;
    ag_have_n = ag_have || ag_valid;
    pm_w_n    = pm_valid ? pm_weight : pm_w;
    ag_w_n    = ag_valid ? ag_weight : ag_w;
    pm_f_n    = pm_valid ? pm_fail   : pm_f;
    ag_f_n    = ag_valid ? ag_fail   : ag_f;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pm_have <= 1'b0; ag_have <= 1'b0;
      pm_f    <= 1'b0; ag_f    <= 1'b0;
      pm_w    <= '0;   ag_w    <= '0;
      sel_valid <= 1'b0;
      use_ag    <= 1'b0;
    end else begin
      sel_valid <= 1'b0;
      if (pm_have_n && ag_have_n) begin
        sel_valid <= 1'b1;
        use_ag    <= (pm_f_n && !ag_f_n) || (!ag_f_n && (ag_w_n < pm_w_n));
        pm_have   <= 1'b0;
        ag_have   <= 1'b0;
      end else begin
        pm_have <= pm_have_n;
        ag_have <= ag_have_n;
        pm_w    <= pm_w_n;
        ag_w    <= ag_w_n;
        pm_f    <= pm_f_n;
        ag_f    <= ag_f_n;
      end
    end
  end
endmodule
