// isolated_pairs_register: all Step 1 candidates (isolated pairs) of a pass.
//
// Unlike the other steps, Step 1 may have many candidates, and all of them can
// be applied to the syndrome in the same cycle, so they are kept in a list of
// their own. Each push appends one vertex pair and its edge weight; `clear`
// empties the list at the start of a pass. At most MAX_V/2 pairs can exist
// (every vertex is in at most one isolated pair), so the list never overflows.
// Registered: a pair pushed in cycle t is counted in cycle t+1.
module isolated_pairs_register
  import promatch_pkg::*;
#(
  parameter int unsigned NPAIR = MAX_V / 2
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    clear,
  input  logic    push,
  input  vid_t    a,
  input  vid_t    b,
  input  weight_t w,
  output vid_t    pair_a [NPAIR],
  output vid_t    pair_b [NPAIR],
  output weight_t pair_w [NPAIR],
  output logic [$clog2(NPAIR+1)-1:0] count
);
  localparam int unsigned IW = $clog2(NPAIR);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      count <= '0;
      for (int k = 0; k < NPAIR; k++) begin
        pair_a[k] <= '0;
        pair_b[k] <= '0;
        pair_w[k] <= '0;
      end
    end else if (clear) begin
      count <= '0;
    end else if (push && 32'(count) < NPAIR) begin
      pair_a[count[IW-1:0]] <= a;
      pair_b[count[IW-1:0]] <= b;
      pair_w[count[IW-1:0]] <= w;
      count         <= count + 1'b1;
    end
  end

  // checked only out of reset, so rst_n also feeds this synchronous check
  assert property (@(posedge clk) disable iff (!rst_n) push && !clear |-> 32'(count) < NPAIR);
endmodule
