// coverage_check: is the remaining syndrome within the main decoder's reach?
//
// Promatch stops predecoding as soon as the main decoder can finish the
// remaining flipped bits inside the time budget. The main decoder's latency
// for a Hamming weight h is given by the table LAT (cycles), and the budget is
// BUDGET cycles counted from the start of predecoding. The check finds the
// largest h <= HW_MAIN with elapsed + LAT[h] <= BUDGET (`target_hw`) and
// reports `sufficient` when the current weight is at most that. `over_budget`
// is set once elapsed exceeds BUDGET; predecoding is then aborted.
// Combinational.
//
// The budget of 240 cycles is 960 ns at 250 MHz, as in the published design.
// LAT[10] = 114 cycles (456 ns) is the worst-case latency reported for the
// Astrea main decoder in its own publication, not in the predecoder's; the
// smaller entries are this design's assumption (the published predecoder is
// only said to stop at weights 6, 8 or 10). Override LAT for another decoder.
module coverage_check
  import promatch_pkg::*;
#(
  parameter int unsigned BUDGET = BUDGET_CYC,
  parameter int unsigned LAT [HW_MAIN+1] = '{0, 4, 4, 8, 8, 20, 20, 50, 50, 114, 114}
) (
  input  logic [IDX_W:0] hw,
  input  logic [CYC_W-1:0] elapsed,
  output logic [IDX_W:0] target_hw,
  output logic           sufficient,
  output logic           over_budget
);
  always_comb begin
    target_hw   = '0;
    over_budget = (32'(elapsed) > BUDGET);
    for (int h = 0; h <= int'(HW_MAIN); h++) begin
      if (32'(elapsed) + LAT[h] <= BUDGET) target_hw = (IDX_W+1)'(h);
    end
    sufficient  = !over_budget && (hw <= target_hw);
  end
endmodule
