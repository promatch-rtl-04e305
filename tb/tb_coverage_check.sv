// tb_coverage_check: sweeps elapsed cycles and Hamming weights. Expected
// target: largest h <= 10 with elapsed + latency(h) <= 240, where the latency
// list is written out here independently of the module's default.
module tb_coverage_check;
  import promatch_pkg::*;
  logic [IDX_W:0] hw, target_hw;
  logic [CYC_W-1:0] elapsed;
  logic sufficient, over_budget;
  int lat [11] = '{0, 4, 4, 8, 8, 20, 20, 50, 50, 114, 114};
  int checks = 0, failures = 0;

  coverage_check dut (.hw, .elapsed, .target_hw, .sufficient, .over_budget);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int e = 0; e < 300; e++)
      for (int h = 0; h < 14; h++) begin
        automatic int t = 0;
        automatic bit ob = (e > 240);
        for (int k = 0; k <= 10; k++) if (e + lat[k] <= 240) t = k;
        elapsed = CYC_W'(e); hw = (IDX_W+1)'(h);
        #1;
        checks++;
        if (int'(target_hw) != t || over_budget != ob || sufficient != (!ob && h <= t)) begin
          failures++;
          $display("FAIL e=%0d h=%0d target %0d/%0d over %0d suff %0d", e, h, target_hw, t, over_budget, sufficient);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
