// tb_solution_select: random arrival orders and weights of the two solutions;
// checks the choice and that sel_valid comes one cycle after the second
// arrival.
module tb_solution_select;
  logic clk = 0, rst_n = 0, pm_valid = 0, ag_valid = 0, pm_fail = 0, ag_fail = 0;
  logic [15:0] pm_weight, ag_weight;
  logic sel_valid, use_ag;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  solution_select #(.TW(16)) dut (.clk, .rst_n, .pm_valid, .pm_fail, .pm_weight,
                                  .ag_valid, .ag_fail, .ag_weight, .sel_valid, .use_ag);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    pm_weight = '0; ag_weight = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < 200; r++) begin
      automatic int order = $urandom_range(0, 2);  // 0 pm first, 1 ag first, 2 together
      automatic int pw = $urandom_range(0, 60), aw = $urandom_range(0, 60);
      automatic bit pf = ($urandom_range(0, 5) == 0), af = ($urandom_range(0, 5) == 0);
      automatic bit exp_ag = (pf && !af) || (!af && aw < pw);
      @(negedge clk);
      if (order != 1) begin pm_valid = 1; pm_weight = 16'(pw); pm_fail = pf; end
      if (order != 0) begin ag_valid = 1; ag_weight = 16'(aw); ag_fail = af; end
      @(negedge clk);
      pm_valid = 0; ag_valid = 0;
      if (order < 2) begin
        checks++;
        if (sel_valid) begin failures++; $display("FAIL early select"); end
        repeat ($urandom_range(0, 3)) @(negedge clk);
        if (order == 1) begin pm_valid = 1; pm_weight = 16'(pw); pm_fail = pf; end
        else            begin ag_valid = 1; ag_weight = 16'(aw); ag_fail = af; end
        @(negedge clk);
        pm_valid = 0; ag_valid = 0;
      end
      checks++;
      if (!sel_valid || use_ag != exp_ag) begin
        failures++; $display("FAIL r=%0d sel %0d use_ag %0d exp %0d (pm %0d/%0d ag %0d/%0d)", r, sel_valid, use_ag, exp_ag, pw, pf, aw, af);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
