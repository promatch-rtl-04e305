// tb_promatch_workloads: the evaluated code sizes, d = 11 and d = 13, run
// through the default (d = 13) build of the whole predecoder.
//
// For each distance a square-lattice stand-in for the decoding graph is
// loaded: (d*d-1)/2 detectors per round on a rows x cols grid (10 x 6 for
// d = 11, 12 x 7 for d = 13) over d+1 rounds, edges to the next column and row
// (weight 10) and to the next round (weight 12), path groups
// min(Manhattan distance - 1, 3). The d = 11 graph occupies detector indices
// 0..719; the rest of the edge table stays empty. Syndromes are then made the
// way high-weight syndromes are sampled for evaluation: k independent faults
// (k = 6 .. 24), each flipping the two ends of one random graph edge, and only
// syndromes with more than 10 flipped bits are kept.
// Every syndrome is checked as in the end-to-end test (handed-on syndrome,
// disjoint adjacent pairs, residual weight at most 10 unless the run overflowed
// or aborted, no index outside the code). The test prints per distance how
// often coverage was reached, the largest and mean number of budget cycles and
// how often each step matched a pair; those numbers are reported, not checked.
// Timing: about 2 M cycles of table loading, then a few hundred per syndrome.
module tb_promatch_workloads;
  import promatch_pkg::*;
  localparam int SW = $clog2(NBR_SLOTS);
  localparam int NP = MAX_V / 2;
  localparam int PER_D = 150;

  logic clk = 0, rst_n = 0;
  logic et_wr_en = 0, pt_wr_en = 0, syn_valid = 0;
  det_idx_t et_wr_node, pt_wr_i, pt_wr_j;
  logic [SW-1:0] et_wr_slot;
  nbr_entry_t et_wr_data;
  pcat_t pt_wr_data;
  logic [N_DET-1:0] syn_in, md_syndrome;
  logic ready, md_valid, pm_bypass, pm_overflow, pm_aborted, pm_stuck;
  logic [IDX_W:0] md_hw;
  logic [CYC_W-1:0] pm_cycles;
  logic [7:0] pm_rounds;
  det_idx_t pm_a [NP];
  det_idx_t pm_b [NP];
  step_e pm_step [NP];
  logic [$clog2(NP+1)-1:0] pm_count;
  logic sel_valid, sel_use_ag;
  int checks = 0, failures = 0;

  // current graph shape
  int g_cols, g_rows, g_rounds, g_per, g_n;

  always #2 clk = ~clk;

  // the main decoder and Astrea-G answer at once; only predecoding is studied
  promatch_top dut (
    .clk, .rst_n,
    .et_wr_en, .et_wr_node, .et_wr_slot, .et_wr_data,
    .pt_wr_en, .pt_wr_i, .pt_wr_j, .pt_wr_data,
    .syn_valid, .syn_in, .ready,
    .md_valid, .md_syndrome, .md_hw, .pm_bypass, .pm_overflow, .pm_aborted, .pm_stuck,
    .pm_cycles, .pm_rounds, .pm_a, .pm_b, .pm_step, .pm_count,
    .md_done(md_valid), .md_fail(1'b0), .md_weight(16'd0),
    .ag_valid(1'b1), .ag_fail(1'b1), .ag_weight(16'd0),
    .sel_valid, .sel_use_ag);

  initial begin
    repeat (6000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int gt(int k); return k / g_per; endfunction
  function automatic int gr(int k); return (k % g_per) / g_cols; endfunction
  function automatic int gc(int k); return k % g_cols; endfunction
  function automatic int iabs(int x); return (x < 0) ? -x : x; endfunction
  function automatic int gdist(int a, int b);
    return iabs(gt(a) - gt(b)) + iabs(gr(a) - gr(b)) + iabs(gc(a) - gc(b));
  endfunction
  function automatic nbr_entry_t gentry(int k, int s);
    nbr_entry_t e = '0;
    if (k < g_n)
      case (s)
        0: if (gc(k) < g_cols - 1)   e = '{valid: 1'b1, nbr: det_idx_t'(k + 1),      w: weight_t'(10)};
        1: if (gr(k) < g_rows - 1)   e = '{valid: 1'b1, nbr: det_idx_t'(k + g_cols), w: weight_t'(10)};
        2: if (gt(k) < g_rounds - 1) e = '{valid: 1'b1, nbr: det_idx_t'(k + g_per),  w: weight_t'(12)};
        default: e = '0;
      endcase
    return e;
  endfunction

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic load_graph(input int d);
    g_cols = (d == 11) ? 6 : 7;
    g_per = (d * d - 1) / 2;
    g_rows = g_per / g_cols;
    g_rounds = d + 1;
    g_n = g_per * g_rounds;
    for (int k = 0; k < int'(N_DET); k++)
      for (int sl = 0; sl < int'(NBR_SLOTS); sl++) begin
        @(negedge clk);
        et_wr_en = 1; et_wr_node = det_idx_t'(k); et_wr_slot = SW'(sl); et_wr_data = gentry(k, sl);
      end
    @(negedge clk); et_wr_en = 0;
    for (int i = 0; i < g_n; i++)
      for (int j = 0; j < g_n; j++) begin
        automatic int dd = gdist(i, j);
        pt_wr_en = 1; pt_wr_i = det_idx_t'(i); pt_wr_j = det_idx_t'(j);
        pt_wr_data = pcat_t'((dd == 0) ? 0 : ((dd - 1 > 3) ? 3 : dd - 1));
        @(negedge clk);
      end
    pt_wr_en = 0;
  endtask

  task automatic run_distance(input int d);
    int n_cov = 0, n_ovf = 0, n_abort = 0, max_cyc = 0, sum_cyc = 0, sum_rounds = 0;
    int n_step [7] = '{default: 0};
    load_graph(d);
    for (int r = 0; r < PER_D; r++) begin
      logic [N_DET-1:0] s, exp_syn, used;
      int k = $urandom_range(6, 24);
      do begin
        s = '0;
        for (int q = 0; q < k; q++) begin
          nbr_entry_t e;
          int v;
          do begin
            v = $urandom_range(0, g_n - 1);
            e = gentry(v, $urandom_range(0, 2));
          end while (!e.valid);
          s[v] ^= 1'b1; s[e.nbr] ^= 1'b1;
        end
      end while ($countones(s) <= int'(HW_MAIN));
      @(negedge clk);
      while (!ready) @(negedge clk);
      syn_in = s; syn_valid = 1;
      @(negedge clk); syn_valid = 0;
      while (!md_valid) @(negedge clk);
      exp_syn = s; used = '0;
      for (int p = 0; p < int'(pm_count); p++) begin
        check(s[pm_a[p]] && s[pm_b[p]] && !used[pm_a[p]] && !used[pm_b[p]] && pm_a[p] != pm_b[p]
              && int'(pm_a[p]) < g_n && int'(pm_b[p]) < g_n,
              $sformatf("d=%0d syndrome %0d pair %0d", d, r, p));
        if (pm_step[p] != ST_3)
          check(gdist(int'(pm_a[p]), int'(pm_b[p])) == 1, $sformatf("d=%0d syndrome %0d pair %0d not adjacent", d, r, p));
        used[pm_a[p]] = 1'b1; used[pm_b[p]] = 1'b1;
        exp_syn[pm_a[p]] = 1'b0; exp_syn[pm_b[p]] = 1'b0;
        n_step[int'(pm_step[p])]++;
      end
      check(md_syndrome == exp_syn && int'(md_hw) == $countones(exp_syn), $sformatf("d=%0d syndrome %0d handed on", d, r));
      check(!pm_bypass, $sformatf("d=%0d syndrome %0d bypassed", d, r));
      if (pm_overflow) n_ovf++;
      else if (pm_aborted) n_abort++;
      else begin
        check(md_hw <= (IDX_W+1)'(HW_MAIN), $sformatf("d=%0d syndrome %0d weight %0d", d, r, md_hw));
        n_cov++;
      end
      if (!pm_overflow) begin
        sum_cyc += int'(pm_cycles);
        sum_rounds += int'(pm_rounds);
        if (int'(pm_cycles) > max_cyc) max_cyc = int'(pm_cycles);
      end
      while (!sel_valid) @(negedge clk);
    end
    $display("d=%0d: %0d syndromes with HW>10, %0d reached coverage, %0d aborted, %0d overflow",
             d, PER_D, n_cov, n_abort, n_ovf);
    $display("d=%0d: budget cycles max %0d mean %0d.%0d, rounds mean %0d.%0d", d, max_cyc,
             sum_cyc / (PER_D - n_ovf), (10 * sum_cyc / (PER_D - n_ovf)) % 10,
             sum_rounds / (PER_D - n_ovf), (10 * sum_rounds / (PER_D - n_ovf)) % 10);
    $display("d=%0d: pairs by step: 1 %0d, 2.1 %0d, 2.2 %0d, 3 %0d, 4.1 %0d, 4.2 %0d", d,
             n_step[ST_1], n_step[ST_21], n_step[ST_22], n_step[ST_3], n_step[ST_41], n_step[ST_42]);
    check(n_cov > 0, $sformatf("d=%0d: coverage never reached", d));
  endtask

  initial begin
    et_wr_node = '0; et_wr_slot = '0; et_wr_data = '0; pt_wr_i = '0; pt_wr_j = '0; pt_wr_data = '0;
    syn_in = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run_distance(11);
    run_distance(13);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
