// tb_promatch_top: end-to-end run of the whole predecoder at its default
// (d = 13) size.
//
// The edge table and the full 1176 x 1176 path table are loaded from the
// synthetic graph of tb_graph_pkg. Behavioural stand-ins play the main
// decoder (answers after a latency that grows with the weight it receives,
// with weight 10 per remaining pair) and Astrea-G (answers with a random
// weight at a random time). The test feeds the hand-built patterns of the
// controller test, then random syndromes made of 4 to 24 independent errors,
// each flipping the two ends of one graph edge.
// For every syndrome it checks: the syndrome sent on equals the input with
// exactly the prematched bits cleared; prematched pairs are disjoint, were
// flipped, and (except Step 3 pairs) are graph neighbours; the weight sent on
// is at most 10 unless the run overflowed or aborted; a bypassed syndrome
// arrives 3 cycles after it was loaded; the final choice against Astrea-G is
// the lighter solution. It counts how often each mechanism happened and
// fails any that never did: bypass, Steps 1, 2.1, 2.2, 3, 4.1, a Step 4.2
// candidate, multi-round runs, overflow, abort, either final choice.
module tb_promatch_top;
  import promatch_pkg::*;
  import tb_graph_pkg::*;
  localparam int SW = $clog2(NBR_SLOTS);
  localparam int NP = MAX_V / 2;

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
  logic md_done = 0, md_fail = 0, ag_valid = 0, ag_fail = 0;
  logic [15:0] md_weight = '0, ag_weight = '0;
  logic sel_valid, sel_use_ag;
  int checks = 0, failures = 0;

  // mechanism counters
  int n_bypass = 0, n_s1 = 0, n_s21 = 0, n_s22 = 0, n_s3 = 0, n_s41 = 0, n_s42c = 0;
  int n_multi = 0, n_ovf = 0, n_abort = 0, n_use_ag = 0, n_use_pm = 0, n_syn = 0;

  always #2 clk = ~clk;   // 250 MHz

  promatch_top dut (
    .clk, .rst_n,
    .et_wr_en, .et_wr_node, .et_wr_slot, .et_wr_data,
    .pt_wr_en, .pt_wr_i, .pt_wr_j, .pt_wr_data,
    .syn_valid, .syn_in, .ready,
    .md_valid, .md_syndrome, .md_hw, .pm_bypass, .pm_overflow, .pm_aborted, .pm_stuck,
    .pm_cycles, .pm_rounds, .pm_a, .pm_b, .pm_step, .pm_count,
    .md_done, .md_fail, .md_weight, .ag_valid, .ag_fail, .ag_weight,
    .sel_valid, .sel_use_ag);

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // a Step 4.2 candidate can be found but never wins (see README); count finds
  always @(posedge clk) if (dut.u_ctl.state == 3'd5 && dut.u_ctl.cand[C_S42].valid) n_s42c++;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic decode(input logic [N_DET-1:0] s, input string tag);
    logic [N_DET-1:0] exp_syn, used;
    int lat = 0, md_lat, pm_total, agw;
    bit agf, exp_ag;
    n_syn++;
    @(negedge clk);
    while (!ready) @(negedge clk);
    syn_in = s; syn_valid = 1;
    @(negedge clk); syn_valid = 0;
    while (!md_valid) begin @(negedge clk); lat++; end
    // prematched pairs
    exp_syn = s; used = '0;
    for (int k = 0; k < int'(pm_count); k++) begin
      check(s[pm_a[k]] && s[pm_b[k]] && !used[pm_a[k]] && !used[pm_b[k]] && pm_a[k] != pm_b[k],
            $sformatf("%s pair %0d (%0d,%0d) not two fresh flipped bits", tag, k, pm_a[k], pm_b[k]));
      used[pm_a[k]] = 1'b1; used[pm_b[k]] = 1'b1;
      exp_syn[pm_a[k]] = 1'b0; exp_syn[pm_b[k]] = 1'b0;
      if (pm_step[k] != ST_3)
        check(adjacent(int'(pm_a[k]), int'(pm_b[k])), $sformatf("%s pair %0d not neighbours", tag, k));
      case (pm_step[k])
        ST_1: n_s1++;  ST_21: n_s21++; ST_22: n_s22++;
        ST_3: n_s3++;  ST_41: n_s41++;
        default: check(0, $sformatf("%s pair %0d step %s", tag, k, pm_step[k].name()));
      endcase
    end
    check(md_syndrome == exp_syn, $sformatf("%s syndrome to main decoder", tag));
    check(int'(md_hw) == $countones(exp_syn), $sformatf("%s md_hw", tag));
    if (!pm_overflow && !pm_aborted)
      check(md_hw <= (IDX_W+1)'(HW_MAIN), $sformatf("%s weight %0d left for main decoder", tag, md_hw));
    if (pm_bypass) begin
      n_bypass++;
      check($countones(s) <= int'(HW_MAIN) && pm_count == 0 && lat == 2, $sformatf("%s bypass (lat %0d)", tag, lat + 1));
    end
    if (pm_overflow) n_ovf++;
    if (pm_aborted)  n_abort++;
    if (pm_rounds > 1) n_multi++;
    check(!pm_stuck, $sformatf("%s stuck", tag));
    // main decoder and Astrea-G stand-ins
    md_lat = 2 + int'(md_hw) * 5;
    agw = $urandom_range(20, 200);
    agf = ($urandom_range(0, 9) == 0);
    pm_total = int'(dut.u_ctl.pm_weight) + 5 * int'(md_hw);
    exp_ag = ((pm_overflow || pm_aborted || md_hw > (IDX_W+1)'(HW_MAIN)) && !agf) || (!agf && agw < pm_total);
    fork
      begin
        repeat (md_lat) @(negedge clk);
        md_done = 1; md_fail = (md_hw > (IDX_W+1)'(HW_MAIN)); md_weight = 16'(5 * int'(md_hw));
        @(negedge clk); md_done = 0;
      end
      begin
        repeat ($urandom_range(1, 60)) @(negedge clk);
        ag_valid = 1; ag_fail = agf; ag_weight = 16'(agw);
        @(negedge clk); ag_valid = 0;
      end
    join
    while (!sel_valid) @(negedge clk);
    check(sel_use_ag == exp_ag, $sformatf("%s final choice use_ag=%0d exp %0d", tag, sel_use_ag, exp_ag));
    if (sel_use_ag) n_use_ag++; else n_use_pm++;
  endtask

  // random syndrome of nerr independent edge errors
  function automatic logic [N_DET-1:0] random_syndrome(int nerr);
    logic [N_DET-1:0] s = '0;
    int made = 0;
    while (made < nerr) begin
      int k = $urandom_range(0, N_DET - 1);
      nbr_entry_t e = et_entry(k, $urandom_range(0, 2));
      if (e.valid) begin s[k] ^= 1'b1; s[e.nbr] ^= 1'b1; made++; end
    end
    return s;
  endfunction

  logic [N_DET-1:0] s;

  initial begin
    et_wr_node = '0; et_wr_slot = '0; et_wr_data = '0; pt_wr_i = '0; pt_wr_j = '0; pt_wr_data = '0;
    syn_in = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < int'(N_DET); k++)
      for (int sl = 0; sl < int'(NBR_SLOTS); sl++) begin
        @(negedge clk);
        et_wr_en = 1; et_wr_node = det_idx_t'(k); et_wr_slot = SW'(sl); et_wr_data = et_entry(k, sl);
      end
    @(negedge clk); et_wr_en = 0;
    for (int i = 0; i < int'(N_DET); i++)
      for (int j = 0; j < int'(N_DET); j++) begin
        pt_wr_en = 1; pt_wr_i = det_idx_t'(i); pt_wr_j = det_idx_t'(j); pt_wr_data = pcat_t'(path_cat(i, j));
        @(negedge clk);
      end
    pt_wr_en = 0;
    $display("tables loaded");

    // hand-built patterns
    s = '0; for (int p = 0; p < 3; p++) for (int c = 0; c < 4; c++) s[node(2 * p, 0, c)] = 1'b1;
    decode(s, "paths4");
    s = '0; for (int p = 0; p < 6; p++) begin s[node(2 * p, 3, 2)] = 1'b1; s[node(2 * p, 3, 3)] = 1'b1; end
    decode(s, "isolated");
    s = '0; for (int p = 0; p < 3; p++) for (int r = 0; r < 2; r++) for (int c = 0; c < 2; c++) s[node(2 * p, 5 + r, 4 + c)] = 1'b1;
    decode(s, "cycles4");
    s = '0; for (int p = 0; p < 4; p++) for (int c = 0; c < 3; c++) s[node(2 * p + 1, 8, c)] = 1'b1;
    decode(s, "paths3");
    s = '0; for (int c = 0; c < 3; c++) s[node(6, 6, c)] = 1'b1;
    for (int q = 0; q < 8; q++) s[node(q < 4 ? 0 : 10, (q % 4) * 2, (q % 4) * 2)] = 1'b1;
    decode(s, "singletons");
    s = '0; for (int p = 0; p < 4; p++) for (int c = 0; c < 4; c++) s[node(2 * p, 10, c + 3)] = 1'b1;
    decode(s, "multiround");
    s = '0; for (int q = 0; q < 70; q++) s[q * 16] = 1'b1;
    decode(s, "overflow");
    s = '0; for (int q = 0; q < 15; q++) s[node(q % 14, (q * 5) % 12, (q * 3) % 7)] = 1'b1;
    decode(s, "abort");

    for (int r = 0; r < 300; r++) decode(random_syndrome($urandom_range(4, 24)), $sformatf("rand%0d", r));

    $display("syndromes %0d: bypass %0d, step1 %0d, step2.1 %0d, step2.2 %0d, step3 %0d, step4.1 %0d, step4.2-candidate cycles %0d",
             n_syn, n_bypass, n_s1, n_s21, n_s22, n_s3, n_s41, n_s42c);
    $display("multi-round %0d, overflow %0d, abort %0d, chose Astrea-G %0d, chose Promatch %0d",
             n_multi, n_ovf, n_abort, n_use_ag, n_use_pm);
    check(n_bypass > 0, "mechanism bypass never happened");
    check(n_s1 > 0,     "mechanism step 1 never happened");
    check(n_s21 > 0,    "mechanism step 2.1 never happened");
    check(n_s22 > 0,    "mechanism step 2.2 never happened");
    check(n_s3 > 0,     "mechanism step 3 never happened");
    check(n_s41 > 0,    "mechanism step 4.1 never happened");
    check(n_s42c > 0,   "mechanism step 4.2 candidate never found");
    check(n_multi > 0,  "mechanism multi-round never happened");
    check(n_ovf > 0,    "mechanism overflow never happened");
    check(n_abort > 0,  "mechanism abort never happened");
    check(n_use_ag > 0, "mechanism Astrea-G chosen never happened");
    check(n_use_pm > 0, "mechanism Promatch chosen never happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
