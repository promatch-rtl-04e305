// tb_promatch_controller: the predecoding loop on hand-built syndromes whose
// outcome can be worked out by hand on the synthetic graph (tb_graph_pkg).
// The controller runs with the real edge table, path table and syndrome
// register around it. Each scenario checks the exact prematched pairs and
// the step of each, the number of rounds, the final weight and the final
// syndrome:
//   A  three 4-node paths (12 bits)        -> one Step 2.1 pair
//   B  six isolated pairs (12 bits)        -> one Step 1 pair
//   C  three 4-cycles (12 bits)            -> one Step 2.2 pair
//   D  four 3-node paths (12 bits)         -> one Step 4.1 pair
//   E  a 3-node path and 8 singletons      -> one Step 3 pair
//   F  four 4-node paths (16 bits)         -> 2.1, then 1 + 2.1 in round 2
//   G  5 bits                              -> bypass
//   H  70 bits                             -> overflow
//   I  15 scattered singletons             -> Step 3 rounds until the
//                                             budget runs out (abort)
module tb_promatch_controller;
  import promatch_pkg::*;
  import tb_graph_pkg::*;
  localparam int SW = $clog2(NBR_SLOTS);
  localparam int NP = MAX_V / 2;

  logic clk = 0, rst_n = 0;
  logic et_wr_en = 0, pt_wr_en = 0, load = 0, start = 0;
  det_idx_t et_wr_node, pt_wr_i, pt_wr_j;
  logic [SW-1:0] et_wr_slot;
  nbr_entry_t et_wr_data, et_rd_data;
  pcat_t pt_wr_data, pt_rd_data;
  logic et_rd_en, pt_rd_en;
  det_idx_t et_rd_node, pt_rd_i, pt_rd_j;
  logic [SW-1:0] et_rd_slot;
  logic [N_DET-1:0] syn_in, syn;
  logic [IDX_W:0] hw;
  logic kill_en;
  logic [MAX_V-1:0] kill;
  det_idx_t vidx [MAX_V];
  logic done, busy, bypass, overflow, aborted, stuck;
  logic [CYC_W-1:0] elapsed;
  logic [7:0] rounds;
  logic [15:0] pm_weight;
  det_idx_t m_a [NP];
  det_idx_t m_b [NP];
  step_e m_step [NP];
  logic [$clog2(NP+1)-1:0] m_count;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  edge_table u_et (.clk, .wr_en(et_wr_en), .wr_node(et_wr_node), .wr_slot(et_wr_slot), .wr_data(et_wr_data),
                   .rd_en(et_rd_en), .rd_node(et_rd_node), .rd_slot(et_rd_slot), .rd_data(et_rd_data));
  path_table u_pt (.clk, .wr_en(pt_wr_en), .wr_i(pt_wr_i), .wr_j(pt_wr_j), .wr_data(pt_wr_data),
                   .rd_en(pt_rd_en), .rd_i(pt_rd_i), .rd_j(pt_rd_j), .rd_data(pt_rd_data));
  syndrome_register u_syn (.clk, .rst_n, .load, .syn_in, .kill_en, .kill, .vidx, .syn, .hw);
  promatch_controller dut (
    .clk, .rst_n, .start, .syn, .syn_hw(hw),
    .et_rd_en, .et_rd_node, .et_rd_slot, .et_rd_data,
    .pt_rd_en, .pt_rd_i, .pt_rd_j, .pt_rd_data,
    .kill_en, .kill, .vidx, .done, .busy, .bypass, .overflow, .aborted, .stuck,
    .elapsed, .rounds, .pm_weight, .m_a, .m_b, .m_step, .m_count);

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  // load the path-table cells between the flipped bits of a syndrome
  task automatic load_paths(input logic [N_DET-1:0] s);
    int bits [$];
    for (int k = 0; k < int'(N_DET); k++) if (s[k]) bits.push_back(k);
    foreach (bits[x]) foreach (bits[y]) begin
      @(negedge clk);
      pt_wr_en = 1; pt_wr_i = det_idx_t'(bits[x]); pt_wr_j = det_idx_t'(bits[y]);
      pt_wr_data = pcat_t'(path_cat(bits[x], bits[y]));
    end
    @(negedge clk); pt_wr_en = 0;
  endtask

  task automatic run(input logic [N_DET-1:0] s);
    if ($countones(s) <= int'(MAX_V)) load_paths(s);
    @(negedge clk); syn_in = s; load = 1;
    @(negedge clk); load = 0; start = 1;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
  endtask

  // expected pair list
  int ea [$], eb [$];
  step_e es [$];

  task automatic expect_pairs(input string tag, input logic [N_DET-1:0] s, input int exp_rounds);
    logic [N_DET-1:0] exp_syn;
    exp_syn = s;
    check(int'(m_count) == ea.size(), $sformatf("%s pair count %0d exp %0d", tag, m_count, ea.size()));
    foreach (ea[k]) begin
      exp_syn[ea[k]] = 1'b0; exp_syn[eb[k]] = 1'b0;
      if (k < int'(m_count))
        check(int'(m_a[k]) == ea[k] && int'(m_b[k]) == eb[k] && m_step[k] == es[k],
              $sformatf("%s pair %0d got %0d-%0d %s exp %0d-%0d %s", tag, k, m_a[k], m_b[k],
                        m_step[k].name(), ea[k], eb[k], es[k].name()));
    end
    check(syn == exp_syn, $sformatf("%s final syndrome", tag));
    check(int'(hw) == $countones(exp_syn), $sformatf("%s final hw %0d", tag, hw));
    check(int'(rounds) == exp_rounds, $sformatf("%s rounds %0d exp %0d", tag, rounds, exp_rounds));
    check(!bypass && !overflow && !aborted && !stuck, $sformatf("%s flags", tag));
    ea.delete(); eb.delete(); es.delete();
  endtask

  logic [N_DET-1:0] s;

  initial begin
    et_wr_node = '0; et_wr_slot = '0; et_wr_data = '0; pt_wr_i = '0; pt_wr_j = '0; pt_wr_data = '0;
    syn_in = '0;
    for (int k = 0; k < int'(N_DET); k++)
      for (int sl = 0; sl < int'(NBR_SLOTS); sl++) begin
        @(negedge clk);
        et_wr_en = 1; et_wr_node = det_idx_t'(k); et_wr_slot = SW'(sl); et_wr_data = et_entry(k, sl);
      end
    @(negedge clk); et_wr_en = 0;
    rst_n = 1;

    // A: three 4-node paths in rounds 0, 2, 4
    s = '0;
    for (int p = 0; p < 3; p++) for (int c = 0; c < 4; c++) s[node(2 * p, 0, c)] = 1'b1;
    run(s);
    ea.push_back(node(0, 0, 0)); eb.push_back(node(0, 0, 1)); es.push_back(ST_21);
    expect_pairs("A", s, 1);

    // B: six isolated pairs
    s = '0;
    for (int p = 0; p < 6; p++) begin s[node(2 * p, 3, 2)] = 1'b1; s[node(2 * p, 3, 3)] = 1'b1; end
    run(s);
    ea.push_back(node(0, 3, 2)); eb.push_back(node(0, 3, 3)); es.push_back(ST_1);
    expect_pairs("B", s, 1);

    // C: three 4-cycles
    s = '0;
    for (int p = 0; p < 3; p++) for (int r = 0; r < 2; r++) for (int c = 0; c < 2; c++) s[node(2 * p, 5 + r, 4 + c)] = 1'b1;
    run(s);
    ea.push_back(node(0, 5, 4)); eb.push_back(node(0, 5, 5)); es.push_back(ST_22);
    expect_pairs("C", s, 1);

    // D: four 3-node paths
    s = '0;
    for (int p = 0; p < 4; p++) for (int c = 0; c < 3; c++) s[node(2 * p + 1, 8, c)] = 1'b1;
    run(s);
    ea.push_back(node(1, 8, 0)); eb.push_back(node(1, 8, 1)); es.push_back(ST_41);
    expect_pairs("D", s, 1);

    // E: a 3-node path plus 8 singletons; the first singleton (lowest index)
    // is at (0,0,0) and its nearest eligible partner at (0,2,0), distance 2
    s = '0;
    for (int c = 0; c < 3; c++) s[node(6, 6, c)] = 1'b1;
    for (int q = 0; q < 8; q++) s[node(q < 4 ? 0 : 10, (q % 4) * 2, (q % 4) * 2)] = 1'b1;
    run(s);
    ea.push_back(node(0, 0, 0)); eb.push_back(node(0, 2, 2)); es.push_back(ST_3);
    expect_pairs("E", s, 1);

    // F: four 4-node paths: 2.1, then the freed isolated pair and another 2.1
    s = '0;
    for (int p = 0; p < 4; p++) for (int c = 0; c < 4; c++) s[node(2 * p, 10, c + 3)] = 1'b1;
    run(s);
    ea.push_back(node(0, 10, 3)); eb.push_back(node(0, 10, 4)); es.push_back(ST_21);
    ea.push_back(node(0, 10, 5)); eb.push_back(node(0, 10, 6)); es.push_back(ST_1);
    ea.push_back(node(2, 10, 3)); eb.push_back(node(2, 10, 4)); es.push_back(ST_21);
    expect_pairs("F", s, 2);

    // G: bypass
    s = '0;
    for (int q = 0; q < 5; q++) s[node(q, 1, 1)] = 1'b1;
    run(s);
    check(bypass && m_count == 0 && syn == s, "G bypass");

    // H: overflow
    s = '0;
    for (int q = 0; q < 70; q++) s[q * 16] = 1'b1;
    run(s);
    check(overflow && m_count == 0 && syn == s, "H overflow");

    // I: 15 scattered singletons -> Step 3 only, runs out of budget
    s = '0;
    for (int q = 0; q < 15; q++) s[node(q % 14, (q * 5) % 12, (q * 3) % 7)] = 1'b1;
    run(s);
    check(aborted, $sformatf("I abort (rounds %0d, hw %0d, elapsed %0d)", rounds, hw, elapsed));
    check(m_count > 0 && m_step[0] == ST_3, "I step 3 used");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
