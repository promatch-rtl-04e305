// tb_edge_pipeline: streams the edges of a small hand-built subgraph through
// the pipeline and compares the isolated-pair list and the four step
// candidates with a reference that classifies each edge by actually removing
// its two endpoints and counting the vertices left without a neighbour.
// The subgraph holds the patterns of the published examples: a star a-{b,c,d,e}
// with e-f, two isolated pairs, a 4-node path, a 4-cycle and a 3-node path.
// Also checks the pipeline latency: `busy` falls 3 cycles nb_after the last edge.
module tb_edge_pipeline;
  import promatch_pkg::*;
  localparam int NE = 18;
  logic clk = 0, rst_n = 0, clear = 0, in_valid = 0;
  sub_edge_t in_edge;
  cnt_t deg [MAX_V];
  cnt_t dep [MAX_V];
  cand_t cand [4];
  vid_t ia [MAX_V/2];
  vid_t ib [MAX_V/2];
  weight_t iw [MAX_V/2];
  logic [$clog2(MAX_V/2+1)-1:0] icount;
  logic busy;
  int checks = 0, failures = 0;

  int ea [NE] = '{0,0,0,0,4, 6, 8, 10,11,12, 14,15,16,17, 18,19, 21,23};
  int eb [NE] = '{1,2,3,4,5, 7, 9, 11,12,13, 15,16,17,14, 19,20, 22,24};
  int ew [NE];
  bit excl [NE];

  always #5 clk = ~clk;

  edge_pipeline dut (.clk, .rst_n, .clear, .in_valid, .in_edge, .deg, .dep, .cand,
                     .iso_a(ia), .iso_b(ib), .iso_w(iw), .iso_count(icount), .busy);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int rdeg(int v);
    automatic int n = 0;
    for (int e = 0; e < NE; e++) if (!excl[e] && (ea[e] == v || eb[e] == v)) n++;
    return n;
  endfunction

  // 0: S1, 1: 2.1, 2: 2.2, 3: 4.1, 4: 4.2
  function automatic int classify(int e);
    automatic int i = ea[e], j = eb[e], strand = 0;
    automatic bit a1 = (rdeg(i) == 1), b1 = (rdeg(j) == 1);
    if (a1 && b1) return 0;
    for (int k = 0; k < 32; k++) begin
      automatic int nb_before = 0, nb_after = 0;
      if (k == i || k == j) continue;
      for (int f = 0; f < NE; f++) if (!excl[f] && (ea[f] == k || eb[f] == k)) begin
        nb_before++;
        if (ea[f] != i && ea[f] != j && eb[f] != i && eb[f] != j) nb_after++;
      end
      if (nb_before > 0 && nb_after == 0) strand++;
    end
    if (strand == 0) return (a1 ^ b1) ? 1 : 2;
    return (a1 ^ b1) ? 3 : 4;
  endfunction

  task automatic run_pass(input int pass_no);
    automatic int order [NE];
    automatic int ref_iso [$];
    cand_t ref_c [4];
    automatic int last_cycle, busy_drop;
    // deg / dep from the live edges
    for (int v = 0; v < MAX_V; v++) deg[v] = cnt_t'(rdeg(v));
    for (int v = 0; v < MAX_V; v++) begin
      automatic int n = 0;
      for (int e = 0; e < NE; e++) if (!excl[e]) begin
        if (ea[e] == v && rdeg(eb[e]) == 1) n++;
        if (eb[e] == v && rdeg(ea[e]) == 1) n++;
      end
      dep[v] = cnt_t'(n);
    end
    for (int e = 0; e < NE; e++) order[e] = e;
    order.shuffle();
    for (int c = 0; c < 4; c++) ref_c[c] = '0;
    @(negedge clk); clear = 1;
    @(negedge clk); clear = 0;
    foreach (order[k]) begin
      automatic int e = order[k], cl;
      if (excl[e]) continue;
      if ($urandom_range(0, 3) == 0) begin in_valid = 0; @(negedge clk); end
      cl = classify(e);
      if (cl == 0) ref_iso.push_back(e);
      else if (!ref_c[cl-1].valid || ew[e] < ref_c[cl-1].w)
        ref_c[cl-1] = '{valid: 1'b1, a: vid_t'(ea[e]), b: vid_t'(eb[e]), w: weight_t'(ew[e])};
      in_valid = 1;
      in_edge  = '{valid: 1'b1, a: vid_t'(ea[e]), b: vid_t'(eb[e]), w: weight_t'(ew[e])};
      @(negedge clk);
    end
    in_valid = 0;
    busy_drop = 0;
    while (busy) begin @(negedge clk); busy_drop++; end
    checks++;
    if (busy_drop != 3) begin failures++; $display("FAIL pass %0d busy fell nb_after %0d cycles", pass_no, busy_drop); end
    checks++;
    if (int'(icount) != ref_iso.size()) begin
      failures++; $display("FAIL pass %0d iso count %0d exp %0d", pass_no, icount, ref_iso.size());
    end else begin
      foreach (ref_iso[k]) begin
        checks++;
        if (int'(ia[k]) != ea[ref_iso[k]] || int'(ib[k]) != eb[ref_iso[k]]) begin
          failures++; $display("FAIL pass %0d iso %0d", pass_no, k);
        end
      end
    end
    for (int c = 0; c < 4; c++) begin
      checks++;
      if (cand[c].valid !== ref_c[c].valid ||
          (ref_c[c].valid && (cand[c].a !== ref_c[c].a || cand[c].b !== ref_c[c].b || cand[c].w !== ref_c[c].w))) begin
        failures++;
        $display("FAIL pass %0d class %0d got v%0d %0d-%0d w%0d exp v%0d %0d-%0d w%0d", pass_no, c,
                 cand[c].valid, cand[c].a, cand[c].b, cand[c].w, ref_c[c].valid, ref_c[c].a, ref_c[c].b, ref_c[c].w);
      end
    end
  endtask

  initial begin
    in_edge = '0;
    for (int v = 0; v < MAX_V; v++) begin deg[v] = '0; dep[v] = '0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int p = 0; p < 12; p++) begin
      for (int e = 0; e < NE; e++) begin
        ew[e] = $urandom_range(8, 14);
        excl[e] = (p > 0) && ($urandom_range(0, 4) == 0);
      end
      run_pass(p);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
