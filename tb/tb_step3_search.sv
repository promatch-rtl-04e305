// tb_step3_search: random vertex sets with a few singletons. The path table
// is the real path_table module filled with the synthetic graph's groups for
// the vertices used. The expected result is the first (singleton j, vertex i)
// pair, in the search order (j ascending, then i ascending), of lowest group
// among live i != j with #dependent 0. Also checks the cycle count S*(V+1)+1
// and that `stop` ends a search at once.
module tb_step3_search;
  import promatch_pkg::*;
  import tb_graph_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, stop = 0, busy;
  logic [MAX_V-1:0] alive;
  cnt_t deg [MAX_V];
  cnt_t dep [MAX_V];
  det_idx_t vidx [MAX_V];
  logic [V_W:0] vcount;
  logic pt_rd_en, pt_wr_en = 0;
  det_idx_t pt_rd_i, pt_rd_j, pt_wr_i, pt_wr_j;
  pcat_t pt_rd_data, pt_wr_data;
  cand_t best;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  path_table u_pt (.clk, .wr_en(pt_wr_en), .wr_i(pt_wr_i), .wr_j(pt_wr_j), .wr_data(pt_wr_data),
                   .rd_en(pt_rd_en), .rd_i(pt_rd_i), .rd_j(pt_rd_j), .rd_data(pt_rd_data));
  step3_search dut (.clk, .rst_n, .start, .stop, .alive, .deg, .dep, .vidx, .vcount,
                    .pt_rd_en, .pt_rd_i, .pt_rd_j, .pt_rd_data, .best, .busy);

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    pt_wr_i = '0; pt_wr_j = '0; pt_wr_data = '0; alive = '0;
    for (int v = 0; v < MAX_V; v++) begin deg[v] = '0; dep[v] = '0; vidx[v] = '0; end
    vcount = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < 40; r++) begin
      automatic int nv = $urandom_range(2, 24), ns = 0, cyc = 0;
      automatic bit exp_valid = 0;
      automatic int exp_j = 0, exp_i = 0, exp_w = 99;
      // pick distinct nodes
      for (int v = 0; v < nv; v++) begin
        automatic bit dup;
        do begin
          dup = 0;
          vidx[v] = det_idx_t'($urandom_range(0, N_DET - 1));
          for (int u = 0; u < v; u++) if (vidx[u] == vidx[v]) dup = 1;
        end while (dup);
        alive[v] = ($urandom_range(0, 5) != 0);
        deg[v]   = ($urandom_range(0, 2) == 0) ? '0 : cnt_t'($urandom_range(1, 3));
        dep[v]   = ($urandom_range(0, 1) == 0) ? '0 : cnt_t'($urandom_range(1, 2));
      end
      for (int v = nv; v < MAX_V; v++) begin alive[v] = 0; deg[v] = '0; dep[v] = '0; end
      vcount = (V_W+1)'(nv);
      // load the path-table cells this run can read
      for (int j = 0; j < nv; j++) for (int i = 0; i < nv; i++) begin
        @(negedge clk);
        pt_wr_en = 1; pt_wr_i = vidx[j]; pt_wr_j = vidx[i];
        pt_wr_data = pcat_t'(path_cat(int'(vidx[j]), int'(vidx[i])));
      end
      @(negedge clk); pt_wr_en = 0;
      for (int j = 0; j < nv; j++) if (alive[j] && deg[j] == 0) begin
        ns++;
        for (int i = 0; i < nv; i++)
          if (alive[i] && i != j && dep[i] == 0) begin
            automatic int c = path_cat(int'(vidx[j]), int'(vidx[i]));
            if (!exp_valid || c < exp_w) begin exp_valid = 1; exp_w = c; exp_j = j; exp_i = i; end
          end
      end
      start = 1;
      @(negedge clk); start = 0;
      while (busy) begin @(negedge clk); cyc++; end
      checks++;
      if (best.valid != exp_valid ||
          (exp_valid && (int'(best.a) != exp_j || int'(best.b) != exp_i || int'(best.w) != exp_w))) begin
        failures++;
        $display("FAIL run %0d got v%0d %0d-%0d w%0d exp v%0d %0d-%0d w%0d", r,
                 best.valid, best.a, best.b, best.w, exp_valid, exp_j, exp_i, exp_w);
      end
      checks++;
      if (cyc != ns * (nv + 1) + 1) begin failures++; $display("FAIL run %0d took %0d cycles, S=%0d V=%0d", r, cyc, ns, nv); end
      // restart, then stop early: the search must end within one cycle
      start = 1;
      @(negedge clk); start = 0;
      repeat (2) @(negedge clk);
      stop = 1;
      @(negedge clk); stop = 0;
      @(negedge clk);
      checks++;
      if (busy) begin failures++; $display("FAIL run %0d still busy after stop", r); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
