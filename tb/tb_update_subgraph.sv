// tb_update_subgraph: random edge sets; degree and #dependent of every vertex
// are recounted in the testbench and compared; `done` must come two cycles
// after `start`.
module tb_update_subgraph;
  import promatch_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, done;
  sub_edge_t edges [MAX_E];
  cnt_t deg [MAX_V];
  cnt_t dep [MAX_V];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  update_subgraph dut (.clk, .rst_n, .start, .edges, .deg, .dep, .done);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int e = 0; e < MAX_E; e++) edges[e] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < 50; r++) begin
      automatic int rdeg [MAX_V];
      automatic int rdep [MAX_V];
      automatic int lat = 0;
      automatic int ne = $urandom_range(0, 60);
      automatic int nv = $urandom_range(10, 20);
      for (int e = 0; e < MAX_E; e++) begin
        edges[e] = '0;
        if (e < ne) begin
          automatic int a = $urandom_range(0, nv - 1), b;
          b = (a + $urandom_range(1, nv - 1)) % nv;
          edges[e] = '{valid: ($urandom_range(0, 3) != 0), a: vid_t'(a), b: vid_t'(b), w: weight_t'(1)};
        end
      end
      for (int v = 0; v < MAX_V; v++) begin rdeg[v] = 0; rdep[v] = 0; end
      for (int e = 0; e < MAX_E; e++) if (edges[e].valid) begin rdeg[edges[e].a]++; rdeg[edges[e].b]++; end
      for (int e = 0; e < MAX_E; e++) if (edges[e].valid) begin
        if (rdeg[edges[e].b] == 1) rdep[edges[e].a]++;
        if (rdeg[edges[e].a] == 1) rdep[edges[e].b]++;
      end
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      while (!done) begin @(negedge clk); lat++; end
      checks++;
      if (lat != 1) begin failures++; $display("FAIL done after %0d extra cycles", lat); end
      for (int v = 0; v < MAX_V; v++) begin
        checks++;
        if (int'(deg[v]) != rdeg[v] % 32 || int'(dep[v]) != rdep[v] % 32) begin
          failures++; $display("FAIL v%0d deg %0d/%0d dep %0d/%0d", v, deg[v], rdeg[v], dep[v], rdep[v]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
