// tb_edges_register: appends random edges, removes vertices with kill masks
// and compares the stored edges with a reference list; checks overflow when
// more than MAX_E edges are appended.
module tb_edges_register;
  import promatch_pkg::*;
  logic clk = 0, rst_n = 0, clear = 0, push = 0, kill_en = 0;
  sub_edge_t push_edge, rd_edge;
  logic [MAX_V-1:0] kill;
  logic [E_W-1:0] rd_idx;
  sub_edge_t edges [MAX_E];
  logic [E_W:0] count;
  logic overflow;
  sub_edge_t model [MAX_E];
  int n;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  edges_register dut (.clk, .rst_n, .clear, .push, .push_edge, .kill_en, .kill, .rd_idx, .rd_edge,
                      .edges, .count, .overflow);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare(input int tag);
    checks++;
    if (int'(count) != n) begin failures++; $display("FAIL %0d count %0d exp %0d", tag, count, n); end
    for (int e = 0; e < n; e++) begin
      checks++;
      if (edges[e] !== model[e]) begin failures++; $display("FAIL %0d edge %0d got %p exp %p", tag, e, edges[e], model[e]); end
      rd_idx = E_W'(e);
      #1;
      checks++;
      if (rd_edge !== model[e]) begin failures++; $display("FAIL %0d rd %0d", tag, e); end
    end
  endtask

  initial begin
    push_edge = '0; kill = '0; rd_idx = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int round = 0; round < 8; round++) begin
      automatic int ne = $urandom_range(10, MAX_E);
      @(negedge clk); clear = 1;
      @(negedge clk); clear = 0;
      n = 0;
      for (int e = 0; e < ne; e++) begin
        push = 1;
        push_edge = '{valid: 1'b1, a: vid_t'($urandom_range(0, 30)), b: vid_t'($urandom_range(31, MAX_V - 1)),
                      w: weight_t'($urandom)};
        model[n++] = push_edge;
        @(negedge clk);
      end
      push = 0;
      @(negedge clk);
      compare(round);
      for (int kk = 0; kk < 3; kk++) begin
        @(negedge clk);
        kill = '0;
        kill[$urandom_range(0, MAX_V - 1)] = 1'b1;
        kill[$urandom_range(0, MAX_V - 1)] = 1'b1;
        for (int e = 0; e < n; e++) if (kill[model[e].a] || kill[model[e].b]) model[e].valid = 1'b0;
        kill_en = 1;
        @(negedge clk);
        kill_en = 0;
        compare(100 + round);
      end
      checks++;
      if (overflow) begin failures++; $display("FAIL early overflow"); end
    end
    // overflow
    @(negedge clk); clear = 1;
    @(negedge clk); clear = 0;
    for (int e = 0; e < MAX_E + 2; e++) begin
      push = 1; push_edge = '{valid: 1'b1, a: '0, b: 1, w: 5};
      @(negedge clk);
    end
    push = 0;
    checks++;
    if (!overflow || int'(count) != MAX_E) begin failures++; $display("FAIL overflow %0d count %0d", overflow, count); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
