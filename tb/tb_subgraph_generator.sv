// tb_subgraph_generator: random sparse syndromes on the synthetic graph.
// The edge table is the real edge_table module, filled from tb_graph_pkg.
// Checks: the vertex array lists exactly the flipped bits in ascending order;
// the pushed edges are exactly the graph edges between flipped bits, each once,
// with the right weight; the build takes the expected number of cycles; a
// syndrome with more than MAX_V flipped bits raises overflow.
module tb_subgraph_generator;
  import promatch_pkg::*;
  import tb_graph_pkg::*;
  localparam int SW = $clog2(NBR_SLOTS);
  logic clk = 0, rst_n = 0, start = 0;
  logic [N_DET-1:0] syn;
  logic et_rd_en, et_wr_en = 0;
  det_idx_t et_rd_node, et_wr_node;
  logic [SW-1:0] et_rd_slot, et_wr_slot;
  nbr_entry_t et_rd_data, et_wr_data;
  det_idx_t vidx [MAX_V];
  logic [V_W:0] vcount;
  logic push, overflow, done;
  sub_edge_t push_edge;
  int checks = 0, failures = 0;
  int got_a [$], got_b [$], got_w [$];

  always #5 clk = ~clk;

  edge_table u_et (.clk, .wr_en(et_wr_en), .wr_node(et_wr_node), .wr_slot(et_wr_slot), .wr_data(et_wr_data),
                   .rd_en(et_rd_en), .rd_node(et_rd_node), .rd_slot(et_rd_slot), .rd_data(et_rd_data));
  subgraph_generator dut (.clk, .rst_n, .start, .syndrome(syn), .et_rd_en, .et_rd_node, .et_rd_slot,
                          .et_rd_data, .vidx, .vcount, .push, .push_edge, .overflow, .done);

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (push) begin
    got_a.push_back(int'(vidx[push_edge.a]));
    got_b.push_back(int'(vidx[push_edge.b]));
    got_w.push_back(int'(push_edge.w));
  end

  task automatic run(input int nbits);
    automatic int bits [$];
    automatic int cyc = 0, ne = 0;
    syn = '0;
    while (bits.size() < nbits) begin
      automatic int k = $urandom_range(0, N_DET - 1);
      // bias toward clusters: half the bits next to an earlier bit
      if (bits.size() > 0 && $urandom_range(0, 1) == 1) begin
        automatic int b0 = bits[$urandom_range(0, bits.size() - 1)];
        k = (b0 + 1 < int'(N_DET)) ? b0 + 1 : b0 - 1;
      end
      if (!syn[k]) begin syn[k] = 1'b1; bits.push_back(k); end
    end
    bits.sort();
    got_a.delete(); got_b.delete(); got_w.delete();
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    while (!done) begin @(negedge clk); cyc++; end
    if (nbits > int'(MAX_V)) begin
      checks++;
      if (!overflow) begin failures++; $display("FAIL no overflow at %0d bits", nbits); end
      return;
    end
    checks++;
    if (overflow || int'(vcount) != nbits) begin failures++; $display("FAIL vcount %0d exp %0d", vcount, nbits); end
    for (int v = 0; v < nbits; v++) begin
      checks++;
      if (int'(vidx[v]) != bits[v]) begin failures++; $display("FAIL vidx[%0d]=%0d exp %0d", v, vidx[v], bits[v]); end
    end
    foreach (bits[x]) foreach (bits[y]) if (bits[x] < bits[y] && adjacent(bits[x], bits[y])) begin
      automatic int hit = 0;
      ne++;
      foreach (got_a[g]) if (got_a[g] == bits[x] && got_b[g] == bits[y] && got_w[g] == edge_w(bits[x], bits[y])) hit++;
      checks++;
      if (hit != 1) begin failures++; $display("FAIL edge %0d-%0d seen %0d times", bits[x], bits[y], hit); end
    end
    checks++;
    if (got_a.size() != ne) begin failures++; $display("FAIL %0d edges pushed, %0d exist", got_a.size(), ne); end
    // collect: nbits+1 cycles, edges: nbits*NBR_SLOTS, drain: 2
    checks++;
    if (cyc != nbits + 1 + nbits * int'(NBR_SLOTS) + 2) begin
      failures++; $display("FAIL build took %0d cycles for %0d bits", cyc, nbits);
    end
  endtask

  initial begin
    syn = '0; et_wr_node = '0; et_wr_slot = '0; et_wr_data = '0;
    for (int k = 0; k < int'(N_DET); k++)
      for (int s = 0; s < int'(NBR_SLOTS); s++) begin
        @(negedge clk);
        et_wr_en = 1; et_wr_node = det_idx_t'(k); et_wr_slot = SW'(s); et_wr_data = et_entry(k, s);
      end
    @(negedge clk); et_wr_en = 0;
    rst_n = 1;
    for (int r = 0; r < 20; r++) run($urandom_range(1, 40));
    run(MAX_V);
    run(MAX_V + 3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
