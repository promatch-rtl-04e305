// tb_edge_table: fills the whole table from the synthetic graph, then reads
// random entries and checks the data one cycle after the read.
module tb_edge_table;
  import promatch_pkg::*;
  import tb_graph_pkg::*;
  localparam int SW = $clog2(NBR_SLOTS);
  logic clk = 0, wr_en = 0, rd_en = 0;
  det_idx_t wr_node, rd_node;
  logic [SW-1:0] wr_slot, rd_slot;
  nbr_entry_t wr_data, rd_data;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  edge_table dut (.clk, .wr_en, .wr_node, .wr_slot, .wr_data, .rd_en, .rd_node, .rd_slot, .rd_data);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_node = '0; wr_slot = '0; wr_data = '0; rd_node = '0; rd_slot = '0;
    for (int k = 0; k < int'(N_DET); k++)
      for (int s = 0; s < int'(NBR_SLOTS); s++) begin
        @(negedge clk);
        wr_en = 1; wr_node = det_idx_t'(k); wr_slot = SW'(s); wr_data = et_entry(k, s);
      end
    @(negedge clk); wr_en = 0;
    for (int n = 0; n < 2000; n++) begin
      automatic int k = $urandom_range(0, N_DET - 1), s = $urandom_range(0, NBR_SLOTS - 1);
      rd_en = 1; rd_node = det_idx_t'(k); rd_slot = SW'(s);
      @(negedge clk);
      rd_en = 0;
      checks++;
      if (rd_data !== et_entry(k, s)) begin
        failures++; $display("FAIL node %0d slot %0d", k, s);
      end
      // data must hold while rd_en is low
      @(negedge clk);
      checks++;
      if (rd_data !== et_entry(k, s)) begin failures++; $display("FAIL hold node %0d", k); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
