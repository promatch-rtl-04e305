// tb_syndrome_register: loads random syndromes, clears the bits of random
// vertex slots and checks contents and Hamming weight against a model.
module tb_syndrome_register;
  import promatch_pkg::*;
  logic clk = 0, rst_n = 0, load = 0, kill_en = 0;
  logic [N_DET-1:0] syn_in, syn, model;
  logic [MAX_V-1:0] kill;
  det_idx_t vidx [MAX_V];
  logic [IDX_W:0] hw;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  syndrome_register dut (.clk, .rst_n, .load, .syn_in, .kill_en, .kill, .vidx, .syn, .hw);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare(input int tag);
    automatic int ones = 0;
    for (int k = 0; k < int'(N_DET); k++) ones += int'(model[k]);
    checks++;
    if (syn !== model || int'(hw) != ones) begin failures++; $display("FAIL %0d hw %0d exp %0d", tag, hw, ones); end
  endtask

  initial begin
    kill = '0; syn_in = '0;
    for (int v = 0; v < MAX_V; v++) vidx[v] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < 30; r++) begin
      automatic int n = 0;
      syn_in = '0;
      for (int v = 0; v < MAX_V; v++) begin
        automatic int k = $urandom_range(0, N_DET - 1);
        vidx[v] = det_idx_t'(k);
        if ($urandom_range(0, 1) == 1) syn_in[k] = 1'b1;
      end
      for (int k = 0; k < 20; k++) syn_in[$urandom_range(0, N_DET - 1)] = 1'b1;
      @(negedge clk); load = 1;
      @(negedge clk); load = 0;
      model = syn_in;
      compare(r);
      for (int s = 0; s < 4; s++) begin
        kill = '0;
        for (int q = 0; q < 6; q++) kill[$urandom_range(0, MAX_V - 1)] = 1'b1;
        for (int v = 0; v < MAX_V; v++) if (kill[v]) model[vidx[v]] = 1'b0;
        kill_en = 1;
        @(negedge clk); kill_en = 0;
        compare(100 * r + s);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
