// tb_path_table: writes random cells, reads them back one cycle later, and
// checks that writes to one cell leave its neighbours untouched.
module tb_path_table;
  import promatch_pkg::*;
  logic clk = 0, wr_en = 0, rd_en = 0;
  det_idx_t wr_i, wr_j, rd_i, rd_j;
  pcat_t wr_data, rd_data;
  pcat_t model [int];
  int keys [$];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  path_table dut (.clk, .wr_en, .wr_i, .wr_j, .wr_data, .rd_en, .rd_i, .rd_j, .rd_data);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_i = '0; wr_j = '0; wr_data = '0; rd_i = '0; rd_j = '0;
    for (int n = 0; n < 3000; n++) begin
      automatic int i = $urandom_range(0, N_DET - 1), j = $urandom_range(0, N_DET - 1);
      automatic int key = i * N_DET + j;
      @(negedge clk);
      wr_en = 1; wr_i = det_idx_t'(i); wr_j = det_idx_t'(j); wr_data = pcat_t'($urandom);
      if (!model.exists(key)) keys.push_back(key);
      model[key] = wr_data;
    end
    @(negedge clk); wr_en = 0;
    keys.shuffle();
    foreach (keys[k]) begin
      rd_en = 1; rd_i = det_idx_t'(keys[k] / N_DET); rd_j = det_idx_t'(keys[k] % N_DET);
      @(negedge clk);
      checks++;
      if (rd_data !== model[keys[k]]) begin
        failures++; $display("FAIL cell %0d,%0d got %0d exp %0d", rd_i, rd_j, rd_data, model[keys[k]]);
      end
    end
    rd_en = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
