// tb_matching_candidates_register: random offers against a reference that
// keeps, per step class, the first offer of lowest weight.
module tb_matching_candidates_register;
  import promatch_pkg::*;
  logic clk = 0, rst_n = 0, clear = 0, offer_valid = 0;
  logic s21, s22, s41, s42;
  vid_t a, b;
  weight_t w;
  cand_t cand [4];
  cand_t ref_c [4];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  matching_candidates_register dut (.clk, .rst_n, .clear, .offer_valid, .s21, .s22, .s41, .s42,
                                    .a, .b, .w, .cand);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare();
    for (int c = 0; c < 4; c++) begin
      checks++;
      if (cand[c].valid !== ref_c[c].valid ||
          (ref_c[c].valid && (cand[c].a !== ref_c[c].a || cand[c].b !== ref_c[c].b || cand[c].w !== ref_c[c].w))) begin
        failures++;
        $display("FAIL class %0d got v%0d %0d-%0d w%0d exp v%0d %0d-%0d w%0d", c,
                 cand[c].valid, cand[c].a, cand[c].b, cand[c].w,
                 ref_c[c].valid, ref_c[c].a, ref_c[c].b, ref_c[c].w);
      end
    end
  endtask

  initial begin
    {s21, s22, s41, s42} = '0; a = '0; b = '0; w = '0;
    for (int c = 0; c < 4; c++) ref_c[c] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int round = 0; round < 20; round++) begin
      @(negedge clk);
      clear = 1; offer_valid = 0;
      @(negedge clk);
      clear = 0;
      for (int c = 0; c < 4; c++) ref_c[c] = '0;
      for (int k = 0; k < 40; k++) begin
        automatic int cls;
        cls = $urandom_range(0, 4);           // 4 = no class
        offer_valid = ($urandom_range(0, 7) != 0);
        {s42, s41, s22, s21} = (cls < 4) ? 4'(1 << cls) : 4'b0;
        a = vid_t'($urandom); b = vid_t'($urandom); w = weight_t'($urandom_range(5, 40));
        if (offer_valid && cls < 4 && (!ref_c[cls].valid || w < ref_c[cls].w))
          ref_c[cls] = '{valid: 1'b1, a: a, b: b, w: w};
        @(negedge clk);
        compare();
      end
      offer_valid = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
