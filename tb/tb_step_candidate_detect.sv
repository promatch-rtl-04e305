// tb_step_candidate_detect: all eight input combinations against the step
// table of the algorithm (one-hot output, written out as constants).
module tb_step_candidate_detect;
  logic a1, b1, ns, s1, s21, s22, s41, s42;
  int checks = 0, failures = 0;
  // expected {s1,s21,s22,s41,s42} indexed by {a1,b1,ns}
  logic [4:0] exp_tab [8] = '{
    5'b00001,  // a1=0 b1=0 ns=0 -> 4.2
    5'b00100,  // a1=0 b1=0 ns=1 -> 2.2
    5'b00010,  // a1=0 b1=1 ns=0 -> 4.1
    5'b01000,  // a1=0 b1=1 ns=1 -> 2.1
    5'b00010,  // a1=1 b1=0 ns=0 -> 4.1
    5'b01000,  // a1=1 b1=0 ns=1 -> 2.1
    5'b10000,  // a1=1 b1=1 ns=0 -> 1
    5'b10000   // a1=1 b1=1 ns=1 -> 1
  };

  step_candidate_detect dut (.deg_i_is1(a1), .deg_j_is1(b1), .no_singleton(ns),
                             .s1, .s21, .s22, .s41, .s42);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < 8; k++) begin
      {a1, b1, ns} = 3'(k);
      #1;
      checks++;
      if ({s1, s21, s22, s41, s42} !== exp_tab[k]) begin
        failures++;
        $display("FAIL in=%b out=%b exp=%b", 3'(k), {s1, s21, s22, s41, s42}, exp_tab[k]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
