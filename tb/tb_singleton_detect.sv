// tb_singleton_detect: exhaustive check of the singleton detector.
// For every combination of the two deg==1 flags and #dependent counts 0..6
// that can occur (if i has degree 1, i itself is one of j's dependents, so
// dep_j >= 1), the expected answer is "no node other than i and j is left with
// a degree-1 neighbour that disappears", i.e. the dependents of j other than i
// plus the dependents of i other than j number zero.
module tb_singleton_detect;
  import promatch_pkg::*;
  logic a1, b1, ns;
  cnt_t di, dj;
  int checks = 0, failures = 0;

  singleton_detect dut (.deg_i_is1(a1), .deg_j_is1(b1), .dep_i(di), .dep_j(dj), .no_singleton(ns));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int fa = 0; fa < 2; fa++)
      for (int fb = 0; fb < 2; fb++)
        for (int x = 0; x < 7; x++)
          for (int y = 0; y < 7; y++) begin
            automatic int others_of_j, others_of_i;
            automatic bit exp;
            if (fa == 1 && y == 0) continue;   // i of degree 1 is a dependent of j
            if (fb == 1 && x == 0) continue;
            a1 = fa[0]; b1 = fb[0]; di = cnt_t'(x); dj = cnt_t'(y);
            #1;
            others_of_j = y - fa;
            others_of_i = x - fb;
            exp = (others_of_j == 0) && (others_of_i == 0);
            checks++;
            if (ns !== exp) begin
              failures++;
              $display("FAIL a1=%0d b1=%0d dep_i=%0d dep_j=%0d ns=%0d exp=%0d", fa, fb, x, y, ns, exp);
            end
          end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
