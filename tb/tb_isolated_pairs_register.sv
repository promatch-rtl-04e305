// tb_isolated_pairs_register: pushes random pairs, checks list and count,
// clears, and checks that pushes and idle cycles mix correctly.
module tb_isolated_pairs_register;
  import promatch_pkg::*;
  localparam int NP = MAX_V / 2;
  logic clk = 0, rst_n = 0, clear = 0, push = 0;
  vid_t a, b;
  weight_t w;
  vid_t pa [NP];
  vid_t pb [NP];
  weight_t pw [NP];
  logic [$clog2(NP+1)-1:0] count;
  vid_t ra [$];
  vid_t rb [$];
  weight_t rw [$];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  isolated_pairs_register dut (.clk, .rst_n, .clear, .push, .a, .b, .w,
                               .pair_a(pa), .pair_b(pb), .pair_w(pw), .count);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    a = '0; b = '0; w = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int round = 0; round < 10; round++) begin
      automatic int n;
      @(negedge clk); clear = 1;
      @(negedge clk); clear = 0;
      ra.delete(); rb.delete(); rw.delete();
      n = $urandom_range(0, NP);
      while (ra.size() < n) begin
        push = ($urandom_range(0, 2) != 0);
        a = vid_t'($urandom); b = vid_t'($urandom); w = weight_t'($urandom);
        if (push) begin ra.push_back(a); rb.push_back(b); rw.push_back(w); end
        @(negedge clk);
      end
      push = 0;
      @(negedge clk);
      checks++;
      if (int'(count) != n) begin failures++; $display("FAIL count %0d exp %0d", count, n); end
      for (int k = 0; k < n; k++) begin
        checks++;
        if (pa[k] !== ra[k] || pb[k] !== rb[k] || pw[k] !== rw[k]) begin
          failures++;
          $display("FAIL pair %0d got %0d-%0d/%0d exp %0d-%0d/%0d", k, pa[k], pb[k], pw[k], ra[k], rb[k], rw[k]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
