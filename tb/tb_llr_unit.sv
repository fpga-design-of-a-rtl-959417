// tb_llr_unit -- random alpha_k, beta_{k+1} and branch metrics (within the
// spread a real decoder produces) against the reference LLR: max over the 8
// bit-1 transitions minus max over the 8 bit-0 transitions; checks the
// combinational value and the register loaded with en.
module tb_llr_unit;
  import turbo_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0, en = 0;
  metrics_t alpha, beta;
  soft_t g10, g12, llr, llr_comb;
  int checks = 0, failures = 0;

  llr_unit dut (.*);
  always #5 clk = ~clk;
  initial begin #1_000_000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    longint a [8], bt [8], b1, b0, c, r;
    bit h1, h0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      longint base_a, base_b;
      base_a = longint'($urandom); base_b = longint'($urandom);
      for (int m = 0; m < 8; m++) begin
        a[m]  = w20(base_a + $urandom_range(60000, 0));
        bt[m] = w20(base_b + $urandom_range(60000, 0));
        alpha[m*20 +: 20] = 20'(a[m]);
        beta[m*20 +: 20]  = 20'(bt[m]);
      end
      g10 = soft_t'($urandom_range(30000, 0) - 15000);
      g12 = soft_t'($urandom_range(30000, 0) - 15000);
      h1 = 0; h0 = 0; b1 = 0; b0 = 0;
      for (int m = 0; m < 8; m++)
        for (int u = 0; u < 2; u++) begin
          int x, y, n;
          rsc(m, u, 0, x, y, n);
          c = w20(a[m] + bt[n] + bm(m, u, g10, g12));
          if (u) begin b1 = h1 ? mx(b1, c) : c; h1 = 1; end
          else   begin b0 = h0 ? mx(b0, c) : c; h0 = 1; end
        end
      r = w20(b1 - b0);
      en = 1; #1;
      checks++; if (longint'(llr_comb) != r) begin failures++; $display("llr %0d ref %0d", llr_comb, r); end
      @(negedge clk); en = 0;
      checks++; if (longint'(llr) != r) begin failures++; $display("register"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
