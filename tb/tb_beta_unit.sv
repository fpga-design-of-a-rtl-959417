// tb_beta_unit -- 253 backward steps of random branch metrics; beta_k1 must be
// the Eq. 5 initial values at the first step and the reference beta_{k+1}
// afterwards, and beta_k the reference max over both inputs of every state.
module tb_beta_unit;
  import turbo_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0, en = 0, fbeta = 0;
  soft_t g10 = 0, g12 = 0;
  metrics_t beta_k1, beta_k;
  int checks = 0, failures = 0;
  longint b [8], bn [8];

  beta_unit dut (.*);
  always #5 clk = ~clk;
  initial begin #1_000_000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int m = 0; m < 8; m++) b[m] = (m == 0) ? 0 : -250 * 1024;
    for (int j = 0; j < 253; j++) begin
      g10 = soft_t'($urandom_range(30000, 0) - 15000);
      g12 = soft_t'($urandom_range(30000, 0) - 15000);
      fbeta = (j != 0);
      #1;
      for (int m = 0; m < 8; m++) begin
        longint v [2];
        for (int u = 0; u < 2; u++) begin
          int x, y, n;
          rsc(m, u, 0, x, y, n);
          v[u] = w20(b[n] + bm(m, u, g10, g12));
        end
        bn[m] = mx(v[1], v[0]);
      end
      for (int m = 0; m < 8; m++) begin
        checks++;
        if (longint'(soft_t'(beta_k1[m*20 +: 20])) != b[m] ||
            longint'(soft_t'(beta_k[m*20 +: 20])) != bn[m]) begin
          failures++; $display("step %0d state %0d", j, m);
        end
      end
      en = 1; @(negedge clk); en = 0;
      b = bn;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
