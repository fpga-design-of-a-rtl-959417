// tb_alpha_unit -- 253 steps of random branch metrics; at every step the
// multiplexer output must equal the reference alpha_k (Eq. 4 initial values at
// k = 0) and the register must load the reference alpha_{k+1}, computed by
// exploring both inputs from every state of the reference code.
module tb_alpha_unit;
  import turbo_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0, en = 0, falfa = 0;
  soft_t g10 = 0, g12 = 0;
  metrics_t alpha_k, alpha_next;
  int checks = 0, failures = 0;
  longint a [8], an [8];
  bit seen [8];

  alpha_unit dut (.*);
  always #5 clk = ~clk;
  initial begin #1_000_000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int m = 0; m < 8; m++) a[m] = (m == 0) ? 0 : -250 * 1024;
    for (int k = 0; k < 253; k++) begin
      g10 = soft_t'($urandom_range(30000, 0) - 15000);
      g12 = soft_t'($urandom_range(30000, 0) - 15000);
      falfa = (k != 0);
      #1;
      for (int m = 0; m < 8; m++) seen[m] = 0;
      for (int m = 0; m < 8; m++)
        for (int u = 0; u < 2; u++) begin
          int x, y, n;
          longint v;
          rsc(m, u, 0, x, y, n);
          v = w20(a[m] + bm(m, u, g10, g12));
          an[n] = seen[n] ? mx(an[n], v) : v;
          seen[n] = 1;
        end
      for (int m = 0; m < 8; m++) begin
        checks++;
        if (longint'(soft_t'(alpha_k[m*20 +: 20])) != a[m] ||
            longint'(soft_t'(alpha_next[m*20 +: 20])) != an[m]) begin
          failures++; $display("k %0d state %0d", k, m);
        end
      end
      en = 1; @(negedge clk); en = 0;
      a = an;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
