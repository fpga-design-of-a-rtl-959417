// tb_turbo_pkg -- checks the shared package: the interleaver table is a
// permutation of 0..249 equal to the reference construction, PI_INV is its
// inverse, the boundary metrics are the printed C1800 x7, 00000, the soft
// constants are 00400/FFC00, and the wrap-safe comparator orders values that
// straddle the 20-bit wrap point correctly.
module tb_turbo_pkg;
  import turbo_pkg::*;
  import tb_ref_pkg::*;
  int checks = 0, failures = 0;
  int pi [K], pinv [K];
  bit seen [K];

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    make_pi(pi, pinv);
    foreach (seen[i]) seen[i] = 0;
    for (int k = 0; k < K; k++) begin
      int p;
      p = int'(PI[k*AW +: AW]);
      chk(p < K && !seen[p], $sformatf("PI[%0d]=%0d repeated or out of range", k, p));
      if (p < K) seen[p] = 1;
      chk(p == pi[k], $sformatf("PI[%0d]=%0d, reference %0d", k, p, pi[k]));
      chk(int'(PI_INV[p*AW +: AW]) == k, $sformatf("PI_INV wrong at %0d", p));
    end
    chk(METRIC_INIT == 160'hC1800_C1800_C1800_C1800_C1800_C1800_C1800_00000, "METRIC_INIT");
    chk(SOFT_P1 == 20'h00400 && SOFT_M1 == 20'hFFC00 && SOFT_NEG == 20'hC1800, "constants");
    chk(greater(20'sh7FFF0, 20'sh7FF00), "greater plain");
    chk(!greater(20'sh00010, 20'sh00020), "greater plain false");
    chk(greater(20'sh80010, 20'sh7FFF0), "greater across wrap");   // 7FFF0 + 0x20 wraps
    chk(smax(20'sh80010, 20'sh7FFF0) == 20'sh80010, "smax across wrap");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1_000_000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
