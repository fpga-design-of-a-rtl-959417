// tb_output_unit -- one pass through the output unit with random inputs:
// forward loop writes La + Lc*Cs, backward loop (k = 252..0) feeds random
// a posteriori LLRs; the extrinsic value must be L - (La + Lc*Cs) (Eq. 6).
// Afterwards the a priori output is read for every k with selsiso = 0
// (interleaved: ext[pi(k)]) and 1 (deinterleaved: ext[pi_inv(k)]), 0 on the
// tail steps, and the 250 decisions must be sign(L[pi_inv(i)]).  Finally clr
// must empty the extrinsic register.
module tb_output_unit;
  import turbo_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  ctrl_t ctrl;
  soft_t lc, cs, la_cap, llr, la, ext;
  logic [NINFO-1:0] decoded;
  int checks = 0, failures = 0;
  int pi [K], pinv [K];

  output_unit dut (.*);
  always #5 clk = ~clk;
  initial begin #5_000_000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    arr_t rla, rcs, rllr, rext;
    longint rlc, expv;
    int bad;
    make_pi(pi, pinv);
    ctrl = '0; lc = 0; cs = 0; la_cap = 0; llr = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 2; rep++) begin
      @(negedge clk); ctrl = '0; ctrl.clr = 1; @(negedge clk); ctrl.clr = 0;
      rlc = $urandom_range(6000, 1000);
      lc = soft_t'(rlc);
      for (int k = 0; k < NS; k++) begin
        rla[k] = longint'($urandom_range(30000, 0)) - 15000;
        rcs[k] = longint'($urandom_range(5000, 0)) - 2500;
        rllr[k] = longint'($urandom_range(60000, 0)) - 30000;
        rext[k] = w20(rllr[k] - w20(rla[k] + mulq(rcs[k], rlc)));
        ctrl.k = AW'(k); cs = soft_t'(rcs[k]); la_cap = soft_t'(rla[k]);
        ctrl.wr1 = 1; @(negedge clk); ctrl.wr1 = 0;
      end
      for (int j = 0; j < NS; j++) begin
        int k;
        k = NS - 1 - j;
        ctrl.k = AW'(k);
        ctrl.rd = 1; @(negedge clk); ctrl.rd = 0;
        ctrl.en6 = 1; @(negedge clk); ctrl.en6 = 0;
        llr = soft_t'(rllr[k]);
        #1;
        checks++;
        if (longint'(ext) != rext[k]) begin failures++; $display("ext k=%0d %0d ref %0d", k, ext, rext[k]); end
        ctrl.en7 = 1; ctrl.en8 = 1; @(negedge clk); ctrl.en7 = 0; ctrl.en8 = 0;
      end
      bad = 0;
      for (int s = 0; s < 2; s++)
        for (int k = 0; k < NS; k++) begin
          ctrl.selsiso = 1'(s); ctrl.k = AW'(k); #1;
          expv = (k >= K) ? 0 : (s ? rext[pinv[k]] : rext[pi[k]]);
          checks++;
          if (longint'(la) != expv) bad++;
        end
      if (bad != 0) begin failures += bad; $display("%0d a priori words wrong", bad); end
      bad = 0;
      for (int i = 0; i < K; i++) begin
        checks++;
        if (decoded[i] != (rllr[pinv[i]] >= 0)) bad++;
      end
      if (bad != 0) begin failures += bad; $display("%0d decisions wrong", bad); end
    end
    @(negedge clk); ctrl = '0; ctrl.clr = 1; @(negedge clk); ctrl.clr = 0;
    bad = 0;
    for (int k = 0; k < NS; k++) begin
      ctrl.k = AW'(k); ctrl.selsiso = 1'(k % 2); #1;
      checks++;
      if (la != 0) bad++;
    end
    if (bad != 0) begin failures += bad; $display("clr left %0d words", bad); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
