// tb_control_unit -- runs decodes of 1, 2 and 3 iterations and checks the
// controller cycle by cycle against the paper's loop structure: total cycles
// 1 + (12*253 + 4)*2n (Eq. 16), per pass 253 input reads with k = 0..252 in
// order, 253 LLR/beta steps with k = 252..0, exactly one step per pass with the
// alpha and beta initial values, decoder 1 and decoder 2 passes alternating,
// the extrinsic register cleared only at start, and one done pulse.
module tb_control_unit;
  import turbo_pkg::*;
  logic clk = 0, rst_n = 0, start = 0;
  logic [3:0] n_iter = 1;
  ctrl_t ctrl;
  logic busy, done;
  logic [4:0] pass_cnt;
  int checks = 0, failures = 0;

  control_unit dut (.*);
  always #5 clk = ~clk;
  initial begin #5_000_000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic run(input int n);
    int cyc, reads, ens, en4s, f0, b0, clrs, dones, pass, exp_k, exp_b, bad_k, bad_sel;
    n_iter = 4'(n);
    @(negedge clk) start = 1;
    #1 clrs = ctrl.clr;
    @(negedge clk) start = 0;
    cyc = 1; reads = 0; ens = 0; en4s = 0; f0 = 0; b0 = 0; dones = 0; pass = 0;
    exp_k = 0; exp_b = 252; bad_k = 0; bad_sel = 0;
    while (busy) begin
      if (ctrl.clr) clrs++;
      if (ctrl.in_rd) begin
        if (int'(ctrl.k) != exp_k) bad_k++;
        if (ctrl.selsiso != (pass % 2 == 0)) bad_sel++;
        reads++; exp_k++;
      end
      if (ctrl.en2 && !ctrl.falfa) f0++;
      if (ctrl.en5) begin
        if (int'(ctrl.k) != exp_b) bad_k++;
        ens++; exp_b--;
      end
      if (ctrl.en4) begin
        en4s++;
        if (!ctrl.fbeta) b0++;
        if (exp_b < 0) begin pass++; exp_k = 0; exp_b = 252; end
      end
      if (done) dones++;
      @(negedge clk); cyc++;
    end
    if (done) dones++;                   // done is high in the first idle cycle
    chk(cyc == 1 + (12 * 253 + 4) * 2 * n, $sformatf("cycles %0d for n=%0d", cyc, n));
    chk(reads == 253 * 2 * n, $sformatf("input reads %0d", reads));
    chk(ens == 253 * 2 * n && en4s == 253 * 2 * n, "LLR / beta steps");
    chk(f0 == 2 * n && b0 == 2 * n, $sformatf("initial-value steps %0d %0d", f0, b0));
    chk(bad_k == 0, $sformatf("%0d wrong step addresses", bad_k));
    chk(bad_sel == 0, "decoder 1 / decoder 2 alternation");
    chk(clrs == 1, "clear only at start");
    chk(dones == 1 && pass_cnt == 5'(2 * n), "done pulse / pass count");
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    chk(!busy, "idle after reset");
    run(1);
    chk(6081 == 1 + (12 * 253 + 4) * 2, "paper's 6081 cycles");
    run(2);
    run(3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
