// tb_siso_decoder -- drives the SISO with the control sequence of one pass
// (forward loop: branch registers, memory writes, alpha register; backward
// loop: memory reads, LLR register, beta register) for random channel values,
// a priori LLRs and Lc, and compares all 253 LLRs with the reference
// Max-Log-MAP SISO.  The branch memories read back must hold the reference
// branch metrics.  Several packets, including a priori values of zero.
module tb_siso_decoder;
  import turbo_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  ctrl_t ctrl;
  soft_t la, lc, cs, cp, llr, g1_mem, g2_mem;
  int checks = 0, failures = 0;

  siso_decoder dut (.*);
  always #5 clk = ~clk;
  initial begin #5_000_000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic pass(input bit zero_la);
    arr_t rla, rcs, rcp, rllr;
    longint rlc;
    rlc = $urandom_range(6000, 1000);
    for (int k = 0; k < NS; k++) begin
      rla[k] = zero_la ? 0 : longint'($urandom_range(30000, 0)) - 15000;
      rcs[k] = longint'($urandom_range(5000, 0)) - 2500;
      rcp[k] = ($urandom_range(2, 0) == 0) ? 0 : longint'($urandom_range(5000, 0)) - 2500;
    end
    siso(rla, rcs, rcp, rlc, rllr);
    lc = soft_t'(rlc);
    for (int k = 0; k < NS; k++) begin
      ctrl = '0; ctrl.k = AW'(k); ctrl.falfa = (k != 0);
      la = soft_t'(rla[k]); cs = soft_t'(rcs[k]); cp = soft_t'(rcp[k]);
      ctrl.en1 = 1; @(negedge clk); ctrl.en1 = 0;
      ctrl.wr1 = 1; ctrl.wr2 = 1; @(negedge clk); ctrl.wr1 = 0; ctrl.wr2 = 0;
      ctrl.en2 = 1; @(negedge clk); ctrl.en2 = 0;
    end
    for (int j = 0; j < NS; j++) begin
      int k;
      k = NS - 1 - j;
      ctrl = '0; ctrl.k = AW'(k); ctrl.fbeta = (j != 0);
      ctrl.rd = 1; @(negedge clk); ctrl.rd = 0;
      checks++;
      if (longint'(g1_mem) != branch(0, 1, rla[k], rlc, rcs[k], rcp[k]) ||
          longint'(g2_mem) != branch(2, 1, rla[k], rlc, rcs[k], rcp[k])) begin
        failures++; $display("branch memory k=%0d", k);
      end
      ctrl.en5 = 1; @(negedge clk); ctrl.en5 = 0;
      checks++;
      if (longint'(llr) != rllr[k]) begin failures++; $display("k=%0d llr %0d ref %0d", k, llr, rllr[k]); end
      ctrl.en4 = 1; @(negedge clk); ctrl.en4 = 0;
    end
  endtask

  initial begin
    ctrl = '0; la = 0; lc = 0; cs = 0; cp = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    pass(1);
    pass(0);
    pass(0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
