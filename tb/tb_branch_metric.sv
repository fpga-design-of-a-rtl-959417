// tb_branch_metric -- random inputs against the reference branch metric:
// gamma(1,0) is the metric of input 1 with equal parity, gamma(1,2) with the
// opposite parity (state 0 and state 2 of the reference trellis).  Includes a
// hand-worked case: La=0, Lc=2.0, Cs=1.0, Cp=1.0 gives gamma(1,0)=2.0, gamma(1,2)=0.
module tb_branch_metric;
  import turbo_pkg::*;
  import tb_ref_pkg::*;
  soft_t la, lc, cs, cp, g10, g12;
  int checks = 0, failures = 0;
  branch_metric dut (.*);
  initial begin
    la = 0; lc = 20'sd2048; cs = 20'sd1024; cp = 20'sd1024; #1;
    checks++; if (g10 != 20'sd2048 || g12 != 0) begin failures++; $display("worked case %h %h", g10, g12); end
    for (int i = 0; i < 5000; i++) begin
      la = soft_t'($urandom_range(40000, 0) - 20000);
      lc = soft_t'($urandom_range(12000, 0));
      cs = soft_t'($urandom_range(8000, 0) - 4000);
      cp = soft_t'($urandom_range(8000, 0) - 4000);
      #1;
      checks++;
      if (longint'(g10) != branch(0, 1, la, lc, cs, cp) || longint'(g12) != branch(2, 1, la, lc, cs, cp)) begin
        failures++; $display("la %0d lc %0d cs %0d cp %0d -> %0d %0d", la, lc, cs, cp, g10, g12);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1_000_000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
