// tb_acs_cell -- random metrics and branch values against max(m1+g, m2-g)
// with the wrap-safe comparison, plus a case whose sum wraps past +2**19.
module tb_acs_cell;
  import turbo_pkg::*;
  import tb_ref_pkg::*;
  soft_t m1, m2, g, out;
  int checks = 0, failures = 0;
  acs_cell dut (.*);
  initial begin
    m1 = 20'sh7FF00; g = 20'sh00200; m2 = 20'sh7FE00; #1;   // m1+g wraps negative but is larger
    checks++; if (out != 20'sh80100) begin failures++; $display("wrap case %h", out); end
    for (int i = 0; i < 5000; i++) begin
      m1 = soft_t'($urandom); m2 = soft_t'(longint'(m1) + $urandom_range(200000, 0) - 100000);
      g = soft_t'($urandom_range(40000, 0) - 20000);
      #1;
      checks++;
      if (longint'(out) != mx(w20(longint'(m1) + g), w20(longint'(m2) - g))) begin
        failures++; $display("%h %h %h -> %h", m1, m2, g, out);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1_000_000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
