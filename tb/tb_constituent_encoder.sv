// tb_constituent_encoder -- random information bits against the reference RSC
// step (outputs and next state every cycle); three tail steps from random
// states must return the encoder to state 0 with the reference tail outputs.
module tb_constituent_encoder;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0, en = 0, tail = 0, u = 0, x, y0;
  logic [2:0] state;
  int checks = 0, failures = 0;
  int st, rx, ry, nst;

  constituent_encoder dut (.*);
  always #5 clk = ~clk;

  initial begin #1_000_000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    checks++; if (state != 0) failures++;
    st = 0;
    for (int blk = 0; blk < 20; blk++) begin
      for (int i = 0; i < 30; i++) begin
        en = 1; tail = 0; u = 1'($urandom_range(1, 0));
        #1; rsc(st, u, 0, rx, ry, nst);
        checks++; if (x != rx || y0 != ry) begin failures++; $display("out mismatch st=%0d", st); end
        @(negedge clk); st = nst;
        checks++; if (state != 3'(st)) begin failures++; $display("state mismatch"); end
      end
      for (int t = 0; t < 3; t++) begin
        en = 1; tail = 1; u = 1'($urandom_range(1, 0));
        #1; rsc(st, 0, 1, rx, ry, nst);
        checks++; if (x != rx || y0 != ry) begin failures++; $display("tail out mismatch"); end
        @(negedge clk); st = nst;
      end
      checks++; if (state != 0) begin failures++; $display("not terminated"); end
      en = 0; tail = 0;
      @(negedge clk);
      checks++; if (state != 0) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
