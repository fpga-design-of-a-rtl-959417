// tb_bpsk_demodulator -- the four XY combinations map to the printed constants:
// bit 1 -> 00400 (+1.0), bit 0 -> FFC00 (-1.0).
module tb_bpsk_demodulator;
  import turbo_pkg::*;
  logic [1:0] xy;
  soft_t xs, yp;
  int checks = 0, failures = 0;
  bpsk_demodulator dut (.*);
  initial begin
    for (int v = 0; v < 4; v++) begin
      xy = 2'(v); #1;
      checks++;
      if (xs != (v[1] ? 20'h00400 : 20'hFFC00) || yp != (v[0] ? 20'h00400 : 20'hFFC00)) begin
        failures++; $display("xy=%b -> %h %h", xy, xs, yp);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1_000_000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
