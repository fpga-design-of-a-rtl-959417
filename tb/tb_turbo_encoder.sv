// tb_turbo_encoder -- random packets through the turbo encoder; the 256 XY
// pairs must equal the reference encoder (puncturing and both tails), arrive
// on 256 consecutive cycles starting two cycles after start, and done must
// pulse with the last pair.
module tb_turbo_encoder;
  import turbo_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0, start = 0;
  logic [NINFO-1:0] data_in;
  logic [1:0] xy;
  logic xy_valid, done, busy;
  int checks = 0, failures = 0;

  turbo_encoder dut (.*);
  always #5 clk = ~clk;
  initial begin #1_000_000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    bit d [K];
    bit [1:0] ref_xy [NP];
    int n, cyc, first;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int p = 0; p < 4; p++) begin
      for (int i = 0; i < K; i++) begin d[i] = $urandom_range(1, 0); data_in[i] = d[i]; end
      encode(d, ref_xy);
      @(negedge clk) start = 1;
      @(negedge clk) start = 0;
      n = 0; cyc = 1; first = -1;
      while (n < NP && cyc < 400) begin
        if (xy_valid) begin
          if (first < 0) first = cyc;
          checks++;
          if (xy != ref_xy[n]) begin failures++; $display("pair %0d: %b ref %b", n, xy, ref_xy[n]); end
          if (n == NP - 1) begin checks++; if (!done) begin failures++; $display("no done"); end end
          n++;
        end
        @(negedge clk); cyc++;
      end
      checks++; if (first != 2 || n != NP || cyc != NP + 2) begin
        failures++; $display("timing: first %0d count %0d end %0d", first, n, cyc);
      end
      checks++; if (busy) begin failures++; $display("busy after packet"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
