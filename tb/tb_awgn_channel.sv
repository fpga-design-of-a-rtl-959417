// tb_awgn_channel -- loads random noise words, sends 256 random +-1.0 pairs
// (with gaps in in_valid) and checks each output against input + noise word k
// (20-bit wrap), the one-cycle valid latency, and that clear restarts at word 0.
module tb_awgn_channel;
  import turbo_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0, noise_we = 0, clear = 0, in_valid = 0, c_valid;
  logic [7:0] noise_waddr = 0;
  soft_t noise_s = 0, noise_p = 0, xs = 0, yp = 0, cs, cp;
  int checks = 0, failures = 0;
  longint ns [256], np [256];

  awgn_channel dut (.*);
  always #5 clk = ~clk;
  initial begin #1_000_000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    longint ex, ep;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int j = 0; j < 256; j++) begin
      ns[j] = w20(longint'($urandom)); np[j] = w20(longint'($urandom));
      noise_we = 1; noise_waddr = 8'(j); noise_s = soft_t'(ns[j]); noise_p = soft_t'(np[j]);
      @(negedge clk);
    end
    noise_we = 0;
    for (int rep = 0; rep < 2; rep++) begin
      clear = 1; @(negedge clk); clear = 0;
      for (int j = 0; j < 256; j++) begin
        if ($urandom_range(3, 0) == 0) begin in_valid = 0; @(negedge clk); end
        in_valid = 1;
        xs = $urandom_range(1, 0) ? SOFT_P1 : SOFT_M1;
        yp = $urandom_range(1, 0) ? SOFT_P1 : SOFT_M1;
        ex = w20(longint'(xs) + ns[j]); ep = w20(longint'(yp) + np[j]);
        @(negedge clk);
        in_valid = 0;
        checks++;
        if (!c_valid || longint'(cs) != ex || longint'(cp) != ep) begin
          failures++; $display("pair %0d: %h %h expected %h %h", j, cs, cp, ex[19:0], ep[19:0]);
        end
      end
      @(negedge clk);
      checks++; if (c_valid) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
