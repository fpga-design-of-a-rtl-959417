// tb_channel_buffer -- writes 256 random received pairs and reads every step
// k of both decoders; the values must equal the reference depuncturing and
// systematic interleaving.  Also checks count_full and the one-cycle read.
module tb_channel_buffer;
  import turbo_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0, clear = 0, in_valid = 0, count_full, rd_en = 0, rd_sel = 0;
  logic [AW-1:0] rd_k = 0;
  soft_t in_cs = 0, in_cp = 0, cs, cp;
  int checks = 0, failures = 0;

  channel_buffer dut (.*);
  always #5 clk = ~clk;
  initial begin #1_000_000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    longint rs [NP], rp [NP];
    arr_t cs1, cp0, cs2, cp1;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 2; rep++) begin
      clear = 1; @(negedge clk); clear = 0;
      for (int j = 0; j < NP; j++) begin
        rs[j] = w20(longint'($urandom)); rp[j] = w20(longint'($urandom));
        checks++; if (count_full) begin failures++; $display("full too early"); end
        in_valid = 1; in_cs = soft_t'(rs[j]); in_cp = soft_t'(rp[j]);
        @(negedge clk);
      end
      in_valid = 0;
      checks++; if (!count_full) begin failures++; $display("not full"); end
      depuncture(rs, rp, cs1, cp0, cs2, cp1);
      for (int s = 0; s < 2; s++)
        for (int k = 0; k < NS; k++) begin
          rd_en = 1; rd_k = AW'(k); rd_sel = 1'(s);
          @(negedge clk); rd_en = 0;
          checks++;
          if (longint'(cs) != (s ? cs2[k] : cs1[k]) || longint'(cp) != (s ? cp1[k] : cp0[k])) begin
            failures++; $display("sel %0d k %0d: %h %h", s, k, cs, cp);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
