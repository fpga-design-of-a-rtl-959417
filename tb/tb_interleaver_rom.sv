// tb_interleaver_rom -- for random 250-bit words and every address k, the
// multiplexer must output data[pi(k)] and the ROM word pi(k) of the reference
// permutation.
module tb_interleaver_rom;
  import turbo_pkg::*;
  import tb_ref_pkg::*;
  logic [AW-1:0] addr, rom_addr;
  logic [NINFO-1:0] data;
  logic bit_out;
  int checks = 0, failures = 0;
  int pi [K], pinv [K];

  interleaver_rom dut (.*);

  initial begin
    make_pi(pi, pinv);
    for (int r = 0; r < 8; r++) begin
      for (int w = 0; w < NINFO; w += 32) data[w +: 32] = $urandom;
      for (int k = 0; k < K; k++) begin
        addr = AW'(k); #1;
        checks++;
        if (rom_addr != AW'(pi[k]) || bit_out != data[pi[k]]) begin
          failures++; $display("k=%0d rom=%0d ref=%0d", k, rom_addr, pi[k]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1_000_000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
