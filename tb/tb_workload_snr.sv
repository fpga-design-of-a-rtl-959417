// tb_workload_snr -- the decoding experiment of the paper's Tables 2-4.
//
// Packets of 250 random bits go through the full system (encoder, BPSK, AWGN
// channel, decoder) at Eb/N0 = 0.35, 1.35 and 2.35 dB with 7 iterations.  The
// decisions are sampled after every iteration (the a posteriori register holds
// decoder 2's LLRs at the end of each iteration), and the number of correctly
// decoded bits per iteration is printed like the paper's tables.  Checks: the
// decisions after iteration i equal the bit-exact reference decoder run for i
// iterations (first packet of each point), the 7-iteration decode takes
// 1 + 3040*14 = 42561 cycles, and after 7 iterations both 1.35 and 2.35 dB
// leave fewer errors than 0.35 dB (a single packet that stays stuck can make
// 2.35 dB look worse than 1.35 dB in a short run, so those two are not ordered).
// The Eb/N0 -> noise mapping (sigma^2 = 1/(2 R Eb/N0), R = 1/2) is this
// testbench's; the paper does not define its SNR values.
module tb_workload_snr;
  import turbo_pkg::*;
  import tb_ref_pkg::*;

  localparam int PKTS = 20;
  localparam int IT   = 7;

  logic clk = 0, rst_n = 0, start = 0;
  logic [NINFO-1:0] data_in, decoded;
  logic [3:0] n_iter;
  soft_t lc, noise_s, noise_p;
  logic noise_we;
  logic [AW-1:0] noise_waddr;
  logic busy, done;
  logic [4:0] pass_cnt;
  int checks = 0, failures = 0;

  turbo_system dut (.*);
  always #5 clk = ~clk;

  initial begin
    #100_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int correct [3][IT];
  int final_err [3];

  task automatic run(input int pt, input real ebn0, input bit with_ref);
    bit d [K];
    bit [1:0] xy [NP];
    longint ns [NP], np [NP], rs [NP], rp [NP];
    arr_t cs1, cp0, cs2, cp1, rllr;
    bit rdec [K];
    logic [NINFO-1:0] snap [IT];
    real sd;
    longint lcv;
    int cyc, it, mism;
    sd  = sigma_of(ebn0);
    lcv = to_fix(2.0 / (sd * sd));
    for (int j = 0; j < NP; j++) begin
      ns[j] = to_fix(gauss(sd)); np[j] = to_fix(gauss(sd));
      @(negedge clk);
      noise_we = 1; noise_waddr = AW'(j);
      noise_s = soft_t'(ns[j]); noise_p = soft_t'(np[j]);
    end
    @(negedge clk) noise_we = 0;
    for (int i = 0; i < K; i++) begin d[i] = $urandom_range(1, 0); data_in[i] = d[i]; end
    lc = soft_t'(lcv);
    n_iter = 4'(IT);
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    while (!dut.u_dec.busy) @(negedge clk);
    cyc = 1; it = 0;
    while (!done) begin
      @(negedge clk); cyc++;
      // after state13 of a decoder-2 pass the register holds that iteration's LLRs
      if (dut.u_dec.u_ctrl.state == 4'd14 && dut.u_dec.u_ctrl.sel2) begin
        snap[it] = decoded; it++;
      end
    end
    checks++;
    if (cyc != 1 + (12 * NS + 4) * 2 * IT || it != IT) begin
      failures++; $display("cycles %0d, iterations seen %0d", cyc, it);
    end
    for (int i = 0; i < IT; i++)
      for (int b = 0; b < K; b++) if (snap[i][b] == d[b]) correct[pt][i]++;
    for (int b = 0; b < K; b++) if (snap[IT-1][b] != d[b]) final_err[pt]++;
    if (with_ref) begin
      encode(d, xy);
      for (int j = 0; j < NP; j++) begin
        rs[j] = w20((xy[j][1] ? 1024 : -1024) + ns[j]);
        rp[j] = w20((xy[j][0] ? 1024 : -1024) + np[j]);
      end
      depuncture(rs, rp, cs1, cp0, cs2, cp1);
      for (int i = 1; i <= IT; i++) begin
        decode(cs1, cp0, cs2, cp1, lcv, i, rdec, rllr);
        mism = 0;
        for (int b = 0; b < K; b++) if (snap[i-1][b] != rdec[b]) mism++;
        checks++;
        if (mism != 0) begin failures++; $display("iteration %0d: %0d decisions differ", i, mism); end
      end
    end
    @(negedge clk);
  endtask

  real pts [3] = '{0.35, 1.35, 2.35};

  initial begin
    n_iter = 1; lc = 0; noise_we = 0; noise_waddr = 0; noise_s = 0; noise_p = 0; data_in = '0;
    foreach (correct[p, i]) correct[p][i] = 0;
    foreach (final_err[p]) final_err[p] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int p = 0; p < 3; p++)
      for (int k = 0; k < PKTS; k++) run(p, pts[p], k == 0);
    for (int p = 0; p < 3; p++) begin
      $display("Eb/N0 = %4.2f dB: bits decoded correctly per packet (mean of %0d packets)", pts[p], PKTS);
      for (int i = 0; i < IT; i++)
        $display("  iteration %0d : %6.1f", i + 1, real'(correct[p][i]) / PKTS);
    end
    checks++;
    if (final_err[2] >= final_err[0] || final_err[1] >= final_err[0]) begin
      failures++; $display("errors do not fall with Eb/N0: %0d %0d %0d", final_err[0], final_err[1], final_err[2]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
