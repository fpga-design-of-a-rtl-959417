// tb_turbo_decoder -- self-checking test of the single-SISO turbo decoder.
//
// Random 250-bit packets are turbo encoded, BPSK mapped and corrupted with
// Gaussian noise by the reference models; the testbench plays the input memory
// (one-cycle read latency) and runs the decoder for several iteration counts
// and Eb/N0 values.  Checks, per run: the decisions equal those of the bit-exact
// reference decoder; the 253 a posteriori LLRs of the last pass equal the
// reference; the decode takes 1 + (12*253 + 4)*2n cycles (Eq. 16); at a good
// Eb/N0 the packet is decoded without error; done pulses once.
module tb_turbo_decoder;
  import turbo_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0, start = 0;
  logic [3:0] n_iter;
  soft_t lc, cs, cp;
  logic in_rd, in_sel, busy, done;
  logic [AW-1:0] in_k;
  logic [4:0] pass_cnt;
  logic [NINFO-1:0] decoded;
  int checks = 0, failures = 0;

  arr_t cs1, cp0, cs2, cp1;

  turbo_decoder dut (.*);

  always #5 clk = ~clk;

  // input memory model
  always_ff @(posedge clk) begin
    if (in_rd) begin
      cs <= soft_t'(in_sel ? cs2[in_k] : cs1[in_k]);
      cp <= soft_t'(in_sel ? cp1[in_k] : cp0[in_k]);
    end
  end

  initial begin
    #20_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input real ebn0, input int iters, input bit expect_clean);
    bit d [K];
    bit [1:0] xy [NP];
    longint rs [NP], rp [NP];
    bit rdec [K];
    arr_t rllr;
    real sd;
    longint lcv;
    int cyc, errs, mism, ndone;
    sd  = sigma_of(ebn0);
    lcv = to_fix(2.0 / (sd * sd));
    for (int i = 0; i < K; i++) d[i] = $urandom_range(1, 0);
    encode(d, xy);
    for (int j = 0; j < NP; j++) begin
      rs[j] = w20((xy[j][1] ? 1024 : -1024) + to_fix(gauss(sd)));
      rp[j] = w20((xy[j][0] ? 1024 : -1024) + to_fix(gauss(sd)));
    end
    depuncture(rs, rp, cs1, cp0, cs2, cp1);
    decode(cs1, cp0, cs2, cp1, lcv, iters, rdec, rllr);

    lc = soft_t'(lcv);
    n_iter = 4'(iters);
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    cyc = 1; ndone = 0;
    while (!done) begin @(negedge clk); cyc++; end
    ndone++;
    // cycle count: start edge .. done edge, Eq. 16
    checks++;
    if (cyc != 1 + (12 * NS + 4) * 2 * iters) begin
      failures++;
      $display("cycle count %0d, expected %0d", cyc, 1 + (12 * NS + 4) * 2 * iters);
    end
    @(negedge clk);
    checks++;
    if (done || busy) begin failures++; $display("done/busy not released"); end
    // a posteriori LLRs of the last pass
    mism = 0;
    for (int k = 0; k < NS; k++)
      if (longint'(soft_t'(dut.u_out.app_sr[k*SW +: SW])) != rllr[k]) mism++;
    checks++;
    if (mism != 0) begin failures++; $display("%0d LLRs differ from reference", mism); end
    // decisions
    mism = 0; errs = 0;
    for (int i = 0; i < K; i++) begin
      if (decoded[i] != rdec[i]) mism++;
      if (decoded[i] != d[i]) errs++;
    end
    checks++;
    if (mism != 0) begin failures++; $display("%0d decisions differ from reference", mism); end
    if (expect_clean) begin
      checks++;
      if (errs != 0) begin failures++; $display("%0d bit errors at %f dB", errs, ebn0); end
    end
    $display("Eb/N0 %4.2f dB, %0d iterations: %0d cycles, %0d of 250 bits correct",
             ebn0, iters, cyc, K - errs);
  endtask

  initial begin
    n_iter = 1; lc = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    run(4.0, 1, 1);
    run(2.35, 1, 0);
    run(1.35, 4, 0);
    run(0.35, 2, 0);
    run(3.0, 3, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
