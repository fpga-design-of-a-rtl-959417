// tb_turbo_system -- end-to-end test of encoder, channel and decoder at full size.
//
// For each run the testbench loads Gaussian noise words into the channel RAM,
// starts the system with a random 250-bit packet and waits for done.  It checks
// the decoded bits against the bit-exact reference chain (reference encoder,
// the same noise, reference decoder), the decoder's cycle budget (Eq. 16), and
// error-free decoding at a good Eb/N0.  It also counts how often each
// mechanism of the design was exercised and fails if one never was:
// data pairs through selector port 0 and port 1 (puncturing), tail pairs of
// both encoders, punctured parities served as zero by the receive buffer,
// interleaved systematic reads, the alpha and beta initial values, decoder-1
// and decoder-2 passes (deinterleaved and interleaved a priori), nonzero
// a priori values, more than one iteration, and both decision values.
module tb_turbo_system;
  import turbo_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0, start = 0;
  logic [NINFO-1:0] data_in, decoded;
  logic [3:0] n_iter;
  soft_t lc, noise_s, noise_p;
  logic noise_we;
  logic [AW-1:0] noise_waddr;
  logic busy, done;
  logic [4:0] pass_cnt;
  int checks = 0, failures = 0;
  int c_sel0, c_sel1, c_tail1, c_tail2, c_pzero, c_s2, c_falfa0, c_fbeta0;
  int c_dec1, c_dec2, c_la_nz, c_multi, c_one, c_zero;

  turbo_system dut (.*);

  always #5 clk = ~clk;

  initial begin
    #50_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // mechanism counters
  always @(posedge clk) if (rst_n) begin
    if (dut.u_enc.phase == 2'd1 && !dut.u_enc.selector) c_sel0++;
    if (dut.u_enc.phase == 2'd1 &&  dut.u_enc.selector) c_sel1++;
    if (dut.u_enc.tail1) c_tail1++;
    if (dut.u_enc.tail2) c_tail2++;
    if (dut.u_buf.rd_en && dut.u_buf.p_zero) c_pzero++;
    if (dut.u_buf.rd_en && dut.u_buf.rd_sel && !dut.u_buf.is_tail) c_s2++;
    if (dut.u_dec.ctrl.en2 && !dut.u_dec.ctrl.falfa) c_falfa0++;
    if (dut.u_dec.ctrl.en4 && !dut.u_dec.ctrl.fbeta) c_fbeta0++;
    if (dut.u_dec.ctrl.cap &&  dut.u_dec.ctrl.selsiso) c_dec1++;
    if (dut.u_dec.ctrl.cap && !dut.u_dec.ctrl.selsiso) c_dec2++;
    if (dut.u_dec.ctrl.cap && dut.u_dec.la != 0) c_la_nz++;
  end

  task automatic run(input real ebn0, input int iters, input bit expect_clean);
    bit d [K];
    bit [1:0] xy [NP];
    longint ns [NP], np [NP], rs [NP], rp [NP];
    arr_t cs1, cp0, cs2, cp1, rllr;
    bit rdec [K];
    real sd;
    longint lcv;
    int cyc, mism, errs;
    sd  = sigma_of(ebn0);
    lcv = to_fix(2.0 / (sd * sd));
    for (int j = 0; j < NP; j++) begin
      ns[j] = to_fix(gauss(sd));
      np[j] = to_fix(gauss(sd));
      @(negedge clk);
      noise_we = 1; noise_waddr = AW'(j);
      noise_s = soft_t'(ns[j]); noise_p = soft_t'(np[j]);
    end
    @(negedge clk) noise_we = 0;
    for (int i = 0; i < K; i++) begin
      d[i] = $urandom_range(1, 0);
      data_in[i] = d[i];
    end
    encode(d, xy);
    for (int j = 0; j < NP; j++) begin
      rs[j] = w20((xy[j][1] ? 1024 : -1024) + ns[j]);
      rp[j] = w20((xy[j][0] ? 1024 : -1024) + np[j]);
    end
    depuncture(rs, rp, cs1, cp0, cs2, cp1);
    decode(cs1, cp0, cs2, cp1, lcv, iters, rdec, rllr);

    lc = soft_t'(lcv);
    n_iter = 4'(iters);
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    cyc = 0;
    while (!dut.u_dec.busy) begin @(negedge clk); cyc++; end
    checks++;                               // encode + transport latency
    if (cyc != 2 + NP + 1) begin failures++; $display("send latency %0d", cyc); end
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc != 1 + (12 * NS + 4) * 2 * iters) begin   // Eq. 16
      failures++; $display("decode cycles %0d", cyc);
    end
    mism = 0; errs = 0;
    for (int i = 0; i < K; i++) begin
      if (decoded[i] != rdec[i]) mism++;
      if (decoded[i] != d[i]) errs++;
      if (decoded[i]) c_one++; else c_zero++;
    end
    checks++;
    if (mism != 0) begin failures++; $display("%0d decisions differ from reference", mism); end
    if (expect_clean) begin
      checks++;
      if (errs != 0) begin failures++; $display("%0d bit errors at %f dB", errs, ebn0); end
    end
    if (iters > 1) c_multi++;
    $display("Eb/N0 %4.2f dB, %0d iterations: %0d of 250 bits correct", ebn0, iters, K - errs);
    @(negedge clk);
  endtask

  task automatic need(input string what, input int n);
    checks++;
    if (n == 0) begin failures++; $display("mechanism never exercised: %s", what); end
    else $display("  %-34s %0d", what, n);
  endtask

  initial begin
    {c_sel0, c_sel1, c_tail1, c_tail2, c_pzero, c_s2, c_falfa0, c_fbeta0} = '0;
    {c_dec1, c_dec2, c_la_nz, c_multi, c_one, c_zero} = '0;
    n_iter = 1; lc = 0; noise_we = 0; noise_waddr = 0; noise_s = 0; noise_p = 0;
    data_in = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    run(3.0, 1, 1);
    run(1.35, 4, 0);
    $display("mechanisms:");
    need("selector port 0 (Y0 data pairs)", c_sel0);
    need("selector port 1 (Y'0 data pairs)", c_sel1);
    need("encoder 1 tail pairs", c_tail1);
    need("encoder 2 tail pairs", c_tail2);
    need("punctured parity read as zero", c_pzero);
    need("interleaved systematic reads", c_s2);
    need("alpha initial values used", c_falfa0);
    need("beta initial values used", c_fbeta0);
    need("decoder 1 steps (deinterleaved)", c_dec1);
    need("decoder 2 steps (interleaved)", c_dec2);
    need("nonzero a priori LLRs", c_la_nz);
    need("multi-iteration decodes", c_multi);
    need("decoded ones", c_one);
    need("decoded zeros", c_zero);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
