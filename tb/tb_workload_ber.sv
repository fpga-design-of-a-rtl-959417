// tb_workload_ber -- bit error rate per iteration against Eb/N0 (the paper's
// BER figure, which used 1000 packets of 250 bits per point).
//
// The full system decodes PKTS random packets at each Eb/N0 point with 7
// iterations; decisions are sampled after every iteration and the BER per
// iteration is printed.  PKTS is 200 (50,000 bits per point) to keep the run
// near a minute; set it to 1000 for the paper's 250,000 bits.  Checks: the first
// packet of each point decodes bit-exactly like the reference decoder, every
// decode takes 42561 cycles, and the 7-iteration BER does not rise from one
// point to the next by more than the statistical noise of the run.
module tb_workload_ber;
  import turbo_pkg::*;
  import tb_ref_pkg::*;

  localparam int PKTS = 200;
  localparam int IT   = 7;
  localparam int NPT  = 6;

  logic clk = 0, rst_n = 0, start = 0;
  logic [NINFO-1:0] data_in, decoded;
  logic [3:0] n_iter;
  soft_t lc, noise_s, noise_p;
  logic noise_we;
  logic [AW-1:0] noise_waddr;
  logic busy, done;
  logic [4:0] pass_cnt;
  int checks = 0, failures = 0;
  int errs [NPT][IT];
  real pts [NPT] = '{-3.0, -2.0, -1.0, 0.0, 1.0, 2.0};

  turbo_system dut (.*);
  always #5 clk = ~clk;

  initial begin
    #2_000_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input int pt, input bit with_ref);
    bit d [K];
    bit [1:0] xy [NP];
    longint ns [NP], np [NP], rs [NP], rp [NP];
    arr_t cs1, cp0, cs2, cp1, rllr;
    bit rdec [K];
    real sd;
    longint lcv;
    int cyc, it, mism;
    sd  = sigma_of(pts[pt]);
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
      if (dut.u_dec.u_ctrl.state == 4'd14 && dut.u_dec.u_ctrl.sel2) begin
        for (int b = 0; b < K; b++) if (decoded[b] != d[b]) errs[pt][it]++;
        it++;
      end
    end
    checks++;
    if (cyc != 1 + (12 * NS + 4) * 2 * IT) begin failures++; $display("cycles %0d", cyc); end
    if (with_ref) begin
      encode(d, xy);
      for (int j = 0; j < NP; j++) begin
        rs[j] = w20((xy[j][1] ? 1024 : -1024) + ns[j]);
        rp[j] = w20((xy[j][0] ? 1024 : -1024) + np[j]);
      end
      depuncture(rs, rp, cs1, cp0, cs2, cp1);
      decode(cs1, cp0, cs2, cp1, lcv, IT, rdec, rllr);
      mism = 0;
      for (int b = 0; b < K; b++) if (decoded[b] != rdec[b]) mism++;
      checks++;
      if (mism != 0) begin failures++; $display("%0d decisions differ from reference", mism); end
    end
    @(negedge clk);
  endtask

  initial begin
    string line;
    n_iter = 1; lc = 0; noise_we = 0; noise_waddr = 0; noise_s = 0; noise_p = 0; data_in = '0;
    foreach (errs[p, i]) errs[p][i] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int p = 0; p < NPT; p++)
      for (int k = 0; k < PKTS; k++) run(p, k == 0);
    $display("BER per iteration, %0d bits per point", PKTS * K);
    $display("Eb/N0(dB)   it1       it2       it3       it4       it5       it6       it7");
    for (int p = 0; p < NPT; p++) begin
      line = $sformatf("%6.2f   ", pts[p]);
      for (int i = 0; i < IT; i++)
        line = {line, $sformatf(" %.2e", real'(errs[p][i]) / real'(PKTS * K))};
      $display("%s", line);
    end
    for (int p = 1; p < NPT; p++) begin
      checks++;
      // allow a statistical margin of 3 standard deviations plus 5 errors
      if (real'(errs[p][IT-1]) > real'(errs[p-1][IT-1]) + 3.0 * $sqrt(real'(errs[p-1][IT-1])) + 5.0) begin
        failures++; $display("BER rises between %f and %f dB", pts[p-1], pts[p]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
