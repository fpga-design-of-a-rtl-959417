// tb_ref_pkg -- reference models used by the testbenches.
//
// Everything here is written independently of the RTL structure: the
// constituent code is stepped from its register equations, the trellis is
// explored by trying both input bits from every state, and the Max-Log-MAP
// recursions are the textbook ones over all transitions.  Arithmetic mirrors
// the hardware number format so that results can be compared bit for bit:
// 20-bit two's complement words that wrap, products of two 1024-scaled values
// shifted right by 10, the 1/2 of the branch metrics as an arithmetic shift of
// a 21-bit sum, and "greater" decided by the sign of the wrapped difference.
package tb_ref_pkg;

  localparam int K     = 250;   // information bits
  localparam int NS    = 253;   // trellis steps
  localparam int NP    = 256;   // transmitted pairs

  typedef longint arr_t [NS];

  function automatic longint w20(longint x);
    longint y;
    y = x & 64'hFFFFF;
    if (y >= 64'h80000) y = y - 64'h100000;
    return y;
  endfunction

  function automatic bit gt(longint a, longint b);
    return w20(a - b) >= 0;
  endfunction

  function automatic longint mx(longint a, longint b);
    return gt(a, b) ? a : b;
  endfunction

  function automatic longint mulq(longint a, longint b);
    return w20((a * b) >>> 10);
  endfunction

  // one step of the cdma2000 RSC code; st = {s1,s2,s3}
  function automatic void rsc(input int st, input int u, input bit tail,
                              output int x, output int y, output int nst);
    int s1, s2, s3, a;
    s1 = (st >> 2) & 1; s2 = (st >> 1) & 1; s3 = st & 1;
    x  = tail ? (s2 ^ s3) : u;
    a  = x ^ s2 ^ s3;
    y  = a ^ s1 ^ s3;
    nst = (a << 2) | (s1 << 1) | s2;
  endfunction

  // permutation: 8-bit counter = {row(3), col(5)}, candidate
  // bitreverse(col)*8 + ((row+1)*MULT[col] mod 8), keep if below 250
  function automatic void make_pi(output int pi [K], output int pinv [K]);
    int mult [32] = '{5,7,5,1,1,1,1,7, 5,7,7,3,7,3,7,5, 5,7,1,3,1,3,7,1, 5,1,1,7,3,3,7,3};
    int n, row, col, rev, cand;
    n = 0;
    for (int c = 0; c < 256; c++) begin
      row = c / 32; col = c % 32;
      rev = 0;
      for (int b = 0; b < 5; b++) if (col & (1 << b)) rev |= 1 << (4 - b);
      cand = rev * 8 + (((row + 1) * mult[col]) % 8);
      if (cand < K) begin pi[n] = cand; n++; end
    end
    for (int k = 0; k < K; k++) pinv[pi[k]] = k;
  endfunction

  // turbo encoder: 256 pairs {X,Y} in transmission order
  function automatic void encode(input bit d [K], output bit [1:0] xy [NP]);
    int pi [K], pinv [K];
    int st1, st2, x1, y1, x2, y2, n1, n2;
    make_pi(pi, pinv);
    st1 = 0; st2 = 0;
    for (int k = 0; k < K; k++) begin
      rsc(st1, d[k], 0, x1, y1, n1);
      rsc(st2, d[pi[k]], 0, x2, y2, n2);
      xy[k] = (k % 2 == 0) ? {1'(x1), 1'(y1)} : {1'(x1), 1'(y2)};
      st1 = n1; st2 = n2;
    end
    for (int t = 0; t < 3; t++) begin
      rsc(st1, 0, 1, x1, y1, n1); st1 = n1;
      xy[K + t] = {1'(x1), 1'(y1)};
    end
    for (int t = 0; t < 3; t++) begin
      rsc(st2, 0, 1, x2, y2, n2); st2 = n2;
      xy[K + 3 + t] = {1'(x2), 1'(y2)};
    end
  endfunction

  // received pairs -> decoder inputs (depuncturing and systematic interleaving)
  function automatic void depuncture(input longint rs [NP], input longint rp [NP],
      output arr_t cs1, output arr_t cp0, output arr_t cs2, output arr_t cp1);
    int pi [K], pinv [K];
    make_pi(pi, pinv);
    for (int k = 0; k < NS; k++) begin
      if (k < K) begin
        cs1[k] = rs[k];
        cs2[k] = rs[pi[k]];
        cp0[k] = (k % 2 == 0) ? rp[k] : 0;
        cp1[k] = (k % 2 == 1) ? rp[k] : 0;
      end else begin
        cs1[k] = rs[k];
        cp0[k] = rp[k];
        cs2[k] = rs[k + 3];
        cp1[k] = rp[k + 3];
      end
    end
  endfunction

  // branch metric of the transition from state m with input u at step k
  function automatic longint branch(int m, int u, longint la, longint lc,
                                    longint cs, longint cp);
    int x, y, n;
    longint g;
    rsc(m, u, 0, x, y, n);
    if (y == u) g = (la + mulq(lc, w20(cs + cp))) >>> 1;
    else        g = (la + mulq(lc, w20(cs - cp))) >>> 1;
    g = w20(g);
    return u ? g : w20(-g);
  endfunction

  // branch value of (state m, input u) given the two distinct metrics
  function automatic longint bm(int m, int u, longint g10, longint g12);
    int x, y, n;
    rsc(m, 1, 0, x, y, n);
    return u ? ((y == 1) ? g10 : g12) : w20(-((y == 1) ? g10 : g12));
  endfunction

  // Max-Log-MAP SISO over 253 steps, both ends terminated in state 0
  function automatic void siso(input arr_t la, input arr_t cs, input arr_t cp,
                               input longint lc, output arr_t llr);
    longint alpha [NS+1][8];
    longint beta  [NS+1][8];
    longint NEG, v, best1, best0, c;
    bit     h1, h0, seen [8];
    int     x, y, n;
    NEG = -250 * 1024;
    for (int m = 0; m < 8; m++) begin
      alpha[0][m] = (m == 0) ? 0 : NEG;
      beta[NS][m] = (m == 0) ? 0 : NEG;
    end
    for (int k = 0; k < NS; k++) begin
      for (int m = 0; m < 8; m++) seen[m] = 0;
      for (int m = 0; m < 8; m++)
        for (int u = 0; u < 2; u++) begin
          rsc(m, u, 0, x, y, n);
          v = w20(alpha[k][m] + branch(m, u, la[k], lc, cs[k], cp[k]));
          alpha[k+1][n] = seen[n] ? mx(alpha[k+1][n], v) : v;
          seen[n] = 1;
        end
    end
    for (int k = NS - 1; k >= 0; k--) begin
      for (int m = 0; m < 8; m++) begin
        longint b [2];
        for (int u = 0; u < 2; u++) begin
          rsc(m, u, 0, x, y, n);
          b[u] = w20(beta[k+1][n] + branch(m, u, la[k], lc, cs[k], cp[k]));
        end
        beta[k][m] = mx(b[1], b[0]);
      end
      h1 = 0; h0 = 0; best1 = 0; best0 = 0;
      for (int m = 0; m < 8; m++)
        for (int u = 0; u < 2; u++) begin
          rsc(m, u, 0, x, y, n);
          c = w20(alpha[k][m] + beta[k+1][n] + branch(m, u, la[k], lc, cs[k], cp[k]));
          if (u) begin best1 = h1 ? mx(best1, c) : c; h1 = 1; end
          else   begin best0 = h0 ? mx(best0, c) : c; h0 = 1; end
        end
      llr[k] = w20(best1 - best0);
    end
  endfunction

  // whole iterative decoder; returns the decisions and the last pass's LLRs
  function automatic void decode(input arr_t cs1, input arr_t cp0, input arr_t cs2,
      input arr_t cp1, input longint lc, input int iters,
      output bit dec [K], output arr_t llr_last);
    int pi [K], pinv [K];
    arr_t la, llr, ext;
    make_pi(pi, pinv);
    for (int k = 0; k < NS; k++) ext[k] = 0;  // LLR2 a priori = 0
    for (int it = 0; it < iters; it++) begin
      // decoder 1
      for (int k = 0; k < NS; k++) la[k] = (k < K) ? ext[pinv[k]] : 0;
      if (it == 0) for (int k = 0; k < NS; k++) la[k] = 0;
      siso(la, cs1, cp0, lc, llr);
      for (int k = 0; k < NS; k++) ext[k] = w20(llr[k] - w20(la[k] + mulq(cs1[k], lc)));
      // decoder 2
      for (int k = 0; k < NS; k++) la[k] = (k < K) ? ext[pi[k]] : 0;
      siso(la, cs2, cp1, lc, llr);
      for (int k = 0; k < NS; k++) ext[k] = w20(llr[k] - w20(la[k] + mulq(cs2[k], lc)));
    end
    for (int i = 0; i < K; i++) dec[i] = llr[pinv[i]] >= 0;
    llr_last = llr;
  endfunction

  // Gaussian sample (Box-Muller) with standard deviation sd
  function automatic real gauss(real sd);
    real u1, u2;
    u1 = (real'($urandom_range(32'hFFFFFF, 1))) / 16777216.0;
    u2 = (real'($urandom_range(32'hFFFFFF, 0))) / 16777216.0;
    return sd * $sqrt(-2.0 * $ln(u1)) * $cos(2.0 * 3.14159265358979 * u2);
  endfunction

  // sigma^2 and Lc = 2/sigma^2 (scaled by 1024) for Eb/N0 in dB at rate 1/2
  function automatic real sigma_of(real ebn0_db);
    return $sqrt(1.0 / (2.0 * 0.5 * (10.0 ** (ebn0_db / 10.0))));
  endfunction

  function automatic longint to_fix(real v);
    return w20(longint'($floor(v * 1024.0)));
  endfunction

endpackage
