// turbo_pkg -- shared types, constants and tables of the cdma2000 turbo codec.
//
// Soft values are 20-bit two's complement numbers scaled by 1024, so +1.0 is
// 0x00400, -1.0 is 0xFFC00 and the "minus infinity" used to initialise the
// unreachable trellis states (-250.0) is 0xC1800; these numbers are the paper's.
// The packet is 250 information bits plus 3 tail bits per constituent code, so
// each SISO pass handles 253 trellis steps of an 8-state trellis.
//
// Trellis (cdma2000 constituent code, feedback 1+D^2+D^3, parity 1+D+D^3).
// State m = {s1,s2,s3} with s1 the newest register bit.  From state m the
// transition with information bit 1 goes to NEXT1[m] and the one with bit 0 to
// NEXT0[m]; these tables are the pairs that appear in the paper's LLR equation.
// The branch with bit 1 carries +gamma(1,0) for m in {0,1,6,7} and +gamma(1,2)
// for m in {2,3,4,5} (the paper's branch-metric table); the bit-0 branch of
// the same state carries the negated value.
//
// Interleaver.  The paper stores its interleaver addresses in a ROM but does not
// list them, and the cdma2000 lookup table has no entry for a 250-bit block.
// This design therefore computes its own permutation with the structure of the
// cdma2000 algorithm: an 8-bit counter is split into a 3-bit row r and a 5-bit
// column c; the candidate address has bitrev5(c) as its upper five bits and
// ((r+1)*MULT[c]) mod 8 as its lower three bits (the field order of the
// cdma2000 algorithm), and candidates of 250 or more are skipped.  MULT holds odd constants chosen
// for this design.  pi_table() returns the address table as a packed vector,
// entry k in bits [8k+7:8k]; entry k names the original position of the k-th
// interleaved bit: x'[k] = x[PI[k]].
package turbo_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int unsigned SW      = 20;   // soft word width (paper: 20 bits)
  localparam int unsigned NINFO   = 250;  // Nturbo
  localparam int unsigned NTAIL   = 3;    // tail steps per constituent code
  localparam int unsigned NSTEP   = NINFO + NTAIL; // 253 trellis steps
  localparam int unsigned NPAIR   = NINFO + 2*NTAIL; // 256 XY pairs sent
  localparam int unsigned NSTATE  = 8;
  localparam int unsigned AW      = 8;    // address width of all 253-deep stores
  localparam int unsigned FRAC    = 10;   // scale 1024 = 2**10

  typedef logic signed [SW-1:0] soft_t;
  // the eight state metrics of one trellis step as one 160-bit word,
  // state m in bits [20m+19:20m] (the paper's 160-bit metric buses)
  typedef logic [NSTATE*SW-1:0] metrics_t;

  localparam soft_t SOFT_P1  = 20'sh00400;  // +1.0
  localparam soft_t SOFT_M1  = 20'shFFC00;  // -1.0
  localparam soft_t SOFT_NEG = 20'shC1800;  // -250.0, "minus infinity"
  // boundary metrics of the paper's Eq. 4 and 5: 0 for state 0, -250 elsewhere,
  // printed in the paper as C1800,C1800,C1800,C1800,C1800,C1800,C1800,00000
  localparam metrics_t METRIC_INIT = {{(NSTATE-1){SOFT_NEG}}, soft_t'(0)};

  // ---------------------------------------------------------------- trellis
  localparam logic [2:0] NEXT1 [NSTATE] = '{3'd4, 3'd0, 3'd1, 3'd5, 3'd6, 3'd2, 3'd3, 3'd7};
  localparam logic [2:0] NEXT0 [NSTATE] = '{3'd0, 3'd4, 3'd5, 3'd1, 3'd2, 3'd6, 3'd7, 3'd3};
  // 1 where the state's branches use gamma(1,2), 0 where they use gamma(1,0)
  localparam logic [NSTATE-1:0] USE_G12 = 8'b0011_1100;
  // predecessors of state n: PRED1[n] reaches n with bit 1, PRED0[n] with bit 0
  localparam logic [2:0] PRED1 [NSTATE] = '{3'd1, 3'd2, 3'd5, 3'd6, 3'd0, 3'd3, 3'd4, 3'd7};
  localparam logic [2:0] PRED0 [NSTATE] = '{3'd0, 3'd3, 3'd4, 3'd7, 3'd1, 3'd2, 3'd5, 3'd6};

  // Max-Log-MAP comparator "a > b".  Metrics are allowed to wrap around in
  // two's complement; the comparison uses the sign of the wrapped difference,
  // which is correct while the two compared values are less than 2**19 LSB
  // (512.0) apart.
  function automatic logic greater(soft_t a, soft_t b);
    soft_t d;
    d = a - b;
    return !d[SW-1];
  endfunction

  function automatic soft_t smax(soft_t a, soft_t b);
    return greater(a, b) ? a : b;
  endfunction

  // ---------------------------------------------------------------- control
  // Control word that the control unit drives into the SISO and output units.
  // Names after the enables of the paper's architecture figure where it has one.
  typedef struct packed {
    logic          in_rd;    // state1: read Cs/Cp of step k from the input
    logic          cap;      // state2: capture Cs, Cp and the a priori LLR
    logic          en1;      // state3: load the two branch registers
    logic          wr1;      // state4: write the branch and c+d memories
    logic          wr2;      // state4: write the alpha memory
    logic          en2;      // state5: load the alpha register
    logic          falfa;    // alpha multiplexer: 0 initial values, 1 register
    logic          rd;       // state7: read branch, c+d and alpha memories
    logic          en6;      // state8: load the c+d register
    logic          en5;      // state9: load the LLR register
    logic          en7;      // state10: shift the extrinsic register
    logic          en8;      // state10: shift the a posteriori register
    logic          en4;      // state11: load the beta register
    logic          fbeta;    // beta multiplexer: 0 initial values, 1 register
    logic          clr;      // start: clear the extrinsic register (LLR2 a priori = 0)
    logic          selsiso;  // 1: decoder 1 (deinterleaved a priori), 0: decoder 2
    logic [AW-1:0] k;        // trellis step addressed this cycle (Radd/Aadd/Madd)
  } ctrl_t;

  // ---------------------------------------------------------------- interleaver
  localparam logic [2:0] MULT [32] = '{
    3'd5, 3'd7, 3'd5, 3'd1, 3'd1, 3'd1, 3'd1, 3'd7,
    3'd5, 3'd7, 3'd7, 3'd3, 3'd7, 3'd3, 3'd7, 3'd5,
    3'd5, 3'd7, 3'd1, 3'd3, 3'd1, 3'd3, 3'd7, 3'd1,
    3'd5, 3'd1, 3'd1, 3'd7, 3'd3, 3'd3, 3'd7, 3'd3};

  function automatic logic [NINFO*AW-1:0] pi_table();
    logic [NINFO*AW-1:0] t;
    int unsigned k;
    logic [2:0] row, prod;
    logic [4:0] col, rev;
    logic [7:0] cand;
    t = '0;
    k = 0;
    for (int c = 0; c < 256; c++) begin
      row  = 3'(c >> 5);
      col  = 5'(c);
      prod = 3'((row + 3'd1) * MULT[col]);
      for (int b = 0; b < 5; b++) rev[b] = col[4-b];
      cand = {rev, prod};
      if (cand < 8'(NINFO)) begin
        t[k*AW +: AW] = cand;
        k++;
      end
    end
    return t;
  endfunction

  // inverse permutation: entry j names the interleaved position of bit j
  function automatic logic [NINFO*AW-1:0] pi_inv_table();
    logic [NINFO*AW-1:0] t, p;
    p = pi_table();
    t = '0;
    for (int k = 0; k < int'(NINFO); k++) t[p[k*AW +: AW]*AW +: AW] = AW'(k);
    return t;
  endfunction

  localparam logic [NINFO*AW-1:0] PI     = pi_table();
  localparam logic [NINFO*AW-1:0] PI_INV = pi_inv_table();

endpackage
