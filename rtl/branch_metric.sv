// branch_metric -- branch metric block of the SISO decoder (gamma).
//
// Only the two distinct branch metrics of a trellis step are computed; every
// other branch is one of them or its negation (the paper's branch table):
//   gamma(1,0) = 1/2 [ La + Lc*(Cs + Cp) ]
//   gamma(1,2) = 1/2 [ La + Lc*(Cs - Cp) ]
// The datapath is the paper's: an adder and a subtractor on Cs and Cp, two
// multipliers by Lc and two adders with the a priori LLR La.  The factor 1/2,
// which the paper's equations carry but its block diagram does not show, is an
// arithmetic right shift of a 21-bit sum, so no bit is lost before it.  The
// products are of two numbers scaled by 1024 and are shifted right by 10 to
// return to that scale (floor).  All words are 20-bit two's complement.
// Combinational.
module branch_metric
  import turbo_pkg::*;
(
  input  soft_t la,     // a priori LLR
  input  soft_t lc,     // channel reliability Lc = 2/sigma^2
  input  soft_t cs,     // received systematic value
  input  soft_t cp,     // received (depunctured) parity value
  output soft_t g10,
  output soft_t g12
);
  soft_t                  sum, dif, p10, p12;
  logic signed [2*SW-1:0] m10, m12;
  logic signed [SW:0]     t10, t12;

  always_comb begin
    sum = cs + cp;
    dif = cs - cp;
    m10 = lc * sum;
    m12 = lc * dif;
    p10 = soft_t'(m10 >>> FRAC);
    p12 = soft_t'(m12 >>> FRAC);
    t10 = (SW+1)'(la) + (SW+1)'(p10);
    t12 = (SW+1)'(la) + (SW+1)'(p12);
    g10 = soft_t'(t10 >>> 1);
    g12 = soft_t'(t12 >>> 1);
  end
endmodule
