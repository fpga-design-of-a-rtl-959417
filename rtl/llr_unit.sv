// llr_unit -- LLR block of the SISO decoder (Max-Log-MAP a posteriori ratio).
//
//   L(d_k) = max_m { alpha_k(m) + beta_{k+1}(NEXT1[m]) + g(m) }
//          - max_m { alpha_k(m) + beta_{k+1}(NEXT0[m]) - g(m) }
// Built as in the paper from adders, "a > b" comparators and subtractors: eight
// adders per side form alpha + beta, a tree of comparators takes the maximum of
// each group of states that shares a branch metric, the branch metric is added
// (ones) or subtracted (zeros) after the tree, a last comparator joins the two
// groups, and a subtractor forms ones - zeros, which is registered (en5).
// The groups are {0,1,6,7} with gamma(1,0) and {2,3,4,5} with gamma(1,2), from
// the paper's branch table; see the design notes for the paper's figure, which
// groups the states differently.
//
// Interface: combinational up to the register; llr shows the registered value.
module llr_unit
  import turbo_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     en,        // en5 in the paper
  input  metrics_t alpha,     // alpha_k
  input  metrics_t beta,      // beta_{k+1}
  input  soft_t    g10,
  input  soft_t    g12,
  output soft_t    llr,
  output soft_t    llr_comb   // unregistered value, for observation
);
  soft_t s1 [NSTATE];
  soft_t s0 [NSTATE];
  soft_t one_a, one_b, zero_a, zero_b, ones_max, zeros_max;

  always_comb begin
    for (int m = 0; m < int'(NSTATE); m++) begin
      s1[m] = soft_t'(alpha[m*SW +: SW]) + soft_t'(beta[int'(NEXT1[m])*SW +: SW]);
      s0[m] = soft_t'(alpha[m*SW +: SW]) + soft_t'(beta[int'(NEXT0[m])*SW +: SW]);
    end
    // group gamma(1,0): states 0,1,6,7 ; group gamma(1,2): states 2,3,4,5
    one_a  = smax(smax(s1[0], s1[1]), smax(s1[6], s1[7])) + g10;
    one_b  = smax(smax(s1[2], s1[3]), smax(s1[4], s1[5])) + g12;
    zero_a = smax(smax(s0[0], s0[1]), smax(s0[6], s0[7])) - g10;
    zero_b = smax(smax(s0[2], s0[3]), smax(s0[4], s0[5])) - g12;
    ones_max  = smax(one_a, one_b);
    zeros_max = smax(zero_a, zero_b);
    llr_comb  = ones_max - zeros_max;
  end

  always_ff @(posedge clk) begin
    if (!rst_n)  llr <= '0;
    else if (en) llr <= llr_comb;
  end
endmodule
