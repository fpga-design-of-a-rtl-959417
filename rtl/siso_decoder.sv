// siso_decoder -- Max-Log-MAP soft-in soft-out decoder (the paper's SISO unit).
//
// Four blocks, as in the paper: branch metrics (gamma), forward metrics
// (alpha), backward metrics (beta) and LLRs.  In the forward loop the branch
// block turns the captured inputs (La, Cs, Cp and Lc) into gamma(1,0) and
// gamma(1,2); these go to two branch registers (en1) that feed the alpha
// block at once, and into two 253 x 20 branch memories for the backward loop.
// The alpha metrics of every step (the multiplexer output of the alpha block,
// 160 bits) are stored in a 253 x 160 alpha memory.  In the backward loop the
// memories are read, last step first; the LLR block combines alpha_k from the
// alpha memory, beta_{k+1} from the beta block and the two branch metrics of
// step k, and the beta block then steps from beta_{k+1} to beta_k.
//
// The control word comes from control_unit; see there for the cycle of each
// action.  llr is the registered a posteriori LLR of step ctrl.k, valid from
// the cycle after en5.  The alpha memory address is 8 bits wide here; the
// paper's figure prints 5 for it, which cannot address 253 words.  The
// branch memories are written on wr1 and the alpha memory on wr2, as the
// figure names them (both in state4 here).  The figure also draws an enable
// (en3) on the beta block besides the beta register (en4); here the beta block
// is combinational and its only register is the one loaded on en4.
module siso_decoder
  import turbo_pkg::*;
#(
  parameter int unsigned N = NSTEP        // trellis steps per pass (paper: 253)
) (
  input  logic  clk,
  input  logic  rst_n,
  input  ctrl_t ctrl,
  input  soft_t la,        // captured a priori LLR of step k
  input  soft_t lc,
  input  soft_t cs,        // captured inputs of step k
  input  soft_t cp,
  output soft_t llr,       // LLR a posteriori (register)
  output soft_t g1_mem,    // branch metrics of step k read back (for observation)
  output soft_t g2_mem
);
  soft_t    g10, g12, g1_reg, g2_reg;
  metrics_t alpha_k, alpha_next, alpha_mem, beta_k1, beta_k;
  soft_t    llr_comb;

  branch_metric u_gamma (.la, .lc, .cs, .cp, .g10, .g12);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      g1_reg <= '0;
      g2_reg <= '0;
    end else if (ctrl.en1) begin
      g1_reg <= g10;
      g2_reg <= g12;
    end
  end

  metric_ram #(.W(SW), .DEPTH(N)) u_g1_ram (
    .clk, .we(ctrl.wr1), .re(ctrl.rd), .addr(ctrl.k), .wdata(g1_reg), .rdata(g1_mem));
  metric_ram #(.W(SW), .DEPTH(N)) u_g2_ram (
    .clk, .we(ctrl.wr1), .re(ctrl.rd), .addr(ctrl.k), .wdata(g2_reg), .rdata(g2_mem));

  alpha_unit u_alpha (
    .clk, .rst_n, .en(ctrl.en2), .falfa(ctrl.falfa), .g10(g1_reg), .g12(g2_reg),
    .alpha_k, .alpha_next);

  metric_ram #(.W(NSTATE*SW), .DEPTH(N)) u_alpha_ram (
    .clk, .we(ctrl.wr2), .re(ctrl.rd), .addr(ctrl.k), .wdata(alpha_k), .rdata(alpha_mem));

  beta_unit u_beta (
    .clk, .rst_n, .en(ctrl.en4), .fbeta(ctrl.fbeta), .g10(g1_mem), .g12(g2_mem),
    .beta_k1, .beta_k);

  llr_unit u_llr (
    .clk, .rst_n, .en(ctrl.en5), .alpha(alpha_mem), .beta(beta_k1),
    .g10(g1_mem), .g12(g2_mem), .llr, .llr_comb);
endmodule
