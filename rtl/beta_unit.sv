// beta_unit -- backward metric block of the SISO decoder (the paper's beta block).
//
// Eight acs_cell instances compute beta_k(m) = max(beta_{k+1}(NEXT1[m]) + g,
// beta_{k+1}(NEXT0[m]) - g), with g the branch metric of state m at step k
// (gamma(1,0) or gamma(1,2), branch table).  It is the alpha cell with other
// inputs, as the paper says.  A two-way multiplexer (select fbeta) chooses
// between the initialisation block (Eq. 5: 0 for state 0, -250 elsewhere,
// the encoders being terminated) and the 160-bit beta register.  The paper
// shows the register after the block (enable en4); it loads the cells' output.
//
// Interface: beta_k1 is the multiplexer output, i.e. beta_{k+1}, which the LLR
// block uses; beta_k is the cells' output.  Combinational except the register.
module beta_unit
  import turbo_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     en,        // en4 in the paper
  input  logic     fbeta,     // 0: initial metrics, 1: register
  input  soft_t    g10,
  input  soft_t    g12,
  output metrics_t beta_k1,
  output metrics_t beta_k
);
  metrics_t breg;

  assign beta_k1 = fbeta ? breg : METRIC_INIT;

  for (genvar m = 0; m < int'(NSTATE); m++) begin : g_cell
    localparam int S1 = int'(NEXT1[m]);
    localparam int S0 = int'(NEXT0[m]);
    acs_cell u_cell (
      .m1 (beta_k1[S1*SW +: SW]),
      .m2 (beta_k1[S0*SW +: SW]),
      .g  (USE_G12[m] ? g12 : g10),
      .out(beta_k[m*SW +: SW])
    );
  end

  always_ff @(posedge clk) begin
    if (!rst_n)  breg <= '0;
    else if (en) breg <= beta_k;
  end
endmodule
