// alpha_unit -- forward metric block of the SISO decoder (the paper's alpha block).
//
// Eight acs_cell instances compute alpha_{k+1}(n) = max(alpha_k(m') + g,
// alpha_k(m'') - g), where m' = PRED1[n] reaches n with bit 1, m'' = PRED0[n]
// with bit 0 and g is gamma(1,0) or gamma(1,2) according to the branch table
// (both predecessors of a state use the same one).  As in the paper's figure,
// the cells are fed by a two-way multiplexer (select falfa) that chooses
// between the initialisation block (falfa = 0: 0 for state 0, -250 for the
// others, Eq. 4) and the 160-bit alpha register (falfa = 1).  The register
// loads the cells' result when en is high.
//
// Interface: alpha_k is the multiplexer output (the metrics of the present step,
// written to the alpha memory by the SISO), alpha_next the cells' output.
// Both are combinational; the register updates on the clock with en.
// rst_n clears the register synchronously.
module alpha_unit
  import turbo_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     en,        // en2 in the paper
  input  logic     falfa,     // 0: initial metrics, 1: register
  input  soft_t    g10,
  input  soft_t    g12,
  output metrics_t alpha_k,
  output metrics_t alpha_next
);
  metrics_t areg;

  assign alpha_k = falfa ? areg : METRIC_INIT;

  for (genvar n = 0; n < int'(NSTATE); n++) begin : g_cell
    localparam int P1 = int'(PRED1[n]);
    localparam int P0 = int'(PRED0[n]);
    acs_cell u_cell (
      .m1 (alpha_k[P1*SW +: SW]),
      .m2 (alpha_k[P0*SW +: SW]),
      .g  (USE_G12[P1] ? g12 : g10),
      .out(alpha_next[n*SW +: SW])
    );
  end

  always_ff @(posedge clk) begin
    if (!rst_n)  areg <= '0;
    else if (en) areg <= alpha_next;
  end
endmodule
