// output_unit -- extrinsic information, interleaving and hard decisions.
//
// Extrinsic LLR, the paper's Eq. 6:  ext_k = L_k - (La_k + Lc*Cs_k).
// Cs x Lc and c+d (La + Lc*Cs) are formed in the forward loop, when Cs_k and
// La_k are at hand, and kept in a 253 x 20 memory; in the backward loop the
// value of step k is read into the c+d register (en6) and the subtractor e-f
// gives ext_k.  The paper presents Cs and La again in the backward loop; the
// memory is this design's choice, because the extrinsic register that feeds
// La is being overwritten during that loop.
//
// Each ext_k is shifted (en7) into a 253 x 20 = 5060-bit shift register.  The
// LLRs arrive last step first, so after a pass step j sits in bits
// [20j+19:20j].  Two 253-port multiplexers read it with the step address k
// (Madd): the interleaver port k is wired to step PI[k], the deinterleaver port
// k to step PI_INV[k]; ports 250-252 (tail steps) carry 0.  A two-port
// multiplexer chooses by selsiso: 0 gives the interleaved word (a priori of
// decoder 2), 1 the deinterleaved word (a priori of decoder 1).  clr empties
// the register at the start of a decode, so the first a priori is 0.
//
// The a posteriori LLRs are shifted (en8, in the same state as en7) into a second
// 5060-bit register.  After the last pass (decoder 2, interleaved order) its
// words are deinterleaved by wiring and 250 comparators give the decoded bits
// at once: bit i = 1 when L(PI_INV[i]) >= 0, 0 when it is negative (the
// paper's function H).  decoded is combinational from that register.
module output_unit
  import turbo_pkg::*;
#(
  parameter int unsigned N = NSTEP,                 // 253 steps (paper)
  parameter int unsigned K = NINFO                  // 250 decoded bits (paper)
) (
  input  logic         clk,
  input  logic         rst_n,
  input  ctrl_t        ctrl,
  input  soft_t        lc,
  input  soft_t        cs,        // captured Cs of step k (forward loop)
  input  soft_t        la_cap,    // captured a priori LLR of step k
  input  soft_t        llr,       // a posteriori LLR from the SISO
  output soft_t        la,        // a priori LLR of step ctrl.k (combinational)
  output soft_t        ext,       // extrinsic LLR being shifted in
  output logic [K-1:0] decoded
);
  logic [N*SW-1:0]        ext_sr, app_sr;
  logic signed [2*SW-1:0] prod;
  soft_t                  cslc, cd, cd_mem, cd_reg;
  soft_t                  int_port [N];
  soft_t                  deint_port [N];
  soft_t                  int_word, deint_word;

  // ---- Cs x Lc, c + d, memory and register
  always_comb begin
    prod = cs * lc;
    cslc = soft_t'(prod >>> FRAC);
    cd   = la_cap + cslc;
  end

  metric_ram #(.W(SW), .DEPTH(N)) u_cd_ram (
    .clk, .we(ctrl.wr1), .re(ctrl.rd), .addr(ctrl.k), .wdata(cd), .rdata(cd_mem));

  always_ff @(posedge clk) begin
    if (!rst_n)        cd_reg <= '0;
    else if (ctrl.en6) cd_reg <= cd_mem;
  end

  // ---- e - f and the two shift registers
  assign ext = llr - cd_reg;

  always_ff @(posedge clk) begin
    if (!rst_n || ctrl.clr) ext_sr <= '0;
    else if (ctrl.en7)      ext_sr <= {ext_sr[(N-1)*SW-1:0], ext};
  end

  always_ff @(posedge clk) begin
    if (!rst_n || ctrl.clr) app_sr <= '0;
    else if (ctrl.en8)      app_sr <= {app_sr[(N-1)*SW-1:0], llr};
  end

  // ---- interleaver / deinterleaver multiplexers (constant wiring)
  for (genvar p = 0; p < int'(N); p++) begin : g_port
    if (p < int'(K)) begin : g_data
      localparam int PI_P  = int'(PI[p*AW +: AW]);
      localparam int PIV_P = int'(PI_INV[p*AW +: AW]);
      assign int_port[p]   = ext_sr[PI_P*SW +: SW];
      assign deint_port[p] = ext_sr[PIV_P*SW +: SW];
    end else begin : g_tail
      assign int_port[p]   = '0;
      assign deint_port[p] = '0;
    end
  end

  assign int_word   = (ctrl.k < AW'(N)) ? int_port[ctrl.k] : '0;
  assign deint_word = (ctrl.k < AW'(N)) ? deint_port[ctrl.k] : '0;
  assign la         = ctrl.selsiso ? deint_word : int_word;

  // ---- deinterleaver and hard decisions
  for (genvar i = 0; i < int'(K); i++) begin : g_dec
    localparam int PIV_I = int'(PI_INV[i*AW +: AW]);
    assign decoded[i] = !app_sr[PIV_I*SW + SW - 1];
  end
endmodule
