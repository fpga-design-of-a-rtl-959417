// turbo_decoder -- iterative cdma2000 turbo decoder with a single SISO unit.
//
// The two constituent decoders of a turbo decoder run one after the other, so
// the paper builds one Max-Log-MAP SISO unit and uses it for both: passes
// alternate between decoder 1 (Cs, Cp0, a priori = deinterleaved extrinsic
// of decoder 2) and decoder 2 (C's, Cp1, a priori = interleaved extrinsic of
// decoder 1).  The output unit forms the extrinsic LLRs, re-orders them for the
// next pass and, after n iterations (2n passes), gives the 250 hard decisions.
// The control unit sequences everything; see control_unit for the cycle
// budget (1 + (12*253 + 4)*2n cycles, Eq. 16 of the paper).
//
// Input interface: the decoder fetches its channel values.  In the cycle it
// raises in_rd it presents the step in_k (0..252) and in_sel (0: Cs/Cp0 of
// decoder 1, 1: C's/Cp1 of decoder 2); cs and cp must hold the values on the
// next clock edge (a synchronous memory such as channel_buffer).  An input
// register stage then captures cs, cp and the a priori LLR (this design's
// pipeline choice).  Lc (20-bit, scaled by 1024) and n_iter must be stable
// while busy.  decoded is valid from the done pulse until the next start.
module turbo_decoder
  import turbo_pkg::*;
#(
  parameter int unsigned ITW = 4                   // iteration count width
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [ITW-1:0]   n_iter,                 // iterations n (paper's tests: 7)
  input  soft_t            lc,
  output logic             in_rd,
  output logic [AW-1:0]    in_k,
  output logic             in_sel,
  input  soft_t            cs,
  input  soft_t            cp,
  output logic             busy,
  output logic             done,
  output logic [ITW:0]     pass_cnt,
  output logic [NINFO-1:0] decoded
);
  ctrl_t ctrl;
  soft_t cs_r, cp_r, la_r, la, llr, ext;
  soft_t g1_mem, g2_mem;

  control_unit #(.N(NSTEP), .ITW(ITW)) u_ctrl (
    .clk, .rst_n, .start, .n_iter, .ctrl, .busy, .done, .pass_cnt);

  assign in_rd  = ctrl.in_rd;
  assign in_k   = ctrl.k;
  assign in_sel = !ctrl.selsiso;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cs_r <= '0;
      cp_r <= '0;
      la_r <= '0;
    end else if (ctrl.cap) begin
      cs_r <= cs;
      cp_r <= cp;
      la_r <= la;
    end
  end

  siso_decoder #(.N(NSTEP)) u_siso (
    .clk, .rst_n, .ctrl, .la(la_r), .lc, .cs(cs_r), .cp(cp_r), .llr,
    .g1_mem, .g2_mem);

  output_unit #(.N(NSTEP), .K(NINFO)) u_out (
    .clk, .rst_n, .ctrl, .lc, .cs(cs_r), .la_cap(la_r), .llr, .la, .ext, .decoded);
endmodule
