// control_unit -- finite state machine of the turbo decoder.
//
// The paper's controller: stateReset plus state1..state14.  state1-state6 form
// the forward loop, run once per trellis step to compute the branch metrics
// and alpha; after the last step the loop leaves from state2 (branch counter
// = 253) to state7.  state7-state12 form the backward loop that computes beta
// and the LLRs, last step first, and repeats while the beta counter is below
// 253.  state13 increments the iteration counter and state14 compares it with
// the requested count, returning to stateReset when it is reached and to
// state1 for the next SISO pass otherwise.  One SISO pass thus takes
// (6*253 + 2) + (6*253 + 2) cycles and a decode of n iterations (2n passes,
// decoder 1 and decoder 2 alternating) takes 1 + (12*253 + 4)*2n cycles from
// the cycle start is seen, the paper's Eq. 16 (6081 cycles for n = 1).
//
// What each state does inside a loop is not given by the paper; this design's
// assignment is (k = step of the present loop iteration):
//   state1 read input k     state2 test counter / capture inputs and a priori
//   state3 branch regs      state4 write branch, c+d (wr1) and alpha (wr2) memories
//   state5 alpha register   state6 increment branch counter
//   state7 read memories    state8 c+d register
//   state9 LLR register     state10 shift extrinsic (en7) and a posteriori (en8) registers
//   state11 beta register, increment beta counter
//   state12 test beta counter
// Interface: start is sampled in stateReset; busy is high outside stateReset;
// done is a one-cycle pulse, registered in state14 of the last pass, so it is
// high in the first cycle back in stateReset.
// n_iter = 0 is treated as 1.
module control_unit
  import turbo_pkg::*;
#(
  parameter int unsigned N   = NSTEP,   // trellis steps per pass (paper: 253)
  parameter int unsigned ITW = 4        // width of the iteration count
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic [ITW-1:0] n_iter,
  output ctrl_t          ctrl,
  output logic           busy,
  output logic           done,
  output logic [ITW:0]   pass_cnt     // SISO passes finished in this decode
);
  typedef enum logic [3:0] {
    S_RESET, S1, S2, S3, S4, S5, S6, S7, S8, S9, S10, S11, S12, S13, S14
  } state_t;

  state_t          state;
  logic [AW:0]     gcnt;      // contador gamma
  logic [AW:0]     bcnt;      // contador beta
  logic [ITW:0]    itcnt;     // contador itera (counts SISO passes)
  logic [ITW:0]    passes;
  logic            sel2;      // 0: decoder 1 pass, 1: decoder 2 pass

  assign passes   = (n_iter == '0) ? (ITW+1)'(2) : {n_iter, 1'b0};
  assign busy     = (state != S_RESET);
  assign pass_cnt = itcnt;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_RESET;
      gcnt  <= '0;
      bcnt  <= '0;
      itcnt <= '0;
      sel2  <= 1'b0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_RESET: if (start) begin
          gcnt  <= '0;
          bcnt  <= '0;
          itcnt <= '0;
          sel2  <= 1'b0;
          state <= S1;
        end
        S1:  state <= S2;
        S2:  state <= (gcnt == (AW+1)'(N)) ? S7 : S3;
        S3:  state <= S4;
        S4:  state <= S5;
        S5:  state <= S6;
        S6: begin
          gcnt  <= gcnt + 1'b1;
          state <= S1;
        end
        S7:  state <= S8;
        S8:  state <= S9;
        S9:  state <= S10;
        S10: state <= S11;
        S11: begin
          bcnt  <= bcnt + 1'b1;
          state <= S12;
        end
        S12: state <= (bcnt < (AW+1)'(N)) ? S7 : S13;
        S13: begin
          itcnt <= itcnt + 1'b1;
          state <= S14;
        end
        S14: begin
          gcnt <= '0;
          bcnt <= '0;
          if (itcnt == passes) begin
            done  <= 1'b1;
            state <= S_RESET;
          end else begin
            sel2  <= !sel2;
            state <= S1;
          end
        end
        default: state <= S_RESET;
      endcase
    end
  end

  always_comb begin
    ctrl         = '0;
    ctrl.selsiso = !sel2;
    ctrl.falfa   = (gcnt != '0);
    ctrl.fbeta   = (bcnt != '0);
    ctrl.clr     = (state == S_RESET) && start;
    if (state inside {S1, S2, S3, S4, S5, S6}) ctrl.k = gcnt[AW-1:0];
    else                                      ctrl.k = AW'((AW+1)'(N - 1) - bcnt);
    ctrl.in_rd   = (state == S1) && (gcnt != (AW+1)'(N));
    ctrl.cap     = (state == S2) && (gcnt != (AW+1)'(N));
    ctrl.en1     = (state == S3);
    ctrl.wr1     = (state == S4);
    ctrl.wr2     = (state == S4);
    ctrl.en2     = (state == S5);
    ctrl.rd      = (state == S7);
    ctrl.en6     = (state == S8);
    ctrl.en5     = (state == S9);
    ctrl.en7     = (state == S10);
    ctrl.en8     = (state == S10);
    ctrl.en4     = (state == S11);
  end

  // the loops never run past the packet
  always_ff @(posedge clk) begin
    if (rst_n) begin
      assert (gcnt <= (AW+1)'(N)) else $error("branch counter beyond packet");
      assert (bcnt <= (AW+1)'(N)) else $error("beta counter beyond packet");
    end
  end
endmodule
