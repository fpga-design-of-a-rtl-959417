// awgn_channel -- AWGN channel model of the test system (the paper's "Canal").
//
// As in the paper, a RAM holds the noise samples (computed off-line, the paper
// used MATLAB's wgn) and an adder adds one 40-bit noise word {n_s, n_p} to each
// demodulated pair {Xs, Yp}, giving {Cs, Cp}.  An 8-bit counter addresses the
// RAM and advances with every pair, so pair k of a packet gets noise word k.
// The write port that fills the RAM is this design's addition: the paper does
// not say how the noise reaches the RAM.  Sums wrap in 20 bits, as plain adders
// do.
//
// Timing: the sum is registered; c_valid follows in_valid by one cycle.
// clear (synchronous) returns the counter to 0 at the start of a packet.
module awgn_channel
  import turbo_pkg::*;
#(
  parameter int unsigned DEPTH = 256,           // one word per XY pair (paper: 8-bit address)
  localparam int unsigned DAW  = $clog2(DEPTH)
) (
  input  logic           clk,
  input  logic           rst_n,
  // noise RAM load port
  input  logic           noise_we,
  input  logic [DAW-1:0] noise_waddr,
  input  soft_t          noise_s,
  input  soft_t          noise_p,
  // data path
  input  logic           clear,
  input  logic           in_valid,
  input  soft_t          xs,
  input  soft_t          yp,
  output logic           c_valid,
  output soft_t          cs,
  output soft_t          cp
);
  logic [2*SW-1:0] ram [DEPTH];
  logic [DAW-1:0]  cnt;
  soft_t           ns, np;

  always_ff @(posedge clk) begin
    if (noise_we) ram[noise_waddr] <= {noise_s, noise_p};
  end

  assign {ns, np} = ram[cnt];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cnt     <= '0;
      c_valid <= 1'b0;
      cs      <= '0;
      cp      <= '0;
    end else begin
      c_valid <= in_valid;
      if (clear) begin
        cnt <= '0;
      end else if (in_valid) begin
        cs  <= xs + ns;
        cp  <= yp + np;
        cnt <= cnt + 1'b1;
      end
    end
  end
endmodule
