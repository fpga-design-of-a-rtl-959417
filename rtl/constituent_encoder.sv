// constituent_encoder -- one cdma2000 recursive systematic convolutional encoder.
//
// Three D flip-flops s1,s2,s3 in series and four XOR gates, as in the paper:
// the feedback a = u ^ s2 ^ s3 enters s1, and the rate-1/2 parity is
// y0 = a ^ s1 ^ s3 (generator 1+D+D^3 over feedback 1+D^2+D^3, the cdma2000
// polynomials; the second parity Y1 is punctured at rate 1/2 and not built).
// In tail mode the input is replaced by the feedback s2 ^ s3, so a = 0 and
// three tail steps return the register to state 0; the systematic output is
// then the tail bit itself (cdma2000 trellis termination; the paper only says
// that tail bits are produced after Nturbo bits).
//
// Interface: x and y0 are combinational from the present state and input; on a
// rising clk edge with en=1 the state advances.  rst_n (active low, synchronous)
// clears the state.  The state is exported for testing.
module constituent_encoder (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       en,     // advance one trellis step
  input  logic       tail,   // 1: termination step, u is ignored
  input  logic       u,      // information bit
  output logic       x,      // systematic output
  output logic       y0,     // parity output
  output logic [2:0] state   // {s1,s2,s3}
);
  logic s1, s2, s3, a, fb;

  assign fb    = s2 ^ s3;
  assign x     = tail ? fb : u;
  assign a     = x ^ fb;              // 0 during tail
  assign y0    = a ^ s1 ^ s3;
  assign state = {s1, s2, s3};

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      {s1, s2, s3} <= 3'b000;
    end else if (en) begin
      {s1, s2, s3} <= {a, s1, s2};
    end
  end
endmodule
