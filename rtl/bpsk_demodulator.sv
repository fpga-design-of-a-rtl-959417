// bpsk_demodulator -- soft BPSK mapping of an XY pair (the paper's demodulator).
//
// A four-port multiplexer of constants, selected by {X,Y}: bit 1 becomes +1.0
// (0x00400) and bit 0 becomes -1.0 (0xFFC00), both in 20-bit two's complement
// scaled by 1024.  Port 3 = {00400,00400}, port 2 = {00400,FFC00},
// port 1 = {FFC00,00400}, port 0 = {FFC00,FFC00}, as printed in the paper's
// encoder figure.  The 40-bit output is {Xs, Yp}.  Combinational.
module bpsk_demodulator
  import turbo_pkg::*;
(
  input  logic [1:0] xy,      // {X, Y}
  output soft_t      xs,      // systematic soft value
  output soft_t      yp       // parity soft value
);
  always_comb begin
    unique case (xy)
      2'b11:   {xs, yp} = {SOFT_P1, SOFT_P1};
      2'b10:   {xs, yp} = {SOFT_P1, SOFT_M1};
      2'b01:   {xs, yp} = {SOFT_M1, SOFT_P1};
      default: {xs, yp} = {SOFT_M1, SOFT_M1};
    endcase
  end
endmodule
