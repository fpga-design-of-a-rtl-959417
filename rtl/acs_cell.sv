// acs_cell -- add / subtract / compare cell of the alpha and beta blocks.
//
// out = max( m1 + g , m2 - g ), the paper's forward and backward metric cell:
// one adder, one subtractor and an "a > b" comparator driving a selector.
// For an alpha cell m1 and m2 are the metrics of the two predecessor states at
// step k; for a beta cell they are the metrics of the two successor states at
// step k+1.  The comparator looks at the sign of the wrapped difference (see
// turbo_pkg::greater), so metrics may wrap around without normalisation.
// Combinational, 20-bit.
module acs_cell
  import turbo_pkg::*;
(
  input  soft_t m1,    // metric reached through the +g branch (bit 1)
  input  soft_t m2,    // metric reached through the -g branch (bit 0)
  input  soft_t g,     // branch metric
  output soft_t out
);
  soft_t a, b;
  assign a   = m1 + g;
  assign b   = m2 - g;
  assign out = greater(a, b) ? a : b;
endmodule
