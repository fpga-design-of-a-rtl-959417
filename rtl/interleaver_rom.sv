// interleaver_rom -- turbo interleaving unit of the encoder.
//
// As in the paper, a ROM holds the interleaver address for every position and
// a multiplexer with one 1-bit port per information bit picks, by that address,
// the bit that goes to the second constituent encoder.  The ROM contents are
// computed at elaboration from turbo_pkg::pi_table() (see there for the
// permutation, which is this design's own: the paper does not list it).
//
// Interface: purely combinational.  addr is the interleaved position k
// (0..N-1), rom_addr the ROM word PI[k], bit_out = data[PI[k]].
module interleaver_rom
  import turbo_pkg::*;
#(
  parameter int unsigned N = NINFO          // 250 input ports (paper)
) (
  input  logic [AW-1:0] addr,
  input  logic [N-1:0]  data,
  output logic [AW-1:0] rom_addr,
  output logic          bit_out
);
  logic [AW-1:0] rom [N];

  always_comb begin
    for (int k = 0; k < int'(N); k++) rom[k] = PI[k*AW +: AW];
  end

  assign rom_addr = (addr < AW'(N)) ? rom[addr] : '0;
  assign bit_out  = data[rom_addr];
endmodule
