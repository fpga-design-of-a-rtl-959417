// metric_ram -- single-port synchronous RAM of the SISO decoder.
//
// Used, as in the paper's SISO diagram, for the two 20-bit branch metric
// memories and the 160-bit alpha memory, each 253 words deep (one word per
// trellis step), and for the 20-bit memory of La + Lc*Cs of the output unit.
// The read is registered: rdata shows the word at addr one clock after re.
// A write and a read to the same port in one cycle are not used by the design.
module metric_ram #(
  parameter int unsigned W     = 20,
  parameter int unsigned DEPTH = 253,
  localparam int unsigned AWID = $clog2(DEPTH)
) (
  input  logic            clk,
  input  logic            we,
  input  logic            re,
  input  logic [AWID-1:0] addr,
  input  logic [W-1:0]    wdata,
  output logic [W-1:0]    rdata
);
  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[addr] <= wdata;
    if (re) rdata <= mem[addr];
  end
endmodule
