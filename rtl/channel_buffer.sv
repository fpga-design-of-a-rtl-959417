// channel_buffer -- receive buffer and depuncturer in front of the turbo decoder.
//
// The channel delivers 256 (Cs, Cp) pairs in transmission order: 250 data pairs
// whose parity alternates between Y0 (even k) and Y'0 (odd k), then three tail
// pairs of encoder 1 and three of encoder 2.  The decoder needs, for each of
// its 253 trellis steps k, either (Cs_k, Cp0_k) for decoder 1 or (C's_k, Cp1_k)
// for decoder 2.  Following the paper, punctured parities are replaced by zero
// and the systematic stream is interleaved for decoder 2 (C's_k = Cs_PI[k] for
// k < 250; the tail steps use encoder 2's own tail symbols).  The paper states
// this function but not the hardware; this design stores the pairs unchanged in
// two 256 x 20 memories and does the depuncturing and interleaving on the read
// address, using the same interleaver table as the encoder.
//
// Interface: pairs are written with in_valid; clear restarts the write pointer
// and count_full rises after the 256th pair.  A read (rd_en, rd_k, rd_sel:
// 0 = decoder 1, 1 = decoder 2) returns cs/cp on the next clock edge.
module channel_buffer
  import turbo_pkg::*;
(
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clear,
  input  logic          in_valid,
  input  soft_t         in_cs,
  input  soft_t         in_cp,
  output logic          count_full,
  input  logic          rd_en,
  input  logic [AW-1:0] rd_k,
  input  logic          rd_sel,
  output soft_t         cs,
  output soft_t         cp
);
  soft_t           cs_mem [NPAIR];
  soft_t           cp_mem [NPAIR];
  logic [AW:0]     wptr;
  logic [AW-1:0]   s_addr, p_addr;
  logic            p_zero, is_tail;

  assign count_full = (wptr == (AW+1)'(NPAIR));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wptr <= '0;
    end else if (clear) begin
      wptr <= '0;
    end else if (in_valid && !count_full) begin
      wptr <= wptr + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid && !count_full) begin
      cs_mem[wptr[AW-1:0]] <= in_cs;
      cp_mem[wptr[AW-1:0]] <= in_cp;
    end
  end

  // read-address mapping: depuncturing and systematic interleaving
  always_comb begin
    is_tail = (rd_k >= AW'(NINFO));
    if (!rd_sel) begin
      s_addr = rd_k;
      p_addr = rd_k;
      p_zero = !is_tail && rd_k[0];           // odd data steps carry Y'0
    end else if (!is_tail) begin
      s_addr = (rd_k < AW'(NINFO)) ? PI[rd_k*AW +: AW] : '0;
      p_addr = rd_k;
      p_zero = !rd_k[0];                      // even data steps carry Y0
    end else begin
      s_addr = rd_k + AW'(NTAIL);             // encoder 2 tail pairs
      p_addr = rd_k + AW'(NTAIL);
      p_zero = 1'b0;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cs <= '0;
      cp <= '0;
    end else if (rd_en) begin
      cs <= cs_mem[s_addr];
      cp <= p_zero ? '0 : cp_mem[p_addr];
    end
  end
endmodule
