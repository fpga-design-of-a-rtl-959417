// turbo_system -- cdma2000 turbo encoder, BPSK/AWGN test channel and decoder.
//
// The paper tests its decoder on an FPGA together with a hardware encoder, a
// BPSK demodulator model and an AWGN channel whose noise sits in a RAM.  This
// top wires that chain: start loads 250 information bits into the encoder,
// the 256 XY pairs it sends (one per cycle) are mapped to +-1.0, the noise word
// of each pair is added, and the noisy pairs fill the receive buffer.  When all
// 256 pairs are in, the decoder starts by itself and runs n_iter iterations,
// fetching (Cs,Cp0) or (C's,Cp1) from the buffer.  done pulses with the 250
// decoded bits valid on decoded.  The sequencing between the parts (a
// three-phase controller) is this design's own; the paper's test system does
// not describe it.
//
// Interface: data_in, n_iter and lc must be stable from start until done.
// The noise RAM is loaded beforehand through noise_we/noise_waddr/noise_s/
// noise_p (word k is added to pair k).  Latency: 2 + 256 + 2 cycles of
// encoding and transport, then 1 + (12*253 + 4)*2*n_iter cycles of decoding.
module turbo_system
  import turbo_pkg::*;
#(
  parameter int unsigned ITW = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [NINFO-1:0] data_in,
  input  logic [ITW-1:0]   n_iter,
  input  soft_t            lc,
  input  logic             noise_we,
  input  logic [AW-1:0]    noise_waddr,
  input  soft_t            noise_s,
  input  soft_t            noise_p,
  output logic             busy,
  output logic             done,
  output logic [ITW:0]     pass_cnt,
  output logic [NINFO-1:0] decoded
);
  typedef enum logic [1:0] {T_IDLE, T_SEND, T_DECODE} tphase_t;
  tphase_t    phase;
  logic [1:0] xy;
  logic       xy_valid, enc_done, enc_busy;
  soft_t      xs, yp, ch_cs, ch_cp, buf_cs, buf_cp;
  logic       ch_valid, full, dec_start, dec_busy, dec_done;
  logic       in_rd, in_sel;
  logic [AW-1:0] in_k;
  logic       clear;

  assign clear     = (phase == T_IDLE) && start;
  assign dec_start = (phase == T_SEND) && full;
  assign busy      = (phase != T_IDLE);
  assign done      = dec_done;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      phase <= T_IDLE;
    end else begin
      unique case (phase)
        T_IDLE:   if (start) phase <= T_SEND;
        T_SEND:   if (full)  phase <= T_DECODE;
        T_DECODE: if (dec_done) phase <= T_IDLE;
        default:  phase <= T_IDLE;
      endcase
    end
  end

  turbo_encoder u_enc (
    .clk, .rst_n, .start(clear), .data_in, .xy, .xy_valid, .done(enc_done),
    .busy(enc_busy));

  bpsk_demodulator u_demod (.xy, .xs, .yp);

  awgn_channel #(.DEPTH(NPAIR)) u_chan (
    .clk, .rst_n, .noise_we, .noise_waddr, .noise_s, .noise_p,
    .clear, .in_valid(xy_valid), .xs, .yp, .c_valid(ch_valid), .cs(ch_cs), .cp(ch_cp));

  channel_buffer u_buf (
    .clk, .rst_n, .clear, .in_valid(ch_valid), .in_cs(ch_cs), .in_cp(ch_cp),
    .count_full(full), .rd_en(in_rd), .rd_k(in_k), .rd_sel(in_sel),
    .cs(buf_cs), .cp(buf_cp));

  turbo_decoder #(.ITW(ITW)) u_dec (
    .clk, .rst_n, .start(dec_start), .n_iter, .lc, .in_rd, .in_k, .in_sel,
    .cs(buf_cs), .cp(buf_cp), .busy(dec_busy), .done(dec_done), .pass_cnt,
    .decoded);
endmodule
