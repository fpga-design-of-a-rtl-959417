// turbo_encoder -- cdma2000 rate-1/2 turbo encoder (the paper's "Encoder" block).
//
// The 250 information bits arrive in parallel.  A shift register feeds them, one
// per cycle, to constituent encoder 1; the interleaving unit (ROM + 250-port
// multiplexer) picks the interleaved bit for constituent encoder 2 from the same
// parallel input, which must therefore stay stable while busy is high.  Each
// cycle one XY pair leaves through the selector:
//   data step k even : X_k, Y0_k   (selector port 0, encoder 1)
//   data step k odd  : X_k, Y'0_k  (selector port 1, parity of encoder 2)
//   3 tail steps     : encoder 1 terminated, X and Y0
//   3 tail steps     : encoder 2 terminated, X' and Y'0
// giving 250 + 6 = 256 pairs, i.e. Nturbo/R + 6/R' = 512 symbols, as in the
// paper.  The puncturing pattern and the tail order are those of cdma2000 for
// R = 1/2; the paper names them ("patrones de podamiento establecidos por el
// estandar") without listing them.
//
// Timing: start is sampled while idle; the first pair is valid (xy_valid=1) two
// cycles later and one pair follows every cycle; done pulses with the last pair.
// xy = {X, Y}.  The controller (the paper's FSM with en0/selector/en1) is
// this design's own three-phase counter.
module turbo_encoder
  import turbo_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,      // "inicio"
  input  logic [NINFO-1:0] data_in,    // bit i is the i-th information bit
  output logic [1:0]       xy,         // {X, Y}
  output logic             xy_valid,
  output logic             done,
  output logic             busy
);
  typedef enum logic [1:0] {IDLE, DATA, TAIL1, TAIL2} phase_t;
  phase_t          phase;
  logic [AW-1:0]   k;          // step counter, also the ROM address
  logic [NINFO-1:0] sr;        // "Register <<250"
  logic            en0, en1, en2, selector, tail1, tail2;
  logic            x1, y1, x2, y2, u2;
  logic [2:0]      st1, st2;
  logic [1:0]      port0, port1;
  logic [AW-1:0]   rom_word;    // ROM output, kept for observation

  assign busy     = (phase != IDLE);
  assign en0      = (phase == DATA);
  assign tail1    = (phase == TAIL1);
  assign tail2    = (phase == TAIL2);
  assign en1      = en0 | tail1;
  assign en2      = en0 | tail2;
  assign selector = tail2 | (en0 & k[0]);

  interleaver_rom u_rom (.addr(k), .data(data_in), .rom_addr(rom_word), .bit_out(u2));

  constituent_encoder u_enc1 (.clk, .rst_n(rst_n && !(phase == IDLE && start)),
    .en(en1), .tail(tail1), .u(sr[NINFO-1]), .x(x1), .y0(y1), .state(st1));
  constituent_encoder u_enc2 (.clk, .rst_n(rst_n && !(phase == IDLE && start)),
    .en(en2), .tail(tail2), .u(u2), .x(x2), .y0(y2), .state(st2));

  assign port0 = {x1, y1};
  assign port1 = {tail2 ? x2 : x1, y2};

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      phase    <= IDLE;
      k        <= '0;
      sr       <= '0;
      xy       <= '0;
      xy_valid <= 1'b0;
      done     <= 1'b0;
    end else begin
      xy_valid <= 1'b0;
      done     <= 1'b0;
      unique case (phase)
        IDLE: if (start) begin
          sr    <= {<<{data_in}};   // bit 0 at the MSB, sent first
          k     <= '0;
          phase <= DATA;
        end
        DATA: begin
          xy       <= selector ? port1 : port0;
          xy_valid <= 1'b1;
          sr       <= sr << 1;
          if (k == AW'(NINFO - 1)) begin
            k     <= '0;
            phase <= TAIL1;
          end else begin
            k <= k + 1'b1;
          end
        end
        TAIL1: begin
          xy       <= port0;
          xy_valid <= 1'b1;
          if (k == AW'(NTAIL - 1)) begin
            k     <= '0;
            phase <= TAIL2;
          end else begin
            k <= k + 1'b1;
          end
        end
        TAIL2: begin
          xy       <= port1;
          xy_valid <= 1'b1;
          if (k == AW'(NTAIL - 1)) begin
            k     <= '0;
            done  <= 1'b1;
            phase <= IDLE;
          end else begin
            k <= k + 1'b1;
          end
        end
        default: phase <= IDLE;
      endcase
    end
  end
endmodule
