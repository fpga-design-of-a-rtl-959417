# A serial Max-Log-MAP turbo decoder for cdma2000 packets of 250 bits

This is the RTL of an iterative turbo decoder for the cdma2000 rate-1/2 turbo
code, with one packet length: 250 information bits, or 253 trellis steps once
the three tail bits of each constituent code are counted. A single soft-in
soft-out (SISO) unit runs the Max-Log-MAP algorithm. It is time-shared between
the two constituent decoders: each iteration runs it twice, first on the
natural-order data (decoder 1) and then on the interleaved data (decoder 2).
The extrinsic information passes between the two passes through a shift
register and two large multiplexers that perform the interleaving. All
arithmetic is 20-bit two's complement with 10 fractional bits.

The decoder is wrapped in the chain used to exercise it:

- a cdma2000 turbo encoder with puncturing and trellis termination;
- a BPSK mapper;
- an AWGN channel whose noise samples are loaded into a RAM from outside;
- a receive buffer that depunctures the data and interleaves the systematic stream.

The top level, `turbo_system`, takes 250 bits and a noise vector and returns
250 decoded bits. A one-iteration decode takes 6081 clock cycles; n iterations
take `1 + 3040·2n` cycles.

```
 data_in ─► turbo_encoder ─► bpsk_demodulator ─► awgn_channel ─► channel_buffer ─► turbo_decoder ─► decoded
            (2 RSC + ROM        (bit → ±1.0)       (+ noise RAM)   (256 pairs,        (control_unit,
             interleaver,                                          depuncture,         siso_decoder,
             puncturing)                                           interleave Cs)      output_unit)
```

## Number format

A soft value is `soft_t`, a signed 20-bit number scaled by 1024:

- `+1.0` is `0x00400` and `-1.0` is `0xFFC00`.
- The "minus infinity" that starts the unreachable trellis states is
  `-250.0 = 0xC1800`.

Products of two soft values (only `Lc·C` occurs) are shifted right by 10 bits;
the shift floors. Every sum simply wraps modulo 2^20.

Wrapping is allowed on purpose. The state metrics grow without bound over 253
steps, and nothing renormalises them. Instead, every "greater than" in the
datapath (`turbo_pkg::greater`) looks at the **sign of the wrapped difference**
`a − b`, not at `a` and `b` themselves. This gives the right answer whenever
the two compared metrics lie within ±512.0 of each other, which holds by a wide
margin for metrics of the same trellis step. It is the usual modulo
normalisation, with no extra hardware. The paper itself only speaks of
"greater-than comparators". Replacing the comparison with a plain signed
`a > b` gives wrong answers as soon as metrics wrap.

## The code and the trellis

Each constituent encoder (`constituent_encoder`) is the cdma2000 recursive
systematic code:

- three flip-flops `{s1,s2,s3}`;
- feedback `a = u ⊕ s2 ⊕ s3` (1 + D² + D³);
- parity `y0 = a ⊕ s1 ⊕ s3` (1 + D + D³).

During termination the systematic output is the feedback bit itself, so the
register is empty after three steps.

The state number is `4·s1 + 2·s2 + s3`, and the tables in `turbo_pkg` follow
from it:

| state m        | 0 | 1 | 2 | 3 | 4 | 5 | 6 | 7 |
|----------------|---|---|---|---|---|---|---|---|
| NEXT1[m]       | 4 | 0 | 1 | 5 | 6 | 2 | 3 | 7 |
| NEXT0[m]       | 0 | 4 | 5 | 1 | 2 | 6 | 7 | 3 |
| branch metric  | γ10 | γ10 | γ12 | γ12 | γ12 | γ12 | γ10 | γ10 |

Only two branch metrics exist per step:

```
γ10 = (La + Lc·(Cs + Cp)) / 2        γ12 = (La + Lc·(Cs − Cp)) / 2
```

The bit-1 branch leaving state m carries `+γ`, using the metric from the last
table row. The bit-0 branch leaving the same state carries `−γ`. So every
add-compare-select (`acs_cell`) is `max(m1 + g, m2 − g)`, one adder, one
subtractor and one comparator. The /2 is an arithmetic shift of the 21-bit sum.

### Interleaver

The cdma2000 standard defines its interleaver by a lookup table per block
size, and 250 is not one of its sizes. The permutation used here keeps the
structure of the cdma2000 algorithm, with the constants chosen for this
design:

- An 8-bit counter is split into a row `r` (3 MSBs) and a column `c` (5 LSBs).
- The candidate address is `bitrev5(c)·8 + ((r+1)·MULT[c] mod 8)`.
- Candidates ≥ 250 are skipped.

`MULT` is a table of 32 odd constants in `turbo_pkg`. The package computes the
table at elaboration time (`pi_table()`), so no data file is needed. The
convention everywhere is `x'[k] = x[PI[k]]`. Replacing the permutation means
editing `MULT` or `pi_table()`; the reference model in `tb/tb_ref_pkg.sv`
(`make_pi`) must be changed the same way.

### Transmission order and puncturing

`turbo_encoder` sends one `{X, Y}` pair per clock, 256 pairs in all:

1. Pairs 0–249: X with the parity of encoder 1 (Y0) on even steps, or with the
   parity of encoder 2 (Y'0) on odd steps. This is the standard rate-1/2
   pattern.
2. Pairs 250–252: the three tail pairs of encoder 1.
3. Pairs 253–255: the three tail pairs of encoder 2.

The bits are loaded in parallel from `data_in` and shifted out. The second
encoder reads its input through `interleaver_rom`: a ROM of addresses and a
250-input multiplexer.

## Receive side

The AWGN channel (`awgn_channel`) adds noise word k to pair k. Noise RAM
addresses follow the order of arrival. Noise generation is not part of the
hardware: a testbench draws Gaussian samples and writes them through the
`noise_*` port.

`channel_buffer` stores the 256 received pairs and serves the decoder one
step at a time. It does not hold 759 words (Cs, Cp0 and Cp1 for 253 steps).
Instead, depuncturing and systematic interleaving happen in its read address:

| decoder, step k      | systematic        | parity                    |
|----------------------|-------------------|---------------------------|
| 1, k < 250           | Cs[k]             | Cp[k] if k even, else 0   |
| 2, k < 250           | Cs[PI[k]]         | Cp[k] if k odd, else 0    |
| 1, tail k = 250..252 | pair k            | pair k                    |
| 2, tail k = 250..252 | pair k+3          | pair k+3                  |

Lc, the channel reliability `2/σ²`, is an input of the decoder; the system
that knows the noise level supplies it.

## The decoder

`turbo_decoder` contains three parts:

- `control_unit`, the state machine;
- `siso_decoder`: branch metric, α, β and LLR blocks with three memories;
- `output_unit`: extrinsic computation, interleaving and decisions.

### One SISO pass

The forward loop goes through the trellis steps k = 0…252. For each step it:

- reads `Cs`, `Cp` and the a priori LLR `La`;
- computes γ10 and γ12 into two registers;
- writes them to two 253×20 memories;
- writes the α metrics of step k (one 160-bit word) to a 253×160 memory;
- updates the α register with the eight ACS results of step k+1.

The first α is the constant `{C1800 ×7, 00000}`: state 0 certain, the others
"impossible". This is correct because each encoder starts in state 0.

The backward loop runs k = 252…0. For each step it:

- reads γ10, γ12 and α_k from the memories;
- forms the LLR from α_k, the γs and the β register (β_{k+1});
- updates β to β_k.

β starts from the same constant, because the tail drives each encoder back to
state 0. The LLR is

```
L(k) = max over m (α_k[m] + γ(m,1) + β_{k+1}[NEXT1[m]])
     − max over m (α_k[m] − γ(m,1) + β_{k+1}[NEXT0[m]])
```

It is formed with two trees of seven comparators each (`llr_unit`).

### Schedule

The controller has a reset state and 14 working states. Each loop takes 6
cycles per step:

| state | forward loop (k = 0…252)                     | state | backward loop (k = 252…0)              |
|-------|----------------------------------------------|-------|----------------------------------------|
| S1    | read pair k from the buffer                  | S7    | read the γ, α and c+d memories         |
| S2    | leave if k = 253; capture Cs, Cp, La         | S8    | load the c+d register                  |
| S3    | load the γ registers                         | S9    | load the LLR register                  |
| S4    | write the γ and c+d memories (wr1), the α memory (wr2) | S10   | shift the extrinsic (en7) and a posteriori (en8) registers |
| S5    | load the α register                          | S11   | load the β register, count             |
| S6    | count                                        | S12   | loop while fewer than 253 steps are done |

After the backward loop:

- S13 counts the pass.
- S14 either starts the next pass or returns to reset and pulses `done`.

A pass takes `(6·253 + 2) + (6·253 + 2) = 3040` cycles. Counting the reset
cycle, a decode of n iterations takes

```
cycles = 1 + 3040 · 2 · n          (6081 for n = 1, 24321 for n = 4)
```

At 100 MHz, four iterations take about 0.24 ms.

This schedule makes no attempt to overlap work. Every state is one clock, and
memories are read one state before their data are used. That leaves room to
merge states without touching the datapath, as long as read latencies are
respected. Cycle counts are checked exactly by the testbenches, so any
rescheduling will show there.

### Extrinsic information and the output unit

The extrinsic LLR is the a posteriori LLR minus what the decoder was given:

```
ext(k) = L(k) − (La(k) + Lc·Cs(k))
```

`La + Lc·Cs` is computed in the forward loop, when both operands are at hand,
and kept in a third 253-word memory (the "c+d" memory). In the backward loop it
is read back next to L(k).

The backward loop produces one `ext` and one `L` per step, last step first.
They are shifted into two 5060-bit registers (253 × 20 bits). After a pass
these registers hold the values in natural step order, fully parallel. The a
priori input of the next pass is picked from that register by two 253-input
multiplexers:

- decoder 2 reads `ext[PI[k]]` (interleaving);
- decoder 1 reads `ext[PI⁻¹[k]]` (deinterleaving).

A 2-input multiplexer, selected by which decoder is running, chooses between
them. Tail steps get an a priori value of 0, and so does the first pass: the
extrinsic register is cleared at `start`.

The decisions are taken from the a posteriori register after decoder 2's pass:
`decoded[i] = (L[PI⁻¹[i]] ≥ 0)`. All 250 comparators work in parallel. Because
the register is overwritten by every decoder-2 pass, `decoded` shows the
decisions of the latest completed iteration. The workload testbenches sample
it once per iteration.

## How it behaves

The performance testbenches decode through the whole `turbo_system`, with
`Lc = 2/σ²` and `σ² = 1/(2·R·Eb/N0)`, R = 1/2. The paper this design follows
quotes SNRs without defining them, and its BER curves fall several dB earlier
on its axis than these do. Absolute values are therefore not comparable; the
trends are.

Correctly decoded bits out of 250, mean over 20 packets, 7 iterations
(`tb_workload_snr`):

| iteration | 0.35 dB | 1.35 dB | 2.35 dB |
|-----------|---------|---------|---------|
| 1 | 219.5 | 230.9 | 247.0 |
| 2 | 223.3 | 234.8 | 249.8 |
| 3 | 221.1 | 233.9 | 250.0 |
| 4 | 218.8 | 237.2 | 250.0 |
| 5 | 220.0 | 237.8 | 250.0 |
| 6 | 220.6 | 238.1 | 250.0 |
| 7 | 221.3 | 236.7 | 250.0 |

Bit error rate per iteration, 200 packets (50,000 bits) per point
(`tb_workload_ber`):

| Eb/N0 (dB) | it 1 | it 2 | it 3 | it 4 | it 5 | it 6 | it 7 |
|-----|------|------|------|------|------|------|------|
| −3 | 2.80e-1 | 2.80e-1 | 2.80e-1 | 2.77e-1 | 2.82e-1 | 2.83e-1 | 2.81e-1 |
| −2 | 2.47e-1 | 2.55e-1 | 2.52e-1 | 2.53e-1 | 2.53e-1 | 2.55e-1 | 2.53e-1 |
| −1 | 2.12e-1 | 2.21e-1 | 2.26e-1 | 2.25e-1 | 2.25e-1 | 2.22e-1 | 2.23e-1 |
| 0 | 1.61e-1 | 1.68e-1 | 1.72e-1 | 1.72e-1 | 1.68e-1 | 1.72e-1 | 1.73e-1 |
| 1 | 8.71e-2 | 7.58e-2 | 7.06e-2 | 6.45e-2 | 5.95e-2 | 5.79e-2 | 5.56e-2 |
| 2 | 2.68e-2 | 6.32e-3 | 4.80e-3 | 5.06e-3 | 4.70e-3 | 2.46e-3 | 1.68e-3 |

For reference, the raw error rate of the channel symbols (rate 1/2, so
Es = Eb/2) is 0.159 at 0 dB, 0.131 at 1 dB and 0.104 at 2 dB. The same
reference decoder with a pseudo-random interleaver in place of the
structured one behaves about the same, so these numbers reflect Max-Log-MAP
on a 250-bit block rather than the particular permutation.

Three behaviours stand out:

- At low SNR, iterating does not help. Extra passes can even add errors,
  because the exchanged extrinsic values are as unreliable as the channel.
- In the middle of the range, the gain of iterating is large. Most of it comes
  in the first three or four iterations.
- Max-Log-MAP on a 250-bit block occasionally leaves a packet stuck with a
  few tens of errors that more iterations do not remove.

No scaling of the extrinsic values is applied. (Scaling by about 0.7 is a
common refinement of Max-Log-MAP and would be a one-line change in
`output_unit`.)

## Size

Yosys' generic synthesis of `turbo_system` counts about 10,900 flip-flop bits
and 78,000 memory bits:

- Flip-flops: about 10,100 bits are the two 5060-bit shift registers of the
  output unit.
- Memories: the α memory (253 × 160 bits) is 40,480 bits, the largest single
  memory. The other memory bits are the three 253 × 20 memories, the 2 × 256 ×
  20 receive buffer, the 2 × 256 × 20 noise RAM and the interleaver ROM.

The two 253-input, 20-bit multiplexers of the output unit are the largest block
of logic.

## Where this design departs from or completes the paper

The main choices:

- **Interleaver contents**: this design's own, as described above.
- **Branch metric table versus the LLR equation and LLR figure.** The paper's
  LLR equation pairs state 5 with γ10 on the "ones" side. Its LLR figure groups
  states 0–3 with γ10 and 4–7 with γ12. Its branch table, and the trellis
  itself, give γ10 for {0,1,6,7} and γ12 for {2,3,4,5}; the branch table was
  followed.
- **The factor 1/2 in γ**: present in the paper's table and equation, missing
  in its branch-metric figure. The table was followed.
- **Which LLR feeds the decisions**: the paper once says the deinterleaved
  *a priori* LLR of decoder 2. Elsewhere, in its architecture figure, it says
  the *a posteriori* LLR of the SISO. The a posteriori value is used.
- **α memory address**: printed as 5 bits in the architecture figure, too few
  for 253 entries; 8 bits are used.
- **Extrinsic formation**: `La + Lc·Cs` is stored during the forward loop (the
  c+d memory) rather than recomputed.
- **Receive buffer**: depuncturing and interleaving are done by addressing
  rather than by storing 759 words.
- **What each controller state enables**: the paper gives only the loop
  structure, the state names and the cycle count. The assignment in the table
  above is this design's, chosen to reproduce the paper's cycle count exactly.
- **Handshakes, resets and the top-level sequencing**: this design's. Resets
  are synchronous and active low. `start` is a one-cycle pulse. Inputs must
  stay stable until `done`.
- **n_iter**: 4 bits wide (1–15 iterations; 0 is taken as 1).

## Verification

Each module has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`. Expected values come from `tb/tb_ref_pkg.sv`,
an independent model written straight from the equations:

- The trellis is explored by trying both input bits in every state; no
  NEXT/PRED tables are used.
- The α, β and LLR recursions run over all 16 transitions per step.
- The arithmetic copies the RTL's wrap and rounding rules, so the SISO, the
  decoder and the whole system can be compared bit for bit.

| testbench | what it establishes |
|-----------|--------------------|
| `tb_turbo_pkg` | tables against the code, permutation and its inverse, wrapped comparison |
| `tb_constituent_encoder`, `tb_turbo_encoder`, `tb_interleaver_rom` | encoder output against the model for random packets, timing of the 256 pairs |
| `tb_bpsk_demodulator`, `tb_awgn_channel`, `tb_channel_buffer` | mapping, noise addition, depuncturing and interleaving of every step |
| `tb_branch_metric`, `tb_acs_cell`, `tb_alpha_unit`, `tb_beta_unit`, `tb_llr_unit`, `tb_metric_ram` | datapath blocks on random and boundary values |
| `tb_siso_decoder`, `tb_output_unit`, `tb_control_unit` | a full pass against the model; the controller's cycle count |
| `tb_turbo_decoder` | bit-exact LLRs and decisions over several iterations; 6081 cycles per iteration |
| `tb_turbo_system` | end to end at full size: decisions bit-exact against the reference chain, the cycle count, and error-free decoding at a good Eb/N0. It also counts that every mechanism occurred: both puncturing selector ports, tail pairs of both encoders, zeroed parities, interleaved reads, initial α and β, both decoders, nonzero a priori values, several iterations and both decision values |
| `tb_workload_snr`, `tb_workload_ber` | the performance runs above, with bit-exact checks against the model on the first packet of each point |

Running one testbench with Verilator 5 (the package has to come first):

```
verilator --binary --timing --assert --top-module tb_turbo_system \
    rtl/turbo_pkg.sv tb/tb_ref_pkg.sv -y rtl -y tb +libext+.sv tb/tb_turbo_system.sv
./obj_dir/Vtb_turbo_system
```

`tb_turbo_system` runs at the full size in a few seconds, and
`tb_workload_ber` in about a minute. The number of packets per point
(`PKTS`) can be raised to 1000 to get 250,000 bits per point.

## What is not here

- Only the 250-bit packet length and rate 1/2 are supported.
- The interleaver is not a cdma2000 table.
- Noise generation is outside the hardware.
- The decoder is the serial one. A variant that computes 11 trellis steps at
  once (replicated branch, α, β and LLR blocks, 23 steps per pass) is not
  included.
- Nothing targets a particular FPGA. The area and clock rate of the original
  FPGA implementation cannot be reproduced with these sources alone.
