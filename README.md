# A frame-based, clock-gated Viterbi decoder for the WiMAX K = 7, rate 1/2 code

This is a hard-decision Viterbi decoder for the mandatory convolutional code
of IEEE 802.16 (WiMAX): constraint length K = 7, rate 1/2, generators 171 and
133 (octal), 64 trellis states. It is built for low switching activity rather
than for throughput. Data arrive in short frames of 40 trellis stages, and
each frame ends with six zero tail bits. So the decoder always knows that a
frame starts and ends in state 0. The decoder exploits this in three ways:

* The survivor bits of a frame go into 40 separate 64-bit registers, one per
  trellis stage. Only one register is written per clock; the other 39 are
  not clocked at all. Nothing is shifted or exchanged.
* The trace-back does not run continuously. It runs once per frame, in one
  clock, from the known final state 0.
* The decoded frame leaves through a 40-bit parallel-to-serial register, so
  the output is again one bit per clock. With continuous input it is a gapless
  stream, delayed by 40 clocks.

The RTL is written in synthesizable SystemVerilog (IEEE 1800-2017). All sizes
are parameters or package constants, and their defaults are the design
values.

## Block diagram

```
 sym[1:0] ──► vd_pmu ─────────────── decisions[63:0] ──► vd_isus ── surv[40][64] ──► vd_traceback ── decoded[39:0] ──► vd_psi ──► dec_bit
 sym_valid    64 × vd_acs                                40 × 64-bit regs              40-stage mux chain                40-bit     dec_valid
              (each: 2 × vd_bmc,                         vd_ring_counter (40-bit       (combinational)                   shift reg
               2 adders, compare)  ◄── slot[0] (frame start) ── one-hot) ─ slot[39] ─► tb_en register ──── load ─────────►
              64 × 8-bit metrics
```

| module            | role                                                                  |
|-------------------|-----------------------------------------------------------------------|
| `vd_pkg`          | constants (K, states, frame length, metric width), generators, branch-code function |
| `vd_bmc`          | branch metric: Hamming distance of the received pair to a branch's pair |
| `vd_acs`          | add-compare-select for one state, with its two `vd_bmc`               |
| `vd_pmu`          | 64 `vd_acs` in parallel plus the 64 path metric registers             |
| `vd_ring_counter` | 40-bit one-hot stage counter                                          |
| `vd_isus`         | survivor store: 40 × 64-bit registers, written one per stage          |
| `vd_traceback`    | combinational trace-back of a whole frame                             |
| `vd_psi`          | 40-bit parallel-to-serial output register                             |
| `viterbi_decoder` | top level                                                             |

## Trellis numbering: the one convention everything depends on

A state is the last six input bits, with the **newest bit in bit 0**. When
input bit `u` arrives in state `p`, the next state is `{p[4:0], u}`. So:

* A state is even or odd according to the information bit that led into it.
  The decoded bit of a stage is simply the least significant bit of the state
  on the survivor path.
* States `S_2j` and `S_2j+1` have the same two predecessors: `S_j` (oldest
  bit 0, called the *lower* branch) and `S_j+32` (oldest bit 1, the *upper*
  branch).
* The survivor bit stored for a state is **1 when the upper branch survived**,
  and 0 otherwise. The previous state is therefore `{survivor_bit, S[5:1]}`.

The encoder shift register, newest first, is `{u, p[0], p[1], ..., p[5]}`.
Generator bit 6 taps `u` and generator bit `5-i` taps `p[i]`. A code pair is
`{out1, out2}`, with `out1` from 171 and `out2` from 133.
`vd_pkg::branch_code` computes the pair of any branch, and each `vd_acs`
instance evaluates it for its own state at elaboration time. The generator
polynomials are those of the 802.16 standard. Change `G1` and `G2` in
`vd_pkg` to decode another rate-1/2, K = 7 code.

## Frame format and interface

| port         | dir | width | meaning                                                 |
|--------------|-----|-------|---------------------------------------------------------|
| `clk`        | in  | 1     | clock; every register is on its rising edge             |
| `rst_n`      | in  | 1     | asynchronous reset, active low                          |
| `sym_valid`  | in  | 1     | `sym` holds a code pair and is taken on this edge       |
| `sym`        | in  | 2     | hard-decision code pair `{out1, out2}`                  |
| `dec_bit`    | out | 1     | decoded information bit                                 |
| `dec_valid`  | out | 1     | `dec_bit` is valid                                      |
| `frame_done` | out | 1     | the trace-back is enabled in this clock (once per frame) |

* A frame is 40 code pairs. The information bits of its last six stages must
  be zero (the tail), which returns the encoder to state 0. All 40 decoded
  bits are output, and the last six are always 0.
* The first pair accepted after reset starts a frame, and frames follow back
  to back. The decoder has no frame-start input: frame alignment is the job of
  the receiver in front of it.
* `sym_valid` may be low on any clock, and nothing advances on such a clock.
* Decoded bits leave in stage order: the first stage of the frame comes
  first.

### Timing

Suppose the code pair of stage 0 is accepted on edge `A`, and the rest of the
frame follows on consecutive edges.

```
edge        A      A+1  ...  A+39        A+40            A+41 ... A+79
sym_valid   1      1         1 (stage 39) (next frame)
tb_en                                ───1───
dec_bit                                    stage 0 bit    stage 1 ... stage 39
```

* Stage 39 is accepted on edge `A+39`, and `tb_en` is high for the following
  clock.
* On edge `A+40` the PSI samples the traced-back frame and starts sending it.
* The bit of stage `t` therefore leaves on edge `A+40+t`, exactly 40 clocks
  after its code pair was accepted.
* Each load arrives just as the previous frame's last bit leaves, so a
  continuous input gives a continuous output.

With gaps in the input, the output frame still comes out as 40 consecutive
bits, and `dec_valid` is low between frames.

## Path metrics (`vd_pmu`, `vd_acs`, `vd_bmc`)

Every state has its own ACS, so one trellis stage is computed per clock. The
ACS for state `S`:

1. forms both branch metrics, the Hamming distance between the received pair
   and each branch's pair, by XOR and a count of ones;
2. adds each to the predecessor's path metric;
3. keeps the smaller sum.

On equal sums the lower branch (`S_j`) is kept. This fixed rule stands in for
a random pick, and the testbench reference model uses the same rule, so the
two agree bit for bit even on noisy frames.

Path metrics are 8 bits wide and are never normalised. They restart at every
frame instead. When the pair of stage 0 arrives (ring counter in position
0), the ACS units do not read the stored metrics. They read 0 for state 0 and
128 for all other states. No path from state 0 can collect more than 2 × 40
= 80 within a frame, so the 128 start value can never win. Also
128 + 80 < 256, so no metric can overflow.

## Survivor store (`vd_isus`, `vd_ring_counter`)

`vd_isus` holds 40 registers of 64 bits. Register `i` receives the 64
survivor bits of stage `i`. A 40-bit one-hot ring counter advances on every
accepted pair, and its position is the stage number within the frame.

Register `i` is clocked only when bit `i` of the ring counter and `sym_valid`
are both high. A register is therefore written once per frame and holds still
otherwise. Compared with register exchange (every state's path register
rewritten every clock) or a shifting trace-back memory, this removes most of
the switching in the survivor memory, which is its largest part: 2560 of
about 2650 flip-flops.

The gating is written as a per-register clock enable, not as a gated clock
net. Synthesis maps an enable onto flip-flop CE pins (FPGA) or onto
integrated clock-gating cells (ASIC). Either way the registers are not
toggled, and simulation needs no special handling of derived clocks.

## One-clock trace-back (`vd_traceback`)

The trace-back is the least conventional part. Most Viterbi decoders read
one stage per clock from a RAM. This one walks all 40 stages in a single
combinational path:

```
state[40] = 0
for t = 39 downto 0:
    decoded[t] = state[t+1][0]
    state[t]   = { surv[t][ state[t+1] ], state[t+1][5:1] }
```

Each step is a 64-to-1 multiplexer, selected by the state found by the step
before, so the critical path is a chain of 40 multiplexers. The result only
matters in the one clock where `tb_en` is high, when `vd_psi` samples it. On
all other clocks the chain is idle: its inputs change only at the one
register written per stage.

It is expected to be the longest path in the design, longer than an ACS. If a faster clock is needed, split the
chain with a register and let `tb_en` last two clocks. That changes the
latency, and the PSI load must be moved accordingly.

## Parallel-to-serial output (`vd_psi`)

A 40-bit shift register with a 6-bit count of the bits still to send. A load
replaces the contents, even in the middle of a frame, and the register then
shifts right, one bit per clock. `out_valid` is high for exactly 40 clocks
after each load.

## Size

The synthesised top has about 2650 flip-flops:

* 2560 survivor bits;
* 512 path metric bits;
* the 40-bit ring counter;
* the 46-bit PSI;
* one enable flip-flop.

The combinational logic is 64 ACS units and the trace-back multiplexer chain.

## Verification

Each testbench is self-checking. It ends by printing
`TB_RESULT checks=<n> failures=<m>` and has a watchdog.

* **Reference models (`tb/vd_tb_pkg.sv`).** The encoder is a plain 7-bit
  shift register. The reference decoder is written differently from the RTL:
  it runs the trellis forward over (state, input) pairs and keeps whole paths
  by register exchange.
* **Unit testbenches:**
  * `tb_vd_bmc`: all 16 input pairs.
  * `tb_vd_acs`: four states, random metrics, forced ties.
  * `tb_vd_pmu`: decisions and all 64 metrics, stage by stage, over several
    frames with idle clocks.
  * `tb_vd_ring_counter`: the one-hot position follows the advances and
    wraps.
  * `tb_vd_isus`: a model of the store, and a check that at most one register
    changes per clock.
  * `tb_vd_traceback`: random stores, and stores with a planted path.
  * `tb_vd_psi`: bit order, valid length, reload mid-frame.
* **`tb_viterbi_decoder`** (end to end, default sizes). It sends 36 frames:
  clean, with seven spread code-bit errors, and with 1/8 random bit errors.
  Every frame must match the reference decoder. Clean and seven-error frames
  must also decode to the sent bits. The first 24 frames are back to back;
  for them it checks the 40-clock latency and a gapless output. The last 12
  have random idle clocks. It counts trace-back enables, corrected frames,
  idle clocks and seamless frame boundaries, and fails if any of these never
  happened.
* **`tb_seven_error_frame`.** One frame with seven inverted code bits, at
  code-bit positions 4, 15, 26, 37, 48, 59 and 70, must decode without error
  after 40 clocks.
* **`tb_ber_sweep`.** 1000 frames at each channel bit-error probability 1/64,
  1/32, 1/16 and 1/8. Every frame must match the reference decoder, and the
  decoded BER must be below the channel BER at the three lower probabilities.
  A typical run gives decoded BERs of 0, 0, about 0.007 and about 0.12,
  against channel BERs of 0.016, 0.031, 0.061 and 0.125. This is a
  hard-decision, binary-symmetric-channel measurement, not an AWGN soft-input
  BER curve.

To run any testbench with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
    --top-module tb_viterbi_decoder rtl/vd_pkg.sv tb/vd_tb_pkg.sv tb/tb_viterbi_decoder.sv
./obj_dir/Vtb_viterbi_decoder
```

Use the same command for the other testbenches, with their names in place of
`tb_viterbi_decoder`. For a unit test, `tb/vd_tb_pkg.sv` is only needed if
the testbench imports it. Each testbench finishes in well under a second.
Only `vd_ring_counter` carries an assertion (the counter stays one-hot).

## Where this RTL departs from the design it follows, or fills gaps

The source design specifies the following, and this RTL follows it:

* the block chain;
* one ACS per state built from XOR/popcount branch metrics, two adders and a
  comparator;
* the 40 × 64-bit survivor registers, clocked one at a time by a 40-bit ring
  counter;
* the trace-back rule and its start in state 0;
* trace-back once per frame, in one clock;
* the 40-bit parallel-to-serial output;
* the 40-clock delay.

The following are this design's own choices:

* **Generator polynomials** 171/133 and the pair order `{out1, out2}`. These
  come from the 802.16 standard.
* **Ties** go to the lower branch. The algorithm as usually stated picks at
  random.
* **Path metrics** are 8 bits, with the restart values 0/128 at each frame
  and no normalisation.
* **Clock gating** is written as clock enables (see above).
* **Trace-back** is written as a 40-stage combinational multiplexer chain.
  How the one-clock trace-back is realised was left open.
* **Interface details:** the `sym_valid` strobe and idle clocks, the
  `dec_valid` / `frame_done` outputs, alignment to the first pair after
  reset, and the asynchronous active-low reset.
* **Hard decisions only.** A receiver front end with a multi-bit quantizer
  would need soft branch metrics, which are not built here.

Not included: the transmitter-side encoder and the bit-flipping noise
generator, which exist only as testbench models. Tail-biting WiMAX frames are
not handled either. The decoder assumes zero-tail frames and always traces
back from state 0.
