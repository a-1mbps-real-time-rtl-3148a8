# Real-time NLOS ultraviolet photon-counting link: FPGA datapath in SystemVerilog

A non-line-of-sight (NLOS) ultraviolet link sends light at 266 nm into the sky
and picks up the part the atmosphere scatters down toward a receiver, here
about a kilometre away. So little light arrives that the receiver cannot
measure a waveform. Each photomultiplier tube (PMT) gives one short electrical
pulse per detected photoelectron, so the only observable is how many pulses
fall in a symbol. The number is Poisson distributed, with mean
`lambda_s + lambda_b` when the laser was on and `lambda_b` (solar background
plus dark counts) when it was off. The link uses on-off keying (OOK) at
2 Mbit/s, a rate-0.6 (12630, 7578) LDPC code, and three PMTs whose counts are
added together (receiver diversity). That gives a net throughput a little
above 1 Mbit/s.

This RTL covers the logic of the two FPGA boards in that link:

* **Transmitter.** It takes coded bits from the encoding PC, cuts them into
  frames with a synchronization and an indication header, and drives the
  laser modulator.
* **Receiver.** It turns the sampled PMT outputs into per-symbol
  log-likelihood ratios (LLRs). It collects them per LDPC block and sends
  each block to the decoding PC.

The LDPC encoder and decoder run in software on the PCs and are not part of
the RTL. Neither are the optics, the analog chain or the Ethernet links.

```
 coded bits ─► ook_framer ─► ook ─► [laser, scattering channel, 3 PMTs, filters, ADCs] ─► adc_sample[3]
  (from PC)    (bit_fifo)                                                                  │
                                                                                           ▼
 K x pulse_counter ─► egc_combiner ─► sync_detector ─► symbol_deframer ─► llr_compute ─► llr_packer ─► packet bytes
                                          │                                   ▲                          (to PC)
                                          └── pilot sums ─► channel_estimator ┘
```

`uv_link_top` holds the transmitter (`ook_framer`) and the receiver (`uv_rx`,
the chain above) side by side on one clock. The part between `ook` and
`adc_sample` is left open as ports.

## Numbers that fix the datapath

| quantity | value | origin |
|---|---|---|
| detectors K | 3 | system spec |
| OOK symbol rate | 2 Mbit/s | system spec |
| ADC sample rate = clock | 100 MHz | system spec |
| chips per symbol M | 10 (5 samples per chip, 50 clocks per symbol) | system spec |
| sync sequence length L | 64 symbols | system spec |
| indication field L_p | 17 symbols | system spec |
| LDPC block n_c | 12630 symbols, Q = 10 segments of 1263 | system spec |
| estimation precision p_s, p_b | 0.5, 0.01 | system spec |
| table limits Lambda_s, Lambda_b | 32, 64 (lambda_s up to 16, lambda_b up to 0.64) | design choice |
| peak-search window W | 100 chips (10 symbols) | design choice |
| guard between frames | 16 symbols of "off" | design choice |
| ADC width | 14 bits, signed | design choice |
| LLR width | 8 bits, two's complement | design choice |

All of these are parameters. The defaults are collected in `rtl/uv_pkg.sv`.

## Frame format

Each frame carries one tenth of an LDPC block:

```
| 64 sync symbols | 17 indication symbols | 1263 coded symbols | 16 guard zeros |
```

That makes 1360 symbols, or 680 us. The sync pattern is a 63-chip
m-sequence (x^6 + x^5 + 1) with a trailing 0, sent MSB first. It has 32
"on" and 32 "off" symbols, so it serves as the pilot for channel estimation
as well.

The indication field says which segment (0..9) of the block the frame
carries. Its encoding is a design choice. Index q is sent as a Hadamard
codeword: symbol p (p = 0..16, in order on air) is `parity(q AND (p mod 16))`.
Any two of the 16 possible codewords differ in 8 symbols. The receiver
decodes softly. For each candidate c it adds the LLRs of the symbols where
codeword c has a 1, which is c's log-likelihood up to a constant, and takes
the largest sum. A winner of 10 or more means a corrupted header, and the
frame is dropped.

This much protection is needed. At the intended operating point
(lambda_s = 5, lambda_b = 0.3 pulses per symbol) about 6 % of raw symbol
decisions are wrong. With a plain binary index, about half of all frames
would get a wrong index. Even four copies of the 4 index bits (distance 4)
misplaced about 3 % of frames. A misplaced frame corrupts the whole block
it lands in.

`ook_framer` starts a frame only when the FIFO holds a whole segment.
Between frames, `ook` stays 0.

## Pulse counting and combining

`pulse_counter` applies the rising-edge rule to each ADC stream. A pulse is
counted at a sample strictly above `v_thd` whose predecessor was strictly
below it. Counts are summed per chip of 5 samples. The previous sample is
carried across chip boundaries, so an edge that straddles two chips is
counted exactly once, in the chip that holds the sample above the threshold.

The PMTs give negative pulses. This RTL assumes the analog chain or ADC
presents them as positive-going. For raw negative pulses, negate the samples
before the counter.

`egc_combiner` is equal gain combining. It adds the three chip counts in a
register stage. This is valid because the three tubes sit close together
and see nearly the same intensity. The sum of Poisson counts is again
Poisson, so everything downstream treats the combined count as if it came
from one detector.

## Synchronization (the subtle part)

The receiver must find where a frame's sync sequence ends, to the chip
(50 ns), from very sparse pulse counts. Consider the last L·M = 640 chips at
chip time t as an L x M matrix C_t, one row per symbol. The detector
computes two metrics:

* `act(t) = s^T C_t 1_M`: the pulses that fell in positions where the sync
  pattern has a 1.
* `corr(t) = (2s-1)^T C_t 1_M = act(t) - off(t)`: a correlation that peaks
  when the pattern is aligned.

**Efficient computation.** A full search for the best t over every chip
would be too slow for real time. Instead, each chip is handled as follows:

* A running sum B(t) of the last M chip counts is kept. Row i of C_t is
  then simply `B(t - (i-1)M)`.
* A delay line of (L-1)·M+1 values of B feeds one L-input adder tree for
  `act` and one for `off`.
* Both trees are split over two register stages.

The detector therefore needs 4 clocks per chip. At 5 clocks per chip there
is one clock to spare.

**Trigger and window.** The search is not run everywhere.

1. The first chip t~ where `act(t~) > c_thd` opens a window of W = 100 chips.
2. The first maximum of `corr` inside the window is taken as the sync end t^.
3. `act` and `off` at t^ are latched. They are exactly the pilot sums that
   the channel estimator needs.

**Delayed chip stream.** By the time the window closes, the first data chip
(t^ + 1) is already in the past. The detector therefore also outputs the chip
stream delayed by W chips. After a detection it reports
`sync_skip = t^ - t~ + 1`. The deframer drops that many delayed chips, and
the next one is the first chip of the indication field. This costs a fixed
latency of W chips (5 us) and no buffer beyond a 100-entry shift register.

**Why W is 10 symbols.** Near the peak, `act` falls off slowly: one symbol
off alignment it still holds about half the "on" pulses. A noisy partial
alignment can therefore cross `c_thd` well before the true peak. With a
2-symbol window, about one frame in 30 at lambda_s = 5 was locked one
symbol off, which corrupts both the index and the data. With 10 symbols,
about one frame in 800 went wrong in simulation.

**Rearming.** After a detection the search is off until the deframer
signals the end of the frame, so data cannot trigger a false sync.

**Choosing `c_thd`.** This is a run-time input, and it decides the miss and
false-alarm behaviour. At the lab operating point (lambda_s = 5,
lambda_b = 0.3, summed over three tubes), a perfectly aligned sync gives
`act` around 32·5.3 ≈ 170. With the channel model of the testbenches:

| c_thd | effect |
|---|---|
| 100 to 110 | extra detections: noise in the guard triggers before the sync arrives |
| 120 (about 0.7 of the peak) | every frame found, no false detections |
| 140 and up | frames missed, 7 to 15 % at 140 |

The threshold has to track lambda_s. A fixed value suits one signal level
only. The strong-signal testbenches use 350. Their peak `act` is about 500,
lowered by pulses that merge. A threshold of 450 missed 1 or 2 frames in 10.

## Channel estimation

After each detection, `channel_estimator` turns the two pilot sums into
table indices:

```
lam_b_idx = floor( off * theta_b[n_off] )                          = floor(lambda_b / 0.01)
lam_s_idx = floor( act * theta_s[n_on] - off * theta_s[n_off] )    = floor(lambda_s / 0.5)
```

Here `theta_s[i] = 1/(0.5 i)` and `theta_b[i] = 1/(0.01 i)`, for i = 1..64.
These are reciprocal tables built at elaboration in fixed point with 16
fraction bits, so no divider is needed. `n_on` and `n_off` are the numbers of
ones and zeros in the sync pattern.

The second term of `lam_s_idx` is the background estimate expressed in
units of p_s. Without it, the result would be `lambda_s + lambda_b`, which
is what one hardware formula in the source description literally says. Its
estimator equations define lambda_s alone, and that is what is built. Both
indices are clamped to 1..Lambda, the range of the LLR table. The result is
ready 2 clocks after the detection and stays valid for the whole frame.

## LLR computation

For a Poisson count N, the LLR is `N ln((lambda_s+lambda_b)/lambda_b) - lambda_s`.
Dividing by the logarithm, which is the same for the whole frame, gives:

```
LLR = N - phi(i, j),   phi(i, j) = ceil( 0.5 i / ln((0.5 i + 0.01 j) / (0.01 j)) )
```

`llr_compute` holds phi for i = 1..32 and j = 1..64 in a table. The table is
computed at elaboration with `$ln` and `$ceil`; no data file is involved. phi
is looked up once per frame. Each symbol then costs one subtraction,
saturated to 8 bits.

Because of the common scale factor, the values are not true LLRs. A min-sum
decoder does not care about scale, but a sum-product decoder on the PC would
need to multiply by `ln((lambda_s+lambda_b)/lambda_b)`.

## Block assembly and the packet to the PC

`llr_packer` holds two banks of 12630 LLRs, so one block can be sent while
the next fills. For each frame:

1. The indication LLRs are combined into a segment index.
2. An index of 10 or more drops the frame, as a corrupted header.
3. Otherwise the 1263 data LLRs are written at `index x 1263`.

A block closes when:

* segment 9 ends, or
* a frame arrives whose index is not above the previous one. This means the
  tail of the old block was lost.

A closed block goes out on an 8-bit valid/ready stream:

```
byte 0-1   block sequence number, big endian
byte 2-3   bit mask of the segments received (bit q = segment q)
byte 4..   12630 LLRs in code order; segments never received are sent as 0 (erasures)
```

Missing segments are thus handed to the decoder as erasures rather than
dropping the whole block. If a block closes while the previous packet is
still being sent, the new block is discarded and `ev_overflow` pulses. At 2
Mbit/s a block takes 6.8 ms to arrive and 12634 clocks to send, so this only
happens when the PC side stalls.

`rx_events` brings out one-cycle pulses, in this order: trigger, peak move,
detection, frame end, block close, overflow, invalid index.

## Timing summary

| stage | latency |
|---|---|
| pulse_counter | chip count 1 clock after the chip's last sample |
| egc_combiner | +1 clock |
| sync_detector | detection 3 clocks after the chip that completes the window; chip stream delayed by W = 100 chips |
| symbol_deframer | symbol 1 clock after its last chip |
| channel_estimator | 2 clocks after detection (needed before the first data symbol, about 50 clocks later) |
| llr_compute | +1 clock |
| llr_packer | packet starts right after the block closes, 1 byte per clock when not stalled |

## Where this departs from, or adds to, the source design

* **Indication field encoding.** The source says only that the field holds
  the frame's position in the LDPC block. The Hadamard code and its soft
  decoding are this design's choices.
* **Channel estimation.** The lambda_s estimate subtracts the background, as
  the estimator equations require. The hardware formula in the source
  multiplies the "on" sum only.
* **Chosen values.** The source does not give the sync pattern, W, the guard
  length, Lambda_s/Lambda_b, the widths, the packet format, the two-bank
  buffer or the overflow policy. All of these are choices made here.
* **Segment order.** The transmitter numbers segments 0..9 itself. It
  assumes the PC sends the coded bits of each block in order.
* **Single clock.** Both boards share one clock in `uv_link_top`. Real
  boards have independent oscillators, and a clock offset would slowly move
  the chip grid within a frame. The receiver has no clock recovery beyond
  re-synchronizing each frame: 680 us at, say, 50 ppm is 34 ns, less than
  one chip.
* **Throughput.** The source's throughput figures count a frame as
  1263 + 17 + 64 symbols. The 16-symbol protection interval here, whose
  length the source does not give, lowers the efficiency from 1263/1344 to
  1263/1360.
* **Sync length.** The sync sequence is limited to 64 symbols (one 64-bit
  parameter). A 128-symbol sequence, which the source only compares
  against, does not fit.
* **Not built:** the LDPC encoder and decoder (PC software), the Ethernet
  links, and the laser, modulator, PMTs, analog front end and ADCs.

## How far it can be trusted

Every block has a self-checking testbench. Each one compares the block
against an independent model written in the testbench: a software edge
counter, a direct matrix evaluation of `act` and `corr`, floating-point
estimators and phi, and a byte-exact packet model. Each testbench was also
shown to fail on a deliberately broken copy of its block.

The end-to-end tests use `uv_channel_model`, a behavioural model of
everything between `ook` and the ADCs. It draws random photoelectron pulses
of fixed amplitude with a configurable delay, and it can force or blank the
light.

* **`tb_uv_link_top`** uses short frames (40 data symbols, 3 segments).
  Every other size is at its default. It makes each mechanism happen at
  least once: trigger, peak move, detection, a frame with an invalid index,
  a missed frame (so a block closes early with an erased segment), output
  back-pressure, and an overflow. It checks the packets byte by byte
  against the transmitted bits.
* **`tb_uv_link_full`** runs one complete block at the default sizes, with
  no parameter overrides. It uses a strong signal, about 21 pulses per "on"
  symbol. Result: one 12634-byte packet, all ten segments, 2 sign errors in
  12630.
* **`tb_uv_link_lab`** runs 100 frames by default at the operating point
  of the lab test (lambda_s = 5, lambda_b = 0.3), with c_thd = 120. Options
  `+blocks=`, `+lams=`, `+lamb=` and `+cthd=` change the point. Across
  eight seeds (800 frames):
  * every frame was synchronized;
  * one frame was placed wrongly;
  * the raw sign error rate was 6.4 to 6.9 %, against 5.3 % predicted by
    the Poisson model. The difference is probably due to pulses merging in
    the channel model.

**Limits.**

* The channel model is simple: no inter-symbol interference from the
  modulator, no pulse-height spread, and no clock offset.
* A few hundred frames say little about miss rates around 1e-3 or 1e-4,
  which is where the real system's requirements lie. The source's lab run
  lost about 0.25 % of 2e4 frames to missed synchronization.
* No LDPC decoding is simulated, so the frame error rate after decoding has
  not been measured.
* Nothing has been run on an FPGA, and no timing closure has been attempted
  at 100 MHz. The largest single-cycle structure is the two-stage 64-input
  adder tree in the synchronizer.

## Simulating with Verilator

Every testbench is a top module without ports that prints
`TB_RESULT checks=<n> failures=<n>` and finishes. It has its own watchdog.
The package must come first on the command line, and Verilator finds the
other modules in `rtl/` and `tb/` through `-y`.

```sh
# one block
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
    rtl/uv_pkg.sv tb/tb_sync_detector.sv --top-module tb_sync_detector -Mdir obj_sync
./obj_sync/Vtb_sync_detector

# the whole link, all defaults, one LDPC block (a few seconds)
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
    rtl/uv_pkg.sv tb/tb_uv_link_full.sv --top-module tb_uv_link_full -Mdir obj_full
./obj_full/Vtb_uv_link_full

# the lab operating point, with a different sync trigger threshold
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
    rtl/uv_pkg.sv tb/tb_uv_link_lab.sv --top-module tb_uv_link_lab -Mdir obj_lab
./obj_lab/Vtb_uv_link_lab +cthd=140
```

The available testbenches are `tb_pulse_counter`, `tb_egc_combiner`,
`tb_ook_framer`, `tb_sync_detector`, `tb_symbol_deframer`,
`tb_channel_estimator`, `tb_llr_compute`, `tb_llr_packer`, `tb_uv_link_top`,
`tb_uv_link_full` and `tb_uv_link_lab`. Uninitialized state is randomized by
Verilator's `+verilator+rand+reset+2`. The testbenches also pass with it,
since everything that is read is reset.

To change a system size, override the parameter on `uv_link_top` (for
example `NSEG`, `Q`, `W`) or edit the constants in `uv_pkg.sv`. The phi and
theta tables follow automatically, because they are computed from their
formulas at elaboration.
