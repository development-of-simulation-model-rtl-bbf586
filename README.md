# Single-carrier BPSK transceiver with a bang-bang Costas loop

A small satellite talks to its ground station over one radio carrier. Each
data bit flips the carrier's phase by 0 or 180 degrees (binary phase shift
keying, BPSK), which for the same bit error rate needs far less signal power
than the audio frequency shift keying that small satellites often use. The
receiver's hard part is the carrier: it must rebuild a local copy of it,
at the right frequency and phase, from a signal whose phase keeps flipping
with the data. This design does that with a Costas loop made of very plain
digital parts: a flip-flop as phase detector, a shift register as loop filter
and a multiplexer as the oscillator's control.

Everything runs at one sample per clock with 8-bit signed samples. The
transmitter and the receiver sit side by side in `sc_transceiver_top`; the
DAC, ADC and RF parts are outside it.

```
 tx_bit ─► line_coder ─► nrz ─┐
                              ▼ select
            dds ─► carrier ─► bpsk_mux ─► tx_sample ──(DAC, channel, ADC)──┐
                                                                           │
 rx_sample ◄───────────────────────────────────────────────────────────────┘
    │
    ├─► × lo_i ─► lpf ─► arm_i ─┬──────────────────────► bit_detector ─► rx_bit
    │   (rx_mixer)              ▼
    └─► × lo_q ─► lpf ─► arm_q ─► phase_discriminator ─► loop_filter ─► up/dn
                                                                        │
              lo_i, lo_q ◄────────────── vco_mux ◄──────────────────────┘
```

## Numbers

| quantity | default | where it is set |
|---|---|---|
| sample width (ADC/DAC, LPF input) | 8 bits signed | `sc_pkg::SAMPLE_W` |
| filtered arm width (LPF output) | 16 bits signed | `sc_pkg::FILT_W` |
| samples per carrier cycle | 16 (carrier = f_clk/16) | `SAMPLES_PER_CARRIER` |
| carrier cycles per bit | 4 (one bit per 64 clocks) | `CARRIERS_PER_BIT` |
| oscillator phase accumulator | 16 bits, step 4096 | `PHASE_W`, `FCW` |
| sine table | 256 entries, amplitude 127 | `LUT_AW`, `AMPLITUDE` |
| loop-filter length | 4 decisions | `LF_LEN` |
| VCO phase step per correction | 128/65536 cycle (0.70 degrees) | `VCO_STEP` |

The two widths 8 and 16 are those of the original LPF implementation. The
other numbers are choices of this RTL; nothing in the design depends on their
particular values beyond what is said below.

## Transmitter

`line_coder` takes bits on a valid/ready handshake. `bit_ready` is high in
the last clock of each 64-clock bit period; the bit offered then is held as a
unipolar NRZ level (1 or 0) for the next 64 clocks. If no bit is offered, a 1
is sent instead and `tx_idle` pulses, so the transmitter never stops and an
idle link carries a plain carrier.

`dds` is a 16-bit phase accumulator advancing 4096 per clock; its top 8 bits
address `sine_lut`, a table computed at elaboration as
`round(127 * sin(2*pi*k/256))`. `bpsk_mux` is the modulator: a 2:1
multiplexer whose inputs are the carrier and its negation and whose select
is the NRZ bit (1 → +carrier, 0 → −carrier). Since 64 is a whole number of
carrier cycles and both counters start at reset, every bit begins at carrier
phase 0. Sample `k` (counting clocks from the first edge after reset) leaves
on `tx_sample` after edge `k+1`.

There is no pulse shaping: the spectrum of `tx_sample` is that of
rectangular-pulse BPSK.

## Receiver: the Costas loop

### Why a Costas loop

Multiplying the received `d·sin(θ)` (with `d = ±1`) by the local references
`sin(θ̂)` and `cos(θ̂)` and removing the double-frequency terms gives

```
I = d/2 · cos(θ − θ̂)        Q = d/2 · sin(θ − θ̂)
```

`I` carries the data. The product `I·Q = sin(2(θ − θ̂))/8` no longer depends
on `d`, so it is a usable phase error even while the data flips the carrier.
Its zero crossings with positive slope are at `θ − θ̂ = 0` and `180°`: the loop
locks at either, and which one it picks depends on where it starts. That is
the BPSK phase ambiguity; this design does not resolve it (no preamble, no
differential coding), so after a 180-degree lock every received bit comes out
inverted.

### The parts

* `rx_mixer` forms `x·lo_i` and `x·lo_q`, 8 × 8 bits, and keeps the top 8 bits
  of each (arithmetic shift by 7). One clock latency.
* `lpf`, one per arm, is a moving sum over the last 16 samples (one carrier
  period), kept as a running total with a 16-deep delay line. A window of
  exactly one carrier period has a zero at twice the carrier frequency, so the
  `cos(θ + θ̂)` terms cancel exactly and only the slow part remains (gain 16).
  Output 16 bits, one clock latency plus the 16-sample window.
* `phase_discriminator` uses only the sign of `I·Q`: a flip-flop captures the
  XNOR of the two sign bits every clock (`adv = 1`: the local carrier lags,
  advance it). A second flip-flop flags the decision invalid when either arm
  is exactly zero.
* `loop_filter` shifts every valid decision into a 4-bit window. When the
  window is full and all four agree, it emits one `up` or `dn` pulse and
  empties itself; a mixed window gives nothing. This is a sequential filter:
  it suppresses single wrong decisions and caps the correction rate at one
  pulse per four clocks.
* `vco_mux` is a phase accumulator whose increment comes from a 3:1
  multiplexer: 4096 normally, 4096 + 128 on `up`, 4096 − 128 on `dn`. Each
  pulse therefore moves the local phase by 0.70 degrees. Two table reads give
  `lo_i = sin(phase)` and `lo_q = sin(phase + 90°)`.

### Loop behaviour

The loop is first order and bang-bang: every correction is the same size, and
only its sign follows the error. Some consequences, with the defaults:

* **Pull-in speed.** At most one correction per 4 clocks, so the phase moves
  at most 32 units (0.18 degrees) per clock: a 90-degree error closes in about
  512 clocks, eight bits. The testbenches allow 24–30 bits.
* **Frequency range.** The same limit is a frequency offset the loop can
  follow: ±32/4096 of the carrier, ±0.78 %. A carrier inside that range is
  tracked with more `up` than `dn` pulses (or the reverse); outside it the
  loop slips cycles.
* **Steady state.** Locked, the decisions alternate and the loop dithers by a
  few steps around the lock point; the 256-entry table adds 1.4 degrees of
  quantisation. The tests see the phase error stay within ±20 degrees, and a
  20-degree error costs only `1 − cos 20° = 6 %` of the bit energy.
* **Loop delay.** The LPF window and the registers put about 20 clocks between
  a phase step and the decision it causes, so the loop overshoots by up to
  five steps (3.5 degrees). Raising `VCO_STEP` or lowering `LF_LEN` speeds
  pull-in and widens the frequency range, at the price of more dither.

### Noise performance

`tb_bpsk_ber` runs the whole transceiver (transmitter, a channel adding white
Gaussian noise, an 8-bit ADC model, receiver) at its default sizes. The
signal is scaled to amplitude 32 so that the noise is rarely clipped. Each
point starts from reset, so it includes the loop's own acquisition:

| Eb/N0 | bits | errors | measured BER | ideal coherent BPSK |
|---|---|---|---|---|
| 4.0 dB | 20 000 | 294 | 1.5e-2 | 1.25e-2 |
| 6.0 dB | 40 000 | 118 | 3.0e-3 | 2.4e-3 |
| 8.0 dB | 100 000 | 18 | 1.8e-4 | 1.9e-4 |
| 9.6 dB | 1 000 000 | 9 | 9e-6 | 9.7e-6 |

So the receiver loses a few tenths of a dB to ideal BPSK, and reaches the
textbook 1e-5 at 9.6 dB. The test fails if any point is worse than ideal BPSK
1 dB lower. Per sample the signal-to-noise ratio is about −8.5 dB at 9.6 dB
Eb/N0; the loop still works because each phase decision sees a 16-sample sum
and the loop filter asks four of them to agree.

## Bit decision and timing

`bit_detector` takes the filtered `I` arm once per carrier period, at the
clock where a free-running 0..15 counter equals `DS_PHASE` (3), adds four such
values, and at every fourth one decides `sum ≥ 0 → 1` and restarts. Since
each down-sample is already a sum over 16 samples, the four together sum
`I` over one whole bit: the integrate-and-dump matched filter of a
rectangular pulse. The sum also leaves on `metric` as a soft decision.

There is no symbol-timing recovery. The counters start at reset, and the
defaults `DS_PHASE = 3`, `DUMP_PHASE = 0` place the windows on the bit
boundaries for the top's own loop-back (`rx_sample` = `tx_sample`,
transmitter and receiver reset together). The arithmetic: bit `b` occupies
samples `64b … 64b+63`; these reach `rx_sample` one clock after `tx_sample`
shows them, pass the mixer (+1) and the LPF (+1), so the LPF sum ending with
sample `64b+63` is present after edge `64b+66` and is taken at edge `64b+67`.
The first decision, at edge 3, covers the clocks before the first bit and is
meaningless; from then on, received bit `r` is transmitted bit `r − 1`. A
channel delay of a few samples only shortens the useful part of each window
(by `2·delay/64` of it) and rotates the carrier phase, which the loop absorbs.
A real link with its own timing needs a symbol synchroniser ahead of this
block.

## Departures and open points

The design follows a published model of a nanosatellite transceiver that
names its digital parts (a DDS feeding sine data to a 2:1 mux modulator, an
LPF with 8-bit input and 16-bit output, a flip-flop phase discriminator, a
shift-register loop filter, a VCO built from a mux, down-sampling and a
matched filter) but gives few of their insides. These are the points where
this RTL made its own choices:

* The transmitter has no pulse-shaping filter; it is a plain mux.
* The line code is unipolar NRZ; the phase detector, loop filter and VCO rules
  described above (sign of `I·Q`, all-agree window, increment mux) are one
  simple reading of "flip-flop", "shift register" and "multiplexer"; the exact
  original circuits are not known.
* The matched filtering is split in two: the one-carrier-period LPF inside
  the loop, then down-sampling, then a per-bit sum outside it.
* No 180-degree ambiguity resolution and no symbol-timing recovery, as above.
* The references are `sin`/`cos` of the VCO phase. Costas loops are usually
  drawn with `2cos`/`−2sin` for a cosine carrier; for the sine carrier used
  here `sin`/`cos` is the same pair rotated by 90 degrees.
* Reset is asynchronous, active low, and clears every register (the VCO
  loads `INIT_PHASE`, 0 by default).

## Files

| file | contents |
|---|---|
| `rtl/sc_pkg.sv` | shared widths, rates and types |
| `rtl/sine_lut.sv` | sine table, computed at elaboration |
| `rtl/dds.sv`, `rtl/line_coder.sv`, `rtl/bpsk_mux.sv`, `rtl/bpsk_transmitter.sv` | transmitter |
| `rtl/rx_mixer.sv`, `rtl/lpf.sv`, `rtl/phase_discriminator.sv`, `rtl/loop_filter.sv`, `rtl/vco_mux.sv` | Costas loop parts |
| `rtl/bit_detector.sv`, `rtl/costas_receiver.sv` | bit decision and the receiver |
| `rtl/sc_transceiver_top.sv` | both sides together |
| `tb/tb_<module>.sv` | one self-checking testbench per module |
| `tb/tb_ref_pkg.sv` | reference sine for the testbenches |

## Simulation

Every testbench ends with `TB_RESULT checks=N failures=M` and compares the
design with values computed in the testbench (real-valued sines, plain
integer sums). To run one with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv \
    rtl/sc_pkg.sv tb/tb_ref_pkg.sv tb/tb_sc_transceiver_top.sv \
    --top-module tb_sc_transceiver_top -Mdir obj -o sim
./obj/sim
```

| testbench | what it shows |
|---|---|
| `tb_sc_transceiver_top` | full loop-back at default sizes through a 2-sample channel delay: 400 random bits with idle gaps; bit `r` out equals bit `r−1` in after the loop settles; one bit per 64 clocks; idle fill, `up` and `dn` corrections all occur |
| `tb_costas_receiver` | receiver alone against an ideal BPSK source 60 degrees off in phase and 0.15 % high in frequency: bits correct, phase error within ±20 degrees (mod 180), more `up` than `dn` pulses |
| `tb_bpsk_transmitter` | every output sample equals ±round(127·sin(2πk/16)) with the sign of the bit sent |
| `tb_bpsk_ber` | bit error rate over a noisy channel at 4, 6, 8 and 9.6 dB Eb/N0 (about a minute of simulation) |
| `tb_dds`, `tb_vco_mux` | sample-exact oscillator outputs; VCO steps on `up`/`dn` |
| `tb_lpf` | exact moving sums on random data; a full-scale tone at twice the carrier is removed completely |
| `tb_rx_mixer`, `tb_bpsk_mux`, `tb_phase_discriminator`, `tb_loop_filter`, `tb_bit_detector`, `tb_line_coder` | each block against a reference model, clock by clock |

The simulator used has two-state logic; the testbenches initialise
everything they read.
