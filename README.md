# Booster transverse damper with a built-in tune monitor

This design is the FPGA logic of a bunch-by-bunch transverse damper for a fast-cycling proton
synchrotron, with 84 RF buckets per turn and a 15 Hz cycle. It also contains a tune monitor that
uses the same hardware. For each plane (horizontal and vertical), the damper measures the
position of every bunch on every turn. It computes a correcting kick from the last few turns of
that bunch, and it sends the kick to a kicker on a later turn.

The tune monitor takes one chosen bunch and stops damping it. It excites the bunch with noise,
with anti-damping (a kick of the wrong sign), or with both, and records its position for 128
turns. A 128-point FFT of those positions then gives the betatron tune.

The table holds up to 64 such measurements per plane, each with its own start turn and
excitation. Together they track the tune over the whole acceleration cycle. The other bunches
stay damped all the time. For each measurement the monitor stores the power spectrum and the three
highest peaks inside a tune window, and a host reads them over the register bus.

The two planes are independent copies of the same logic. They share only the bucket/turn counter
and the register bus.

```
 ADC (4 samples/bucket)                                              DAC (14 bit)
   |                                                                   ^
   v                                                                   |
  ddc --Q--> fir_filter --------> exciter ----------------------> kick_delay
   |         (taps 0,1,2,4 turns)  (output gain, damp mask,         (0..255 buckets,
   |                                noise / anti-damping)            saturation)
   |                                   ^
   | position of the selected bunch    | running, start turn, entry
   v                                   |
  tm_sequencer --> x window --> fft128 --> mag_sq --> spectrum_ram (64 x 64 bins)
   (64-entry table)  (win_ram)   (128 pt)    |
                                             +--> peak_finder --> peak_ram (64 x 3)
  cycle_ramp: gains, output gain and delay per segment of the cycle
  bunch_timing: bucket 0..83 and turn since cycle_start
  vme_regs: register map for the host
```

## Clocking and the bucket tag

Everything runs on one clock: the RF clock, locked to the beam, one cycle per RF bucket. The RF
sweeps from 37 to 52.8 MHz through the cycle, so the clock frequency changes too. Nothing in the
logic depends on absolute time. Every count is in buckets or turns.

Each clock carries the four ADC samples of one bucket, because a 4×RF sample clock is about
211 Msps at the top of the ramp. `bunch_timing` numbers the buckets 0..83 and counts turns from the
`cycle_start` pulse. Its 16-bit turn count saturates at 65535, which is enough for a cycle of about
15 000 to 21 000 turns.

Every datapath stage passes a `tag_t {bunch, turn}` along with its data. Each block therefore
decides from the tag whether a sample is the selected bunch, which turn of a measurement it is, or
whether the bunch is masked. None of them needs its own counter that could drift against the
others.

## The damper path (`damper_channel`)

| Stage | Block | Latency | What it does |
|---|---|---|---|
| Down-conversion | `ddc` | 1 clock | I = s0 − s2 and Q = s1 − s3 from the four samples. This is mixing with a carrier at a quarter of the sample rate. The analog timing is set so that Q is the bunch position. I is computed but not used. |
| Filter | `fir_filter` | 2 clocks | y = g0·x[n] + g1·x[n−1] + g2·x[n−2] + g3·x[n−4], where n counts turns of the same bunch. |
| Excitation and gain | `exciter` | 1 clock | See below. |
| Delay | `kick_delay` | delay + 1 clocks | Delays the kick by 0..255 buckets, then saturates it to 14 bits. |

**Down-conversion.** The ADC is 12 bits; Q is 13 bits.

**Filter.** The turn delays are RAM delay lines of 84, 168 and 336 words (`turn_delay`). The gains
are signed Q2.14 (16384 = 1.0). Taps at 0, 1, 2 and 4 turns span five turns. With suitable gains
the filter removes the closed orbit and supplies the betatron phase advance from pickup to kicker.
Choosing those gains is up to the host.

The testbenches use a two-tap damper from the textbook: g0 = −G·cos μ / sin μ and
g1 = G / sin μ, with μ = 2π·tune. This gives a kick proportional to the momentum a quarter
oscillation downstream. Its gains do not sum to zero, so it does not remove the closed orbit; in
the beam model the orbit offset then only adds a constant kick. A three-tap set with gains summing
to zero removes the orbit as well.

**Excitation and gain.** The filter output is multiplied by the output gain (Q2.14) and kept only
for bunches enabled in the 84-bit damping mask.

**Delay and total latency.** The delay sets which bucket the kick lands on: the kicker must hit the
same bunch, and cable and amplifier delays are counted in buckets. The total latency from ADC to DAC
is 5 + delay clocks. To kick a bunch one turn after it was measured, set delay = 84 − 5 = 79.

**Changes through the cycle.** Because the energy and revolution frequency change through the
cycle, the four gains, the output gain and the delay come from `cycle_ramp`. This is a table of 16
segments, each with a start turn. At bucket 0 of each turn, the next segment takes over once its
start turn has been reached. The new values are registered, so they change together, two clocks
after bucket 0 of that turn. A host write to the active segment takes effect two clocks after the
write, which allows live changes; a write that lands mid-turn changes the settings for the rest of
that turn.

## Exciting the measured bunch (`exciter`)

While a measurement captures, the bunch it measures is handled differently:

- **Damping.** Damping is off for the whole 128 turns, so that the bunch oscillates freely and its
  spectrum shows the tune. Counting starts at the measurement's first turn.
- **Anti-damping.** For `ad_turns` turns the kick is −(y·ad_gain) >>> 14. This is the damping kick
  with its sign reversed, so the oscillation grows.
- **Noise.** For `noise_turns` turns a 16-bit random value from a 32-bit LFSR
  (x^32+x^22+x^2+x+1), scaled by `noise_amp` (32768 = 1.0), is added to the kick.

Each measurement sets its own numbers of turns (8 bits each) and its own anti-damping gain. Noise
alone, anti-damping alone, both, or neither are all possible.

**The three-clock hold.** The sequencer sees a bunch two clocks before the exciter does. So
`running`, `start_turn` and the entry stay valid for three clocks after the last sample. Without
this hold, the 128th turn would be damped again before the exciter reached it.

## The tune monitor (`tune_monitor`)

### Sequencer

`tm_sequencer` holds a table of up to 64 entries: start turn, noise turns, anti-damping turns and
anti-damping gain. After `cycle_start` it waits for the turn of the next entry. It then sends the
selected bunch's position to the FFT once per turn for 128 turns, with the sample index and the
measurement number.

A capture also waits until the FFT is free. If an entry's start turn comes before the previous
spectrum has left the FFT, the capture starts a few turns late instead of being lost. The end-to-end
test makes this happen on purpose.

### Window

Each sample is multiplied by the window coefficient of its turn, (pos·w) >>> 16. The coefficients
are in `win_ram` (128 × 16 bits, unsigned, 65535 ≈ 1.0), loaded by the host. Any window shape is
possible; the tests use a Hann window and a flat one.

### FFT (`fft128`)

The FFT works in burst mode. It collects all 128 samples at their bit-reversed addresses while
`ready` is high. It then computes in place: 7 stages of 64 radix-2 butterflies, one butterfly per
clock, which takes 448 clocks. Finally it streams bins 0..63 one per clock. The input is real, so the
upper half of the spectrum is the mirror of the lower half.

- **Twiddle factors.** These are cos and sin of 2πk/128, computed at elaboration and rounded to
  Q2.14. The value 1.0 is exact in that format.
- **Rounding and width.** Products are rounded to nearest. There is no scaling between stages:
  outputs are 13 + 7 + 1 = 21 bits, which cannot overflow.
- **Timing.** Bin 0 appears 450 clocks after the last sample enters.

`mag_sq` forms Re² + Im² (42 bits, 2 clocks). No square root is taken, because the peak order is
the same either way.

### Storing spectra and peaks

- **Spectra.** `spectrum_ram` keeps all 64 spectra of a cycle (64 × 64 × 42 bits). This is enough
  for a contour plot of the tune over the whole cycle.
- **Peaks.** `peak_finder` scans the same stream. A bin is a peak if it is higher than the bin below
  it and not lower than the bin above it. Peaks inside [win_lo, win_hi] (in bins) enter a sorted
  list of three; a new peak displaces only those it strictly exceeds. The list is ready one clock
  after the last bin, and `peak_ram` stores it under the measurement number.
- **Timing.** The peaks of a measurement are stored 519 clocks (about six turns) after its 128th
  sample. `peak_done` pulses at that moment.

### Reading a tune

Bin k is a fractional tune of k/128, or 1 − k/128. With one position sample per turn the two cannot
be told apart, and the integer part of the tune (6 in both planes of this machine) cannot be seen. One bin is 0.0078 in tune.

## Register map (`vme_regs`)

The bus is the FPGA side of a VME slave. A request lasts one clock: `bus_req`, `bus_we`, an 18-bit
word address and 32-bit data. `bus_ack` (with `bus_rdata` for a read) follows two clocks later.

| Address | Content |
|---|---|
| 0x00000 | ID 0xB0057E12 (read only) |
| 0x00001 | {turn, 9'b0, bucket} at the time of reading (read only) |
| P<<16 + 0 .. 11 | Per-plane registers, P = 1 horizontal, 2 vertical. In order: tune-monitor enable, selected bunch, number of measurements, window low bin, window high bin, noise amplitude, damping mask (3 words: bunches 0–31, 32–63, 64–83), number of ramp segments, status {spectra done << 8 \| captures started} (read only), active segment (read only) |
| P<<16 + 0x1000 + {seg[3:0], field[2:0]} | Ramp table. Fields: 0 start turn, 1–4 gain 0–3, 5 output gain, 6 delay |
| P<<16 + 0x2000 + {entry[5:0], field[1:0]} | Measurement table. Fields: 0 start turn, 1 noise turns, 2 anti-damping turns, 3 anti-damping gain |
| P<<16 + 0x3000 + index[6:0] | Window coefficients |
| P<<16 + 0x4000 + {meas[5:0], rank[1:0], half} | Peaks (read only). Half 0 is magnitude[31:0]. Half 1 is {bin in bits 21:16, magnitude[41:32]} |
| P<<16 + 0x8000 + {meas[5:0], bin[5:0], half} | Spectra (read only). Half 0 is bits 31:0, half 1 is bits 41:32 |

All tables and registers can be written at any time, including during a cycle. The status counters
restart at each `cycle_start`.

## Where this design departs from or adds to the source description

The description this design follows gives the two block diagrams (damper and tune monitor), the
sizes (84 buckets, 12-bit ADC, 14-bit DAC, five-turn filter with taps at 0/1/2/4 turns, 128-point
burst FFT, up to 64 measurements, three peaks) and the kinds of excitation. Everything else is this
design's own choice. That includes:

- **Four samples per bucket.** The DDC works on four samples per bucket, delivered in parallel.
- **Excitation placement.** The excitation is added after the output gain. Only the output gain
  precedes the delay, as in the diagram.
- **The measured bunch is undamped** for the full 128 turns of its measurement.
- **Measurements wait for the FFT** instead of overlapping it. At most one spectrum is in flight.
- **Only bins 0..63 are kept.** The peak rule is a local maximum, and the tune window is given in
  bins. No interpolation between bins is done, so the resolution is one bin (1/128).
- **Position source.** The monitor takes the bunch position from the DDC. The damper diagram draws
  the monitor's input from the filter sum, but the text describes measuring the position of the
  excited bunch. Position data gives the bunch's own tune spectrum, whatever the filter gains are.
- **The ramp** is a 16-segment table switched on turn boundaries.
- **The register map and the bus** are this design's own. The VME backplane protocol is not
  included.
- **Unused converters.** The board has four ADCs and four DACs. Only one ADC and one DAC per plane
  are used here.

## Testbenches

`fft128` and `peak_finder` carry assertions for the rules of their inputs: no sample offered to a
busy FFT, and bins in order with the last one flagged.

Every block has a self-checking testbench `tb/tb_<block>.sv`. Each one ends by printing
`TB_RESULT checks=N failures=M` and has a watchdog.

- **Arithmetic blocks.** These are compared against a reference model computed in the testbench.
  `tb_fft128` uses a floating-point DFT and checks every bin to within rounding. It also checks the
  450-clock latency and that `ready` drops during the burst.
- **`tb/beam_model.sv`.** This is a behavioural model of the beam, pickup and kicker. It is not
  part of the design. Each bunch is a rotating oscillator at the tune of its plane. The DAC word
  present at its bucket kicks it, and its position plus a closed-orbit offset comes back as ADC
  samples. An optional coupling term mixes the two planes' positions.
- **`tb_booster_damper_top`.** This runs the whole design at its default sizes for about 620 turns.
  It loads all tables over the bus and checks several things:
  - every kick against a model of the damping law;
  - the noise and anti-damping kicks, which bunch gets them, and for how many turns;
  - that an oscillation is damped, and that a bunch left out of the damping mask keeps its oscillation;
  - that each spectrum's highest peak is at the tune bin;
  - that the ramp switches segment at its start turn;
  - that a capture waits for a busy FFT.

  It counts each of these events and fails if any of them never happens.
- **`tb_booster_cycle`.** This runs a complete cycle for both planes at default sizes: 64
  measurements per plane, one every 260 turns from turn 1500 to about turn 18000, each with 16
  turns of noise and a Hann window. The beam's tune steps between measurements.

  Both planes measure the same bunch. The beam model leaks a quarter of each plane's motion into
  the other plane's pickup, a simple stand-in for betatron coupling. Each spectrum therefore holds
  both tunes. The test reads the peaks back over the bus. For every measurement it checks that the
  highest peak is the plane's own tune, and that the second is the other plane's tune and is
  lower. It takes about 1.6 million clocks.

To simulate one with plain Verilator (version 5):

```
verilator --binary --timing -Irtl -Wno-fatal --top-module tb_booster_cycle \
    rtl/booster_pkg.sv rtl/*.sv tb/beam_model.sv tb/tb_booster_cycle.sv
./obj_dir/Vtb_booster_cycle
```

Give `rtl/booster_pkg.sv` first. `rtl/*.sv` names it a second time; if your Verilator objects to
that, list the other rtl files by hand. Most block testbenches need only the package and the
block's own file with its sub-blocks.

## Changing the design

The shared sizes are in `rtl/booster_pkg.sv`:

| Constant | Value | Meaning |
|---|---|---|
| `HARMONIC` | 84 | Buckets per turn |
| `ADC_W` / `DAC_W` | 12 / 14 | Converter widths |
| `FFT_N` | 128 | FFT length |
| `N_MEAS` | 64 | Table entries |
| `N_PEAKS` | 3 | Peaks kept |
| `N_SEG` | 16 | Ramp segments |
| `TURN_W` | 16 | Turn counter width |

The other widths follow from these: the position is ADC_W + 1 bits, and the FFT width is position
width + log2(FFT_N) + 1.

To change `FFT_N`, change `FFT_LOG`, `N_BINS` and `BIN_W` with it. Change the bus address fields in
`vme_regs` too if the tables grow past their address ranges.

## Resources

The four-tap filter and the exciter each use one multiplier per gain. The window multiply and the
FFT butterfly use one multiplier each, and `mag_sq` uses two.

Memory per plane:

| Memory | Size |
|---|---|
| Turn delay lines | 588 × 13 bits |
| Kick delay | 256 words |
| Spectrum RAM | 64 × 64 × 42 bits, the largest |
| FFT work RAM | 128 complex words |
| Tables, window and peaks | Small |

Together this is about 430 kbit for both planes, which fits the block RAM of a mid-size FPGA.
