# Real-time pulse timing for a 16-channel 1 GS/s transient recorder

Fast detector pulses, such as photomultiplier signals a few nanoseconds long,
must be timed to a few tens of picoseconds while the sampling period is a full
nanosecond. They also span a large range of amplitudes, and at rates of
several MHz per channel they pile up. The GANDALF transient recorder digitises
such pulses with 12-bit ADCs at 500 MS/s. Two ADCs can be interleaved to
sample one signal at 1 GS/s. An FPGA then extracts the arrival time, height
and charge of each pulse as the samples arrive.

This RTL implements that data-processing path. Arrival times come from a
**digital constant-fraction discriminator (dCFD)**. Each sample stream is
turned into y[n] = s[n] - F·s[n-D]. For a pulse of fixed shape, y crosses
zero at the same point of the leading edge whatever the amplitude. Linear
interpolation between the two samples around that crossing gives the time
stamp with 1/256-sample resolution. Everything is synthesisable
SystemVerilog (IEEE 1800-2017). The ADCs, clocking, memories and serial links
of the board are outside it.

## Data flow

```
 adc[0] adc[1]   ...   adc[14] adc[15]       16 ADC samples per clock
    \   /                  \   /
 adc_pair_merge  ...   adc_pair_merge        8 pairs; interleave[p] selects
   |      |              |      |            1 GS/s or 2 x 500 MS/s
   s0     s1             s0     s1           words of 2 samples
   |      |              |      |
 chain  chain   ...    chain  chain         16 chains, each:
                                              cfd_filter   -> s, y
                                              pulse_finder -> candidate
                                              zc_interp    -> hit
   |      |              |      |
 trig_hit[0..15]  ------------------------> one hit port per channel
   \______\______________/______/            (towards the trigger lanes)
              hit_merger                    16 FIFOs + round robin
                  |
             ro_hit (valid/ready)           one readout stream
```

`gandalf_dsp_top` holds all of this. The modules communicate with the types
in `gandalf_pkg`: `cand_t` is the pulse candidate before interpolation and
`hit_t` is the finished hit.

## Sample words and the interleaved mode

The whole path runs on the ADC sample clock and handles a *word* of two
samples per clock (`LANES = 2`), lane 0 being the earlier sample. How a word
is formed depends on the mode of the channel pair (`adc_pair_merge`):

* **Interleaved (`interleave[p] = 1`).** Both ADCs of the pair see the same
  signal. The second ADC is clocked 180° late, so the time order is a[n],
  b[n], a[n+1], ... Each clock gives one word {b[n], a[n]} on stream 0, which
  is one channel at twice the ADC rate. Stream 1 (the odd chain) is idle.
* **Normal (`interleave[p] = 0`).** The two ADCs are independent channels.
  Each stream packs two consecutive samples of its own ADC into a word every
  second clock.

Every chain therefore sees a uniform stream of sample words with a valid flag.
Delays, windows and time stamps are counted in samples *of that stream*: one
sample is 1 ns in interleaved mode and 2 ns in normal mode at 500 MS/s.
Changing the mode restarts the packing. Results from the first few words after
a switch mix the two modes, so a switch belongs in a quiet period followed by
a time-stamp reset.

## The constant-fraction filter (`cfd_filter`)

For every sample of a word the filter computes

```
s[n] = x[n] - baseline                      (signed, 15 bit)
y[n] = s[n] - floor(F * s[n-D])             (signed, 18 bit)
```

The samples are delayed by D, multiplied by the fraction F, inverted and added
to the undelayed samples. The delay `cfg_delay` runs from 1 to 15 samples. The
fraction `cfg_fraction` is unsigned Q2.6, so F = 0 ... 3.98 in steps of
1/64. For F > 1, y is positive while the pulse grows faster than a factor F
over D samples and turns negative after that. This happens at a fixed fraction
of the rise, independent of the amplitude, and is where the time is taken.

A shift register holds the last 15 baseline-subtracted samples. It moves by
two samples per valid word, and a multiplexer picks s[n-D] for each lane. The
filter has one register stage. Until 15 samples have arrived after reset, the
history holds zeros.

The baseline subtraction is this design's addition. On the board the analog
baseline of each channel is set by a 16-bit offset DAC. Subtracting a digital
baseline as well makes the threshold, height and charge relative to the
baseline.

## Finding the pulse (`pulse_finder`)

The finder walks through the samples of each word in order and keeps a small
state machine per chain:

1. **Zero suppression.** While idle, nothing is produced. A sample with
   s > `cfg_threshold` arms the finder and opens a window of `cfg_window`
   samples (at least 2), starting with the arming sample.
2. **Inside the window** it keeps the maximum of s (the pulse height) and the
   sum of s (the integrated charge). It also records the first place where y
   goes from a positive value to a value ≤ 0: the index t0 of the last
   positive sample and the values y0 = y[t0] and y1 = y[t0+1].
3. **At the end of the window** it emits a candidate {t0, y0, y1, height,
   charge} if a crossing was seen. Otherwise the pulse is discarded and `drop`
   pulses for one clock.
4. **Re-arming.** The finder can re-arm once s has fallen back to the
   threshold. It can also re-arm, while s is still above the threshold, as
   soon as y becomes positive again. On the falling tail of one pulse y stays
   negative, so a second rising edge means a piled-up pulse, which then gets a
   window of its own. A second pulse whose crossing falls inside the first
   pulse's window is not separated.

The coarse time t0 comes from a sample counter per chain. The counter is
cleared by `ts_reset`, which comes from the experiment's trigger and clock
distribution, and it advances by two samples per word. Windows of at least two
samples guarantee that at most one candidate leaves per word. A candidate
appears one clock after the word that holds the window's last sample.

The crossing direction (positive to ≤ 0) assumes pulses that rise in ADC
code. The input amplifier feeds the signal into its inverting input, so
negative photomultiplier pulses arrive that way. For the opposite polarity,
negate the samples in front of the filter.

## Interpolating the crossing (`zc_interp`)

The straight line through (t0, y0) and (t0+1, y1) crosses zero at

```
t = t0 + y0 / (y0 - y1),      0 < y0 / (y0 - y1) <= 1
```

The quotient is computed with one integer bit and 8 fractional bits by a
restoring divider unrolled into 9 pipeline stages, one quotient bit per stage.
A new candidate can enter every clock. The first stage only decides the
integer bit, which is 1 exactly when y1 = 0. The time stamp is
`t0 * 256 + quotient`, truncated. At 1 GS/s one unit is 3.9 ps. The latency
is 10 clocks, and the module writes its chain number into the hit.

Linear interpolation on a curved leading edge leaves a systematic error that
depends on where the samples fall relative to the pulse. In simulation
(below) this error sets a floor of about 25 ps rms at 1 GS/s with a 2 ns rise
time.

## Hits and readout

A hit (`hit_t`, 83 bits packed) holds:

| field    | width | meaning |
|----------|-------|---------|
| `ch`     | 4     | chain number 0-15 (an interleaved pair p reports as 2p) |
| `t`      | 40    | time stamp: 32-bit sample count since `ts_reset`, 8 fractional bits |
| `amp`    | 15    | pulse height, signed, codes above baseline |
| `charge` | 24    | sum of the samples in the window, signed |

Each chain's hits leave directly on `trig_valid[c]`/`trig_hit[c]`. These stand
for the 16 backplane lanes that carry amplitudes and time stamps continuously
to a trigger processor. The same hits also enter `hit_merger`, which has one
8-entry FIFO per chain and a round-robin arbiter. Its output `ro_valid`/
`ro_ready`/`ro_hit` is a standard valid/ready stream: a hit is taken when both
are high, and a stalled hit stays stable (an assertion checks this). A hit
that meets a full FIFO is lost, flagged on `ro_overflow` and counted in
`ro_overflow_count`, which saturates. The per-channel outputs are never
back-pressured.

## Settings

All settings are plain input ports. On the board they would be registers
written over the control bus.

| port | per | width | meaning |
|------|-----|-------|---------|
| `interleave` | pair | 1 | 1 = time-interleaved 1 GS/s |
| `cfg_delay` | chain | 4 | D, samples of the stream, 1-15 |
| `cfg_fraction` | chain | 8 | F · 64 |
| `cfg_baseline` | chain | `ADC_W` (12) | code subtracted from every sample |
| `cfg_threshold` | chain | 15 | arming level above baseline (signed) |
| `cfg_window` | chain | 8 | window length in samples (values < 2 act as 2) |

The settings should be stable while pulses are processed. A useful starting
point: D ≈ rise time in samples and F = 2.0 (`cfg_fraction = 128`). The
threshold should be a few noise rms above baseline, and the window a few
samples longer than the time from arming to the crossing.

## Timing summary

* Throughput: 2 samples per clock per chain. Every chain can take one hit per
  clock; the readout merger delivers one hit per clock in total.
* From the clock in which the last sample of a window is presented at `adc` to
  `trig_valid`: 1 (merge) + 1 (filter) + 1 (finder) + 10 (interpolation)
  clocks. In normal mode add up to one clock of word packing. `ro_valid`
  follows one clock later if the merger is idle.
* Single clock domain, asynchronous active-low reset `rst_n`. All state,
  including the FIFO pointers, is reset. The FIFO storage is not reset and is
  never read before it has been written.

## Where this RTL departs from the published design

The published description gives the algorithm (delay, fraction, addition,
zero crossing, linear interpolation), the quantities extracted (time, height,
charge), the interleaving scheme, the channel count and the sample width. The
following are this implementation's own choices:

* two-sample words for every chain, and packing of normal-mode samples into
  words every second clock;
* a digital baseline subtraction in front of the filter;
* the sign convention y = s − F·s[n−D] with F > 1. The prose of the
  description multiplies the delayed samples by a fraction; its figure shows
  them inverted. Both are covered, with 1/F as the classical fraction;
* zero suppression as an arming threshold, and the window, drop and re-arm
  rules;
* all word widths, the Q2.6 fraction, 8 fractional time bits, and truncation
  instead of rounding;
* the hit record, the per-channel FIFOs and round-robin merging;
* time stamps in samples of each stream, so that interleaved and normal
  channels use different units.

Not built: the ADCs, the analog input stage and offset DACs, the clock
synthesiser, the trigger/clock receiver, the second FPGA with its QDRII+ and
DDR2 memories, the serial links to that FPGA and to the backplane, the VME,
S-Link and USB interfaces, and the readout of full sample lists (which needs
the external memories).

The board can carry either a 12-bit 500 MS/s or a 14-bit 400 MS/s converter.
Parameter `ADC_W` of `gandalf_dsp_top` selects the sample width (12 by
default, 14 for the second type). Everything behind the baseline subtraction
is sized for 14 bits in both cases, so only the `adc` and `cfg_baseline`
ports change width.

## Verification

Each testbench in `tb/` checks itself and prints
`TB_RESULT checks=N failures=M`.

| testbench | what it checks |
|-----------|----------------|
| `tb_adc_pair_merge` | word contents and rates in both modes, six mode switches |
| `tb_cfd_filter` | every lane of every word against an integer model, 6 settings incl. D = 15 |
| `tb_pulse_finder` | a hand-worked pulse, then random pulse trains against a sample-by-sample model: height, charge, crossing, drops, re-arm, `ts_reset` |
| `tb_zc_interp` | 3000 candidates incl. y1 = 0 and extreme values; exact quotient and 10-clock latency |
| `tb_hit_merger` | round-robin order, stall hold, overflow count under 16 random sources |
| `tb_gandalf_dsp_top` | full 16-channel design: Moyal-shaped pulses on all channels, two segments with a mode switch between them, exact hits against a model, timing against the injected arrival times, zero suppression, drops, readout stall and overflow |
| `tb_timing_resolution` | two delayed copies of a pulse on two interleaved pairs, amplitudes 50 mV-3.9 V of a 4 V range |
| `tb_pileup` | double pulses, 5 × 5 amplitude pairs, delay scanned 2-40 ns |
| `tb_timing_resolution_14bit` | as `tb_timing_resolution` with `ADC_W = 14` at 800 MS/s |

`tb_gandalf_dsp_top`, `tb_timing_resolution` and `tb_pileup` run the full-size design without parameter overrides, in well
under a second each.

**Timing resolution** (`tb_timing_resolution`). Pulses have a 2 ns rise time
and are sampled at 1 GS/s. Each sample gets 1.07 codes rms of Gaussian noise,
which corresponds to 10.1 effective bits. There is no clock jitter. The
resolution is per channel, σ(Δt)/√2:

| amplitude | 50 mV | 100 mV | 160 mV (4 %) | 400 mV | 1 V | 2 V | 3.9 V |
|-----------|-------|--------|--------------|--------|-----|-----|-------|
| resolution (ps) | 48 | 33 | 27 | 25 | 25 | 26 | 24 |

With the 14-bit converter (`tb_timing_resolution_14bit`) the pulses are
sampled at 800 MS/s with 3.05 codes rms of noise (10.6 effective bits). The
same measurement gives:

| amplitude | 50 mV | 100 mV | 160 mV (4 %) | 400 mV | 1 V | 2 V | 3.9 V |
|-----------|-------|--------|--------------|--------|-----|-----|-------|
| resolution (ps) | 49 | 37 | 39 | 37 | 38 | 36 | 37 |

The lower sampling rate makes the interpolation error on the curved leading
edge larger, and that error, not the extra resolution, sets the floor. This
testbench prints the table without a limit. It checks that every pulse gives
exactly one hit per channel and that the mean time difference matches the
injected delay within 20 ps.

**Pile-up** (`tb_pileup`). The table gives the minimum delay in ns from which
two pulses with a 3 ns rise time are always resolved, each within 1 ns of its
single-pulse time. Settings are D = 2, F = 2, window 6. Rows are the first
pulse, columns the second, in % of full range:

|      | 5  | 10 | 25 | 50 | 90 |
|------|----|----|----|----|----|
| 5    | 12 | 8  | 5  | 5  | 5  |
| 10   | 15 | 12 | 7  | 5  | 5  |
| 25   | 18 | 16 | 12 | 9  | 5  |
| 50   | 22 | 18 | 14 | 12 | 9  |
| 90   | 24 | 21 | 17 | 14 | 11 |

A small pulse after a large one needs the longest delay, because it must wait
for the large pulse's window to close. The exact numbers move slightly with
the random noise.

## Simulating

With Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Irtl -y rtl rtl/gandalf_pkg.sv \
          tb/tb_gandalf_dsp_top.sv --top-module tb_gandalf_dsp_top -Mdir obj
./obj/Vtb_gandalf_dsp_top
```

Replace the testbench name to run any other test. Lint a module with
`verilator --lint-only -Wall -Irtl -y rtl rtl/gandalf_pkg.sv rtl/<module>.sv`.
Two lint warnings remain by design. `SYNCASYNCNET` appears on `rst_n` in
`hit_merger` because its assertion is disabled during reset. `UNUSEDSIGNAL`
appears on the upper bits of the intermediate product in `cfd_filter`, which
y never needs at the chosen widths.

## Changing it

* Number of channel pairs: parameter `N_PAIR` of `gandalf_dsp_top` (default
  8, i.e. 16 channels). Channel numbers in hits are 4 bits wide (`CH_W`).
* Maximum delay: parameter `DMAX` of `cfd_filter` (15). `DLY_W` in the
  package must hold it.
* ADC sample width: parameter `ADC_W` of `gandalf_dsp_top` (12 or 14; up
  to `SAMPLE_W_MAX` in the package).
* Internal widths, time-stamp width, fractional time bits, charge width, and
  the fraction format: localparams in `gandalf_pkg`.
* Readout buffering: `DEPTH` of `hit_merger` (8 per channel, a power of two).
