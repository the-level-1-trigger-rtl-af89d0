# Level-1 trigger for a cryogenic dark-matter detector readout card

A SuperCDMS-style detector is read out by 16 ADC channels: 12 phonon channels
sampled at 625 kHz and 4 charge channels sampled at 2.5 MHz, all 16-bit unsigned.
Particle interactions show up as slow pulses that are small compared with the
noise. The level-1 (L1) trigger has to decide, sample by sample and with no dead
time, whether a pulse is present. It also has to record when it happened and how
large it was. Its key idea is that a long, fully programmable FIR filter
(1024 taps, 1.6 ms) gives a near-optimal energy estimate for every downsampled
sample. Everything around that filter prepares the data for it, or turns its
output into a few compact "trigger primitives" that a set of programmable
Boolean rules can accept or reject.

This repository holds synthesizable SystemVerilog for the whole L1 trigger of
one readout card. Every module has a self-checking testbench. Three
end-to-end testbenches run the complete design at its real sizes.

## Data flow

```
 12 phonon ch. --3x downsample_filter (CIC, R=16)--+
  4 charge ch. --2x downsample_filter (CIC, R=64)--+--> channel_sync (16 ch., 39.0625 kHz, timestamp)
                                                       |
            +------------------------------------------+  (same 16 samples to all 4 paths)
            v
  path p = 0..3:  linear_combination (16 x 8-bit coeff.) --> fir_filter (1024 x 16-bit coeff., 72-bit sum
                                                             --> shift, drop 40 LSBs, saturate to 32 bits)
            |
            +--> 8 x threshold_logic (hysteresis; each watches any one of the 4 FIR outputs)
            |
            +--> 4 x peak_search (one per path; sees its FIR output and all 8 threshold bits)
                        |
                 primitive_arbiter (merges the 4 primitive streams)
                        |
                 8 x trigger_logic (per-path bit masks + random prescale)  --> 8 decision bits
                        |
                 trigger_fifo_veto (256-entry trigger FIFO, veto FIFO, lost/live/veto counters)
                        |
                 l1_csr (Avalon-MM: configuration and readout)
```

`l1_trigger_top` wires these together. Its ports are:

- the ADC sample buses, with one strobe per group of channels that are sampled together (3 phonon groups of 4, 2 charge groups of 2);
- an external veto request;
- a 32-bit Avalon-MM slave;
- `trig_available`, which is high while the trigger FIFO is not empty.

Every block is in one clock domain. Blocks hand data to each other with Avalon-ST
valid/ready.

## The stages

### Downsampling (`downsample_filter`)

Each group of channels passes through a third-order cascaded integrator-comb
(CIC) decimator, H(z) = ((1 - z^-R)/(1 - z^-1))^3. R is 16 for phonon and 64 for
charge, so every channel comes out at 39.0625 kHz.

- Three integrators run at the input rate in modular arithmetic, 16 + 3·log2(R) bits wide. On every R-th input, three combs difference the result.
- The output equals the input convolved three times with a length-R boxcar. It keeps the full gain R^3; there is no normalisation.
- All channels share one width, 34 bits, which is what the charge filter needs.
- Latency: one clock after the R-th input.

### Channel alignment (`channel_sync`)

The five downsampling groups finish on different clock cycles. Each channel's
output waits in a holding register. The 16 samples are released together as one
word once every channel holds a sample. The top module then stamps the word with
a 32-bit timestamp, which is the index of the synchronised sample. If a channel
delivers a second sample before the set was released, the new sample overwrites
the old one and a sticky overrun error is set. That can only happen if the ADC
strobes are irregular.

### Linear combination (`linear_combination`)

Each path forms `sum_c coef[c] * x[c]` over all 16 channels. The coefficients
are 8-bit signed and set at run time. Examples:

- a zero coefficient ignores a channel (as for a detector read out from one side only);
- equal coefficients give a sum of channels;
- unequal ones give a calibrated mix.

The result is 46 bits wide, enough that it cannot overflow.

### FIR filter (`fir_filter`) — the heart of the design

`y[n] = sum_{i=0}^{1023} b_i x[n-i]`, with 16-bit signed coefficients b_i.

**Implementation.** A 1024-entry circular sample buffer and a 1024-entry
coefficient memory, both in block RAM, feed one multiply-accumulator. When a
sample arrives, it is written over the oldest one. The module then walks the
buffer from the newest sample backwards while walking the coefficients from b_0
upwards, one product per clock, into a 72-bit accumulator.

**Output scaling.** The 72-bit sum is shifted left by a programmable 0–63 places.
Its 40 least-significant bits are discarded, which is an arithmetic shift and so
rounds toward minus infinity. The result is saturated to the most positive or
most negative 32-bit value.

**Timing.**

- An output appears TAPS+2 = 1026 clocks after the input is accepted.
- `in_ready` is low while the filter walks the buffer.
- After reset, the sample buffer is zero-filled, which takes 1024 clocks.
- The four FIRs run in lock step.

**Clock rate.** The whole design therefore needs at least about 1027 clocks per
39.0625 kHz sample, i.e. a clock of at least 40 MHz. The testbenches use 50 MHz
(1280 clocks per sample). If the ADC strobes arrive faster than the FIR can take
samples, back-pressure reaches `channel_sync`, and its overrun flag reports it.

**Coefficient sets.** The coefficients decide what the trigger is sensitive to:

- An *optimal filter* weights the expected pulse shape by the inverse noise power spectrum. It gives the best energy resolution, but it has oscillating side lobes. For a very large pulse, those side lobes can push the output over threshold again before and after the real pulse ("echo triggers"). How far away the echoes appear depends on the period of the noise components that shaped the lobes.
- A *matched filter* (the pulse template) and a *boxcar* (about 5 equal taps) have no positive side lobes and so produce no echoes.

In every case the coefficients are scaled to use the 16-bit range and offset so
that they sum to zero. That removes the baseline from the output.

### Thresholds (`threshold_logic`, 8 instances)

Each threshold module picks one of the four FIR outputs (`sel`) and keeps one
state bit:

- it sets the bit when the value is strictly above `act`;
- it clears the bit only when the value is strictly below `deact`;
- in between, it holds the bit.

This hysteresis stops noise on a slowly falling output from splitting one pulse
into several triggers. Any number of thresholds can watch the same path. For
example, two thresholds on one path can separate low-energy pulses from very
large ones.

### Peak search (`peak_search`, 4 instances)

**Trigger window.** Path p's trigger window is the run of samples during which
at least one threshold that watches path p is set.

**What it records.** During the window the module records:

- the largest FIR value of path p, taking the first sample on ties;
- its timestamp;
- all eight threshold bits at that sample ("peak bits");
- the OR of all eight threshold bits over the whole window ("window bits").

Thresholds that watch other paths are recorded too. This is what lets the
trigger rules combine paths.

**Output.** On the first sample after the window, the module emits an 82-bit
primitive:

```
{path[1:0], amplitude[31:0], timestamp[31:0], peak_thr[7:0], window_thr[7:0]}
```

**Saturated pulses.** A pulse that saturates the ADC gives a flat-topped FIR
output, so the position of the maximum is meaningless. If the window lasted more
than `sat_len` samples, the reported timestamp is the window's first sample plus
`sat_offset` instead.

**Timing.** A primitive leaves one clock after the sample that closes the window.
The time from a pulse to its trigger is therefore dominated by how long the FIR
output stays above the deactivation threshold. For a 1024-tap filter that is on
the order of the filter length (tens of milliseconds at most).

### Merging the paths (`primitive_arbiter`)

The four peak searches can finish in the same sample. Each path has one pending
register, and each clock the lowest-numbered pending path is forwarded. A path
emits at most once per sample, which is over a thousand clocks, so all four
drain long before the next sample. A second primitive on a path whose register
is still full would set a sticky overrun error. The design never produces one.

### Trigger rules (`trigger_logic`, 8 instances)

Each rule looks at the 16 bits `{window_thr, peak_thr}` of a primitive. It uses
two 16-bit masks that belong to the path that produced the primitive:

- `req_one[path]`: bits that must be 1;
- `req_zero[path]`: bits that must be 0.

All other bits are ignored. A path whose masks are both zero passes every
primitive. To disable a path in a rule, set the same bit in both masks.

**Prescale.** A primitive that passes is still rejected with probability
`reject_prob / 65536`. The random number is the low 16 bits of a 32-bit Galois
LFSR:

- feedback polynomial x^32 + x^22 + x^2 + x + 1, mask 32'h8020_0003;
- seed for instance l: 32'h1234_5679 + l·32'h0101_0101;
- it steps once for every primitive.

The sequence is fully deterministic, so a model can reproduce it.

**Result.** The eight results form an 8-bit decision field. A primitive with at
least one bit set is accepted and stored with its decision bits.

**Example: echo suppression.** Put an optimal filter on path 0 with threshold 0,
and a boxcar on the same channels on path 1 with threshold 1. Then set rule 0 to
"path 0: bit 1 of peak_thr must be 1". An echo has no boxcar response at its
peak, so the rule rejects it, while real pulses keep the optimal filter's
amplitude and timing.

### Trigger FIFO, veto FIFO and dead-time bookkeeping (`trigger_fifo_veto`)

**Trigger FIFO.** Accepted entries (90 bits) go into a 256-entry FIFO that the
data acquisition system reads.

**Vetoes.** The trigger is vetoed while that FIFO is full or while the
`ext_veto` input is high. A primitive that arrives during a veto is dropped and
counted in `lost_count`.

**Veto FIFO.** A 64-entry veto FIFO records the beginning and the end of every
FIFO-full period and of every external veto period. Each record is a 2-bit kind
plus the timestamp, and two records can be written in the same clock. If the
veto FIFO is itself full, a record is lost and a sticky error is set.

**Live time and veto time.** On every synchronised sample, one of two 48-bit
counters counts up: `live_time` while no veto is active, `veto_time` while one
is.

## Register map (`l1_csr`)

The Avalon-MM slave uses word addresses and 32-bit data. Read latency is one
clock (`readdatavalid`). There is no wait-request.

| Address (hex) | Access | Contents |
|---|---|---|
| 0000–0FFF | W | FIR coefficient b_i of path p at p·1024 + i, bits [15:0] |
| 1000–103F | RW | LC coefficient of channel c, path p at 1000 + 16p + c, bits [7:0] |
| 1040–1043 | RW | FIR output shift of path p, bits [5:0] |
| 1050 + 4t | RW | threshold t (0..7): +0 FIR select [1:0], +1 activation, +2 deactivation (signed 32-bit) |
| 1070 + 4p | RW | peak search p: +0 saturated-window length, +1 timestamp offset |
| 1080 + 16l | RW | rule l (0..7): +2p require-one mask of path p, +2p+1 require-zero mask of path p, +8 reject probability [15:0] |
| 1100 | R | trigger FIFO fill level |
| 1101 / 1102 | R | head entry: amplitude / timestamp |
| 1103 | R | head entry: {path[25:24], decision[23:16], window_thr[15:8], peak_thr[7:0]}. Reading it removes the entry. |
| 1104 | R | veto FIFO fill level |
| 1105 | R | veto head: timestamp |
| 1106 | R | veto head: kind (0 full-begin, 1 full-end, 2 ext-begin, 3 ext-end). Reading it removes the entry. |
| 1107 | R/W | errors {arbiter overrun, sync overrun, veto FIFO overflow}. Any write clears them. |
| 1108 | R | lost-trigger count |
| 1109 / 110A | R | live time, low / high word (in samples) |
| 110B / 110C | R | veto time, low / high word |
| 110D | R | current timestamp |

Configuration registers reset to zero. In that state:

- every FIR coefficient is unknown until it is written, so coefficients must be loaded after power-up;
- every rule passes every primitive.

To read out a trigger, read 1101 and 1102, then 1103.

## Sizes and widths

| Quantity | Value | Origin |
|---|---|---|
| channels | 12 phonon (625 kHz) + 4 charge (2.5 MHz), 16-bit unsigned | published |
| CIC | N = 3, M = 1, R = 16 / 64, output 39.0625 kHz | published |
| CIC output width | 34 bits (16 + 3·6) | derived |
| LC coefficients | 8-bit signed, 16 per path | published |
| LC output width | 46 bits | derived |
| FIR | 1024 taps, 16-bit signed coefficients, 72-bit sum, drop 40 LSBs, 32-bit saturated output | published |
| FIR shift field | 6 bits | own choice |
| trigger paths / thresholds / peak searches / rules | 4 / 8 / 4 / 8 | published |
| primitive | 32 + 32 + 8 + 8 bits (+ 2-bit path, + 8 decision bits in the FIFO) | published (path field own) |
| trigger FIFO depth | 256 | published |
| veto FIFO depth | 64 | own choice |
| live/veto time counters | 48 bits, in samples | own choice |
| clock | ≥ 40 MHz; 50 MHz assumed | own choice |

All defaults in `l1_pkg` and in the module parameters are the published sizes.

## Where this RTL departs from, or goes beyond, the published description

**The published description is silent on these, so the choices here are this design's own:**

- the clocking;
- the timestamp unit (one synchronised sample);
- the register map;
- the merging of the four primitive streams;
- the bit order of the 16 rule bits;
- the prescale generator (an LFSR);
- the veto-FIFO depth and record format;
- the counter widths;
- the strict `>` and `<` threshold comparisons;
- the rule that the first maximum wins on ties;
- the `>` in the saturated-window test.

**Two wordings of what the trigger FIFO stores.** The trigger-logic description
says that every primitive passing at least one of the eight rules is stored. The
FIFO description calls them primitives "accepted by the threshold logic". This
design follows the first: only primitives with a non-zero decision field enter
the FIFO.

**No CIC normalisation.** The decimator keeps the full R^3 gain. Any scaling is
left to the linear-combination coefficients and the FIR shift. The published
description mentions no normalisation.

**Unknown FIR walk speed.** The original walks the FIR buffer sequentially, as
here, but its speed per tap is not known. One multiply-accumulate per clock is
the simplest choice that meets the sample rate.

**Not covered.** These are outside the RTL:

- the ADCs;
- the raw-waveform buffer;
- the computation of filter coefficients (done offline from noise spectra and pulse templates);
- the higher-level software triggers.

Coefficients enter through the register map.

## Verification

Every module has a self-checking testbench in `tb/`. Each one compares against
values computed independently inside the testbench and ends by printing
`TB_RESULT checks=N failures=M`.

| Testbench | What it checks |
|---|---|
| `tb_downsample_filter` | CIC against a direct triple-boxcar sum on random data, both decimation factors |
| `tb_channel_sync` | alignment with random arrival orders, back-pressure, overrun |
| `tb_linear_combination` | random signed coefficients, extreme values |
| `tb_fir_filter` | full 1024 taps: every output against a direct sum, the TAPS+2-clock latency, positive and negative saturation, shift values |
| `tb_threshold_logic` | hysteresis against a reference on random walks, all FIR selections |
| `tb_peak_search` | windows, peak/window bits, ties, the saturated-pulse rule |
| `tb_primitive_arbiter` | simultaneous primitives, order, overrun |
| `tb_trigger_logic` | mask rules on random primitives; the measured prescale rate |
| `tb_trigger_fifo_veto` | fill/drain, full and external vetoes, veto FIFO overflow, lost/live/veto counters |
| `tb_l1_csr` | every register through the bus |
| `tb_l1_trigger_top` | end to end, see below |
| `tb_filter_workloads` | optimal-filter-like, matched and boxcar filters on noisy pulses, see below |
| `tb_echo_suppression` | the optimal-filter + boxcar configuration with an efficiency scan, see below |

`tb_l1_trigger_top` runs the whole design at its default sizes. It configures
everything over Avalon-MM. It then drives rectangular pulses into two phonon
channels, a long full-scale pulse into a charge channel, and a square wave that
produces a trigger every four samples.

The filters used are:

- an optimal-filter-like FIR with positive side lobes;
- a boxcar on the same channels;
- a deliberately saturating FIR;
- a single-tap FIR.

A behavioural model of the whole chain, inside the testbench, predicts every
stored primitive. The testbench checks that the readout matches exactly, apart
from `lost_count` entries dropped while the FIFO was full. It counts each
mechanism and fails if any of them never happens:

- echo triggers;
- echoes removed by the boxcar rule;
- FIR saturation;
- the saturated-pulse timestamp;
- prescale rejections;
- FIFO full and its veto records;
- lost triggers;
- an external veto.

It takes a few seconds.

`tb_filter_workloads` runs the filter families side by side, again through the
whole design at its default sizes.

**Stimulus.** Two phonon channels carry double-exponential pulses: rise about
40 µs, fall about 300 µs. Each sample has about 1700 counts r.m.s. of white
noise. Pulses are small (1500 counts) or large (45000 counts).

**Paths.** The four paths hold:

- path 0: an optimal-filter-like set, which is a scaled matched filter with positive side lobes 260 samples away;
- path 1: the matched filter;
- path 2: a width-5 boxcar;
- path 3: a second set with side lobes.

All coefficients are computed in the testbench from the template, and all
four filters peak 512 samples after a pulse starts.

**Checks.** The readout must match a bit-exact model of the chain. Separately,
the testbench checks that:

- every pulse gives one trigger per path;
- the matched filter and boxcar give nothing else;
- each large pulse gives two echo triggers on the side-lobe filters;
- the boxcar rule removes those echoes;
- a second, high threshold on the matched-filter path lets a rule keep small pulses and drop large ones.

It also prints each filter's response divided by its output noise. Since the
noise here is white rather than a measured detector spectrum, treat these
numbers as an illustration, not as a figure of merit.

`tb_echo_suppression` reproduces the echo-suppression configuration and
measures trigger efficiency against pulse amplitude.

**Configuration.** An optimal-filter-like path and a boxcar path run on the sum
of two noisy phonon channels. The optimal-filter path's side-lobe height is
computed so that a 100 σ pulse produces echoes at twice the threshold; here σ
is the noise r.m.s. of one input sample. The thresholds are:

- 5σ to activate and 0 to deactivate on the optimal-filter path;
- 2.5σ and 0 on the boxcar path;
- σ is in each case the noise r.m.s. of that FIR output.

Rule 0 takes the optimal-filter path alone. Rule 1 also requires the boxcar
threshold somewhere in the trigger window.

**Result.** Pulses from 0.1 to 1.0 σ and at 10, 40 and 100 σ give:

| amplitude (σ) | 0.1–0.3 | 0.4 | 0.5 | 0.7–1.0 | 10 | 40 | 100 |
|---|---|---|---|---|---|---|---|
| rule 0, triggers per pulse | 0 | 0.25 | 0.75 | 1 | 1 | 1 | 3 |
| rule 1, triggers per pulse | 0 | 0.25 | 0.75 | 1 | 1 | 1 | 1 |

The table comes from one run. In the turn-on region the values change by a pulse or two with the noise seed. The two extra triggers at 100 σ are the echoes. Rule 1 removes them without
losing any real pulse.

**Scope.** The turn-on sits at lower amplitude than with a real detector's noise
spectrum, because this noise is white and the filters are synthetic. The
testbench checks only the shape of the result:

- no triggers at the bottom of the scan;
- full efficiency at the top;
- a monotonic turn-on;
- three triggers and one trigger at 100 σ for the two rules;
- bit-exact agreement with the model.

To simulate with Verilator 5 (the package first):

```
verilator --binary --timing -Mdir obj rtl/l1_pkg.sv $(ls rtl/*.sv | grep -v l1_pkg) \
          tb/tb_l1_trigger_top.sv --top-module tb_l1_trigger_top
./obj/Vtb_l1_trigger_top
```

For any other block, replace the testbench and `--top-module`. Each testbench
has a watchdog that ends the run with a failure if it hangs. Verilator's lint
reports only unused-signal warnings.
