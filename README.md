# Neutron and positron trigger for a SoLid detector plane

SoLid is a reactor antineutrino detector made of plastic-scintillator cubes with
thin neutron-sensitive ⁶LiF:ZnS(Ag) sheets. An inverse beta decay gives two signals
in the same place. The positron gives a short, bright pulse in the plastic (about
100 ns). Later the neutron is captured in the ZnS layer, and this layer glows
faintly for about a microsecond, giving a train of small single-photon peaks. The
detector is above ground, next to a reactor, so most of the light it sees is
background. Its digital boards produce about 1.8 Tb/s, which is far more than the
online software can accept. The firmware therefore has to recognise neutron
captures in real time, one SiPM channel at a time, and trigger read-out only for
those.

This RTL is the trigger logic of one detector plane: 64 SiPM channels, each with
its own channel trigger. Each channel trigger has three parts:

* **Number-of-Peaks**: the number of local maxima above a threshold within a
  window of 256 samples (one sample is about 20 ns, so the window is about 5 µs).
* **Time-over-Threshold**: the number of samples above a threshold within the same
  window.
* **Two trigger decisions**: a *neutron trigger*, which is a single cut on one of
  the two feature values, and a *positron trigger*, which is a plain amplitude
  threshold.

The two features were chosen because both separate neutron captures from
background well, and both need only comparators and adder-subtractors. That
keeps each channel small enough for 64 of them to fit on one mid-range FPGA.
The features are strongly correlated, so combining them gains nothing: at any
time only one of them drives the neutron trigger.

## Signal path of one channel

```
             +--------------------+   np_value
 sample ---->| npeaks_feature     |----------+
 valid       |  X[t-1], X[t-2] reg|          |      +---------------------------+
             |  peak test         |          +----->| feature_threshold_trigger |--> n_trig
             |  sliding window sum|          |      |  mux by feat_sel, > cut   |--> feat_value
             +--------------------+          |      +---------------------------+
             +--------------------+   tot_value
 sample ---->| tot_feature        |----------+
             |  X[t] > theta      |
             |  sliding window sum|
             +--------------------+
             +--------------------+
 sample ---->| positron_trigger   |-------------------------------------------------> pos_trig
             |  X[t] > theta_pos  |
             +--------------------+
```

`channel_trigger` holds these four blocks. `solid_trigger_top` instantiates 64 of
them, which share the clock, the reset and the sample strobe `valid`.

## What counts as a peak

A sample X[t] is counted as a peak when all three of these hold:

    X[t] > theta   and   X[t-1] >= X[t-2]   and   X[t] < X[t-1]

In words, the waveform stopped rising at t-1 and falls at t. The point to note is
that the threshold is applied to the *falling* sample X[t], not to the maximum
X[t-1]. A peak whose maximum is above theta but which drops below theta in one
sample is not counted. This follows the published definition of the feature
exactly. The ">=" lets a flat top count as one peak: for 0, 500, 500, 300 the
peak is counted once, at the 300.

The test compares against the previous two samples, so the block keeps two
sample registers. After reset both are zero, so the first samples are compared
with a flat zero baseline.

Time-over-Threshold is simpler: every sample with X[t] > theta counts.

## The sliding window

Both features count flagged samples over the last `WINDOW` accepted samples.
`sliding_window_counter` computes this count for both. It stores the last
`WINDOW` flags in a shift register and keeps a running sum. Each accepted sample
adds its own flag and subtracts the flag that drops out of the window:

    count(t) = count(t-1) + flag(t) - flag(t - WINDOW)

So the window moves by one sample at a time, and a new feature value is ready
after every sample. A neutron burst is never split across two fixed windows.
The cost is `WINDOW` flip-flops per feature, which on an FPGA can go into shift
register LUTs. While `valid` is low, nothing moves: a gap in the sample stream
neither ages the window nor adds to it. For the first `WINDOW` samples after
reset, the samples not yet seen count as unflagged. An assertion checks that the
count never exceeds `WINDOW`.

## Neutron decision, feature selector and positron trigger

`feature_threshold_trigger` uses `feat_sel` to choose one of the two feature
values and compares it with that feature's own cut. `n_trig` is high for as long
as the chosen feature is **strictly above** the cut. A neutron capture therefore
keeps `n_trig` high for up to one window length after its light, until its peaks
leave the window. `feat_sel` can be changed at run time. The change takes effect
at the next clock, with no pipeline to flush, because both features are always
computed.

`positron_trigger` gives a one-clock pulse for every accepted sample above
`theta_pos`.

## Calibration record

Every channel has its own settings in `solid_trig_pkg::chan_cfg_t`. Per-channel
settings let every channel be tuned for both efficiency and uniformity.

| field       | width | meaning                                                           |
|-------------|-------|-------------------------------------------------------------------|
| `theta_np`  | 14 s  | sample threshold of Number-of-Peaks                                |
| `theta_tot` | 14 s  | sample threshold of Time-over-Threshold                            |
| `cut_np`    | 9     | neutron trigger when Number-of-Peaks > cut_np                      |
| `cut_tot`   | 9     | neutron trigger when Time-over-Threshold > cut_tot                 |
| `theta_pos` | 14 s  | positron amplitude threshold                                       |
| `feat_sel`  | 1     | `FEAT_NPEAKS` (0) or `FEAT_TOT` (1): feature that drives `n_trig`  |

Thresholds are in ADC counts and are signed, because samples are taken to be
baseline-subtracted. Algorithm studies found the best Time-over-Threshold
threshold near 0.5 photon avalanches (PA). The threshold drawn in the
Number-of-Peaks example plots lies near 0.35 PA. The tests use 100 ADC counts per
PA, which is only a test scale: the real conversion depends on the front end. The
settings should be changed only while the stream is idle, or accepted as a
glitch of at most one window.

## Interface and timing

All logic is clocked by `clk`. Reset is synchronous and active low. The top's
ports are `sample[64]`, `cfg[64]` and one `valid` for all channels. Its outputs
are `np_value[64]`, `tot_value[64]`, `feat_value[64]` (9 bits each), and the
vectors `n_trig[63:0]` and `pos_trig[63:0]`.

| sample accepted at edge k | ready after edge |
|---------------------------|------------------|
| `np_value`, `tot_value`   | k                |
| `pos_trig`                | k                |
| `feat_value`, `n_trig`    | k + 1            |

One sample per clock is accepted at most. At a 50 MHz sample clock this is one
sample every 20 ns, and the logic has no throughput limit below that.

After generic synthesis one channel is about 570 flip-flops and 49 word-level
cells (adders, comparators, multiplexers). The two 256-bit flag shift registers
account for most of the flip-flops. The full plane is about 36,400 flip-flops
and 3,100 word-level cells.

Parameters: `N_CHAN` = 64, `WINDOW` = 256, `CNT_W` = $clog2(WINDOW+1) = 9. The
sample width `SAMPLE_W` = 14 is set in the package.

## Around the trigger (not included)

On the real board the trigger sits inside firmware that also has these parts:

* the sample buffers;
* the links to the other planes and to the data acquisition;
* an IPbus (Ethernet) control bus;
* SiPM slow control;
* the analogue shaping and digitisation that feed the samples.

None of these are part of this RTL, since they are described elsewhere or only
named. The top brings out on ports the signals these parts would use:

* `cfg`, where a register bank on the control bus would drive it;
* the trigger bits and feature values, where the buffering and read-out logic would take them.

No logic combines channel triggers into a plane or detector trigger. The variant
of Number-of-Peaks with an added time veto is not included either. It was
synthesised only for comparison, and its veto rule is not documented.

## Own choices, and how far to trust them

The published description fixes:

* the two feature definitions;
* the use of one threshold on one feature;
* the positron amplitude threshold;
* 64 channels;
* the 256-sample window.

The following are choices made for this RTL:

* the sample format (14-bit signed, baseline-subtracted);
* a window that slides by one sample, rather than fixed blocks of 256;
* a run-time selector between the two features, with one cut each;
* strict comparisons everywhere (`>`), matching the feature definitions;
* one register stage per decision, and synchronous reset;
* a common `valid` strobe for all channels;
* how the calibration fields are packed.

If the real firmware evaluates fixed, non-overlapping windows, change
`sliding_window_counter`: clear the count every `WINDOW` samples and latch it
into the output. The rest of the design can stay as it is.

## Files

| file | contents |
|------|----------|
| `rtl/solid_trig_pkg.sv` | constants, sample and feature types, `feat_sel_e`, `chan_cfg_t` |
| `rtl/sliding_window_counter.sv` | windowed count of a flag stream |
| `rtl/npeaks_feature.sv` | Number-of-Peaks |
| `rtl/tot_feature.sv` | Time-over-Threshold |
| `rtl/feature_threshold_trigger.sv` | feature selector and neutron cut |
| `rtl/positron_trigger.sv` | amplitude threshold |
| `rtl/channel_trigger.sv` | one channel |
| `rtl/solid_trigger_top.sv` | 64-channel plane (top) |
| `tb/trig_ref_pkg.sv` | reference model of a channel and a synthetic waveform generator |
| `tb/tb_*.sv` | one self-checking testbench per module |

## Verification

Each testbench drives its module and prints `TB_RESULT checks=N failures=M`. It
compares every output after every clock with values computed independently, and
a watchdog stops it if it hangs. The reference model in `trig_ref_pkg` applies the
peak and threshold definitions directly and re-sums the whole window for every
sample. The stimulus is a synthetic SiPM waveform with these parts:

* baseline noise;
* dark counts of about 1 PA;
* neutron captures, each 15 to 30 photon peaks spread over about 60 samples;
* positron pulses of 30 to 50 PA.

The stimulus also has random gaps in `valid`.

The unit tests also check hand-worked cases:

* the plateau peak;
* the falling sample below theta;
* a sample equal to the threshold;
* a full and an emptied window;
* a reset in mid-stream;
* the cut boundaries.

`tb_solid_trigger_top` runs the full-size plane (64 channels, 256-sample window)
for 3000 clocks. That is about 960,000 compared values. It also requires each of
these to happen at least once:

* a neutron trigger from each feature;
* a positron trigger;
* a selector switch while data flow;
* a valid gap;
* a window that empties after holding counted samples.

It builds in about a minute and simulates in under a second.

To simulate with Verilator 5, for example the top:

    verilator --binary --timing --assert --timescale 1ns/1ps -Irtl -Itb -y rtl -y tb \
        rtl/solid_trig_pkg.sv tb/trig_ref_pkg.sv tb/tb_solid_trigger_top.sv \
        --top-module tb_solid_trigger_top -o sim && ./obj_dir/sim

The packages are named first; `-y` lets Verilator find every module in the file
of its own name. Replace the testbench file and the top module name to run
another testbench. Smaller
configurations can be built by overriding `WINDOW` and `N_CHAN`; the unit tests
use `WINDOW` = 16 or 32. The testbenches do not test real detector waveforms, or
trigger efficiency and purity, which depend on the calibration. They only show
that the hardware computes the defined features and decisions exactly.
