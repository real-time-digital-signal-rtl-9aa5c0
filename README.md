# Real-time pulse-shape parameters and a self-calibrating single-site/multi-site discriminator for HPGe detectors

A germanium gamma-ray spectrometer normally records only the total charge of each event, which
gives its energy. The shape of the current pulse tells more. A gamma ray that deposits all its
energy at one point in the crystal (a *single-site* event) makes a current pulse shaped by two
charge clouds drifting to the electrodes. A gamma ray that Compton-scatters several times
(*multi-site*) makes a superposition of such pulses, which comes out flatter. The usual way to use
this is to store every digitised trace and analyse it offline. That fills the acquisition memory
quickly, and the card then spends much of its time moving buffers to the host instead of
recording events.

This design works out three cheap shape parameters for every pulse as the pulse arrives, so only
three numbers per event need to be stored:

| parameter | definition (samples *j<sub>i</sub>* of the current pulse, window *N0..N*) |
|---|---|
| width *W* | *N − N0*, where *N0* and *N* are the outermost samples at or above 8 % of the pulse maximum |
| asymmetry *A* | (*F − B*) / (*F + B*), with *F* = Σ*j<sub>i</sub>* over *N0..N<sub>mid</sub>−1*, *B* = Σ*j<sub>i</sub>* over *N<sub>mid</sub>..N*, and *N<sub>mid</sub>* = *N0* + ⌊(*N−N0*)/2⌋ |
| normalized moment *I* | 12 Σ *j<sub>i</sub>* (*i − N<sub>mid</sub>*)² / ((*F + B*) *W*²) |

*A* lies in [−1, 1] and says whether the current arrives early or late in the pulse. *I* lies in
[0, 2]: it is the pulse's moment of inertia about its midpoint, divided by the moment of a
rectangle of the same area and width. That rectangle is where the 12 comes from. Flat
(multi-site-like) pulses give a larger *I* than peaked ones of the same asymmetry. The sample time
cancels out of *A* and *I*. One sample is 13.3 ns at a 75 MHz ADC.

The discriminator calibrates itself from data and needs no pulse simulation. You feed it events
of the kind you want to keep, for example a double-escape peak, which is mostly single-site. It
histograms them in the 3-D (*W*, *A*, *I*) space. It then takes bins in order of falling count,
as long as their counts together stay within a chosen percentage of all calibration events
(85 %, say). Later events are accepted if they land in one of those bins.

## The processing chain

`psd_core` is the top. It holds one trace in a 16-bit pulse memory (`pulse_ram`), and a sequencer
runs these units over it one after another. Only one unit touches the memory at a time:

```
trace in --> pulse_ram --> sg_filter (in place) --> peak_finder --> cfd_width --> area_integrator
                                                                                 --> moment_mac
   div_normalizer x2 + nr_divider x2  (asymmetry, moment)  --> psd_histogram --> record out
```

| unit | what it does | clocks |
|---|---|---|
| `sg_filter` | 9-tap Savitzky-Golay filter. With first-derivative coefficients it turns the charge trace into the current pulse | 10 *L* + 1 |
| `peak_finder` | maximum of the current pulse and its first address | *L* + 1 |
| `cfd_width` | walks down and up from the peak while samples are at or above 8 % of it, giving *N0*, *N* and *W* | *K* + 2 |
| `area_integrator` | finds *N<sub>mid</sub>* and accumulates *F* and *B* in 32 bits | *K* + 1 |
| `moment_mac` | Σ *j<sub>i</sub>*(*i − N<sub>mid</sub>*)² with one multiplier (square, then multiply-accumulate), then ×12 | 2 *K* + 2 |
| `div_normalizer` | fits a wide divisor into 16 bits by a right shift and reports the shift | combinational |
| `nr_divider` | 32 / 16 non-restoring division, one quotient bit per clock | 17 |
| `psd_histogram` | calibration histogram, acceptance-region build, per-event decision | 1 per event |

*L* is the trace length and *K* = *N − N0* + 1 is the window length. The time from the last
sample to the record is exactly 11 *L* + 4 *K* + 34 clocks. It is *L* + 4 *K* + 31 with the
filter bypassed. For a 1024-sample trace and a 1 µs pulse that is about 12.6 k clocks with the
load included. At 33 MHz that is 0.4 ms, far below the 7 ms between events at the 140 Hz rates the
method was used at.

The units run one after another on one memory port, at one multiply per clock. This follows the
structure of the original program on a 16-bit fixed-point signal processor, so each stage maps to
a loop of that program. A faster pipelined version would be easy to derive, but it would no
longer correspond stage for stage.

### The in-place filter and its circular buffer

The filter overwrites each input sample with its result. The window of result *n* reaches four
samples back (*U<sub>n−4</sub>..U<sub>n−1</sub>*), and those words already hold results. So the
four unaltered samples behind the centre are kept in a 4-entry circular buffer. To compute
*S<sub>n</sub>*, the multiplier takes:

- the four buffer entries, oldest first, starting at the buffer pointer, with coefficients C1..C4;
- the five memory words *U<sub>n</sub>..U<sub>n+4</sub>*, which are still unaltered, with C5..C9.

In the write clock, *U<sub>n</sub>* is read once more and copied over the oldest buffer entry. At
the same clock *S<sub>n</sub>* is written to address *n*, and the pointer advances. The
accumulator is 40 bits wide. The sum is shifted right by 15, because the coefficients are 1.15
fractions, and clipped to 16 bits. The clip sets `sg_sat`. At the trace edges the buffer starts
filled with the first sample, and reads past the end repeat the last sample. The coefficients are
a run-time input. The testbenches use the quadratic first-derivative set C<sub>k</sub> =
(k − 5)/60 · gain for k = 1..9, in 1.15.

The window length is a parameter, `SG_TAPS` on the top and `TAPS` on the filter. It must be odd,
and the default is 9. A window of 2*h* + 1 taps keeps *h* entries in the circular buffer and
takes 2*h* + 2 clocks per sample.

### Fixed-point division and how to read the results

This is the least obvious part of the design. Read it before you use the numbers.

The divider takes a 32-bit dividend and a **16-bit** divisor and gives a 16-bit quotient. The
divisors *F + B* and (*F + B*)·*W*² are usually wider than 16 bits. `div_normalizer` shifts such
a divisor right until it fits, and reports the shift count *s*:

- for the signed asymmetry the divisor must fit in 15 bits, because bit 15 is the sign;
- for the unsigned moment it may use all 16 bits;
- a divisor that already fits is left as it is (*s* = 0).

The dividend is **not** shifted. So the quotient is the real ratio multiplied by 2<sup>s</sup>:

    A ≈ asym_q / 2^asym_shift          I ≈ mom_q / 2^mom_shift

Each record therefore carries the quotient and its shift, and the reader divides.

A consequence follows that a user must know. The precision of a parameter is about *s* bits, and
*s* depends on the size of the pulse. For large pulses, where *F + B* is around 2<sup>20</sup>,
the asymmetry has about 6 fractional bits. For small pulses, where *F + B* < 2<sup>15</sup>, the
divisor is left intact, and the asymmetry can only come out as −1, 0 or +1. The same holds for
the moment, with (*F + B*)*W*² against 2<sup>16</sup>. Scale the filter coefficients (the `gain`
above) so that the current pulses of interest have areas well above 2<sup>15</sup>. If a quotient
does not fit in 16 bits, it saturates and sets `asym_ovf` or `mom_ovf`. This happens when a
divisor is wider than about 30 bits, or when the divisor is zero.

The moment numerator is accumulated in 40 bits. It is then kept as a 32-bit unsigned word, clipped
at 2<sup>32</sup> − 1, and the clip also sets `mom_ovf`.

### Calibration and the acceptance region

`psd_histogram` maps each event to one bin of a WB × AB × MB grid. The default is 16 × 16 × 16.

| axis | bin size | range |
|---|---|---|
| width | 2<sup>W_SHIFT</sup> samples (4 samples, 53 ns by default) | the last bin also takes wider pulses |
| asymmetry | 1/8 | −1 .. 1 |
| moment | 1/8 | 0 .. 2 |

To place an event, each quotient is first brought to value·2<sup>15</sup> using its shift.

- **Calibrate** (`cal_mode` = 1). Every event increments its bin and the total. Bin counters
  saturate at 65535.
- **Build** (`cal_build` pulse, with `accept_pct` set). The unit first clears the region. It then
  scans all bins repeatedly. Each scan finds the fullest bin not yet accepted, taking the lowest
  index on ties. That bin is accepted if (accepted sum + its count) · 100 ≤ total · pct.
  Building stops at the first bin that fails this test, or when no counts are left. The result is
  the same as sorting the bins by count and taking the top of the list. Building takes one
  clearing pass plus (accepted bins + 1) scans of NB + 1 clocks each. With 300 accepted bins that
  is about 1.2 M clocks.
- **Run** (`cal_mode` = 0). Each event's bin is looked up, and the record's `accept` bit is set if
  the bin is in the region.

`cal_clear` empties the histogram. The histogram also clears itself after reset, which takes NB
clocks. While it clears or builds, `hist_busy` is high, and the engine holds the next finished
event until it can deliver it. A `cal_clear` or `cal_build` pulse is never lost. If it comes in the same clock as an event,
the event is served first and the command starts on the next clock.

Bin size is a free choice. It should give a broad spread of counts per bin, and results change
little over a wide range of sensible sizes. To change it, set `WB`, `AB`, `MB` and `W_SHIFT`.
WB, AB and MB must be powers of two.

## Interface of `psd_core`

| port | dir | meaning |
|---|---|---|
| `clk`, `rst_n` | in | clock; asynchronous active-low reset |
| `trace_valid`, `trace_data[15:0]`, `trace_last` | in | one trace, one sample per clock while `trace_ready` is high; `trace_last` marks the final sample (a trace also ends at 2<sup>ADDR_W</sup> samples) |
| `trace_ready` | out | high while the engine waits for a trace |
| `psd_enable` | in | 0: store the trace and emit a record with `computed` = 0 at once (engine off) |
| `sg_enable` | in | 0: skip the filter (the trace already is a current pulse) |
| `sg_coef[SG_TAPS]` | in | filter coefficients, 1.15; `sg_coef[0]` multiplies the oldest sample |
| `cal_mode`, `cal_clear`, `cal_build`, `accept_pct[6:0]` | in | calibration control (see above) |
| `hist_busy`, `cal_build_done`, `cal_total`, `accepted_bins` | out | calibration status |
| `rec_valid`, `rec` | out | one-clock pulse with the `psd_record_t` of the trace |

`psd_record_t`, defined in `psd_pkg`, holds:

- `p`: width, `asym_q`/`asym_shift` and `mom_q`/`mom_shift`;
- `peak`, `n0`, `n1` and `nmid`;
- the flags `computed`, `sg_sat`, `asym_ovf`, `mom_ovf`, `classified` and `accept`.

Default parameters:

| parameter | default |
|---|---|
| `ADDR_W` | 10 (1024-word trace) |
| `CFD_PERCENT` | 8 |
| `SG_SHIFT` | 15 |
| `SG_TAPS` | 9 |
| `WB`, `AB`, `MB` | 16 each |
| `W_SHIFT` | 2 |

## What follows the original method, and what this design chose

**Taken from the method as published:**

- the three parameter definitions;
- the 8 % threshold and the walk outward from the peak;
- the midpoint by halving the window length;
- 32-bit areas and a 40-bit multiply-accumulate;
- the square-then-accumulate use of one multiplier, and the final ×12;
- the 9-tap filter with its 4-entry circular buffer, used in place;
- 32/16 non-restoring division, and divisor scaling with the shift reported alongside the quotient;
- the sort-by-count acceptance rule with a percentage.

**Chosen here:**

- dedicated sequential logic in place of a processor program;
- the trace stream interface and the 1024-word memory;
- filter edge handling, and where the 1.15 coefficient scaling is applied;
- end points of the window taken as the last samples at or above the threshold;
- tie rules;
- a 32-bit square instead of a 16-bit feedback register, since offsets in long traces exceed 255;
- dividing magnitudes and then restoring the sign;
- saturation and the overflow flags;
- everything about the histogram's hardware: bin counts, bin placement, counter widths, and
  selection by repeated scans;
- the on/off and filter-bypass inputs.

Two points in the published description do not fit together, and were resolved here:

- It calls the filter coefficients a set that sums to one, which is a smoothing set, yet uses the
  filter to differentiate. Here the coefficients are simply an input, so either kind of set works.
- It suggests a 16-bit quotient that reads as ratio·2<sup>s</sup>, but this overflows once *s*
  reaches 15 or 16. Such pulses are flagged here, not mis-scaled silently.
- It describes converting 1.15 coefficients to integers with a factor of 2<sup>16</sup>, but a
  1.15 number has 15 fractional bits. Here the products are scaled by 2<sup>−15</sup>, and
  `SG_SHIFT` changes that.

Not part of this RTL:

- the acquisition card around the engine: analog gain and offset, ADCs, the trigger and pile-up
  FPGA, the PCI interface, the spectrum memory;
- the list-mode record formats that carry the parameters to the host.

## Verification

Every unit has a self-checking testbench in `tb/`. Each compares the unit's outputs with a
plainly written reference (`tb/psd_ref_pkg.sv`) and checks its exact clock count. Each also has a
watchdog.

`tb_psd_core` runs the whole engine at its default parameters. It sends synthetic preamplifier
traces: a baseline followed by the running sum of one to three triangular current pulses, plus
noise. Every field of every record is compared with the reference chain, and the latency is
checked exactly. The run covers:

- the engine switched off;
- 121 calibration events, including small pulses whose divisors stay unscaled and areas beyond
  16 bits;
- an event that has to wait while a region is being built;
- a build at 85 %, checked against a reference sort;
- 60 run-mode events with both accept and reject decisions;
- one trace with the filter bypassed;
- one full 1024-sample trace.

Every one of these must occur, or the test fails. `tb_psd_histogram` also checks the exact 85 %
boundary and counter saturation.

`tb_workload_dep` repeats the calibrate-then-discriminate experiment at the default size:

- it calibrates on 600 events, about 56 % of them single-site-like, as under a double-escape peak;
- it builds the region at 85 %;
- it classifies 250 single-site-like and 250 multi-site-like events, and checks every record and
  decision.

In one run the region held 3 bins and kept 498 of the 600 calibration events. It kept all 250
single-site-like events and 160 of the 250 multi-site-like ones. The test requires the first
class to be kept more often than the second.

`tb_workload_rate` streams 40 full 1024-sample traces with the engine on, then 40 with it off.
With the engine on, one event took 12394 clocks. That is well inside the 235714 clocks that an
event rate of 140 per second leaves at 33 MHz. With the engine off, one event took L + 1 clocks,
which is the load only.

The tests use synthetic pulses. They show that the logic computes what is specified above. They
do not show how well the parameters separate real single-site from multi-site events.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/psd_pkg.sv tb/psd_ref_pkg.sv tb/tb_psd_core.sv --top-module tb_psd_core
./obj_dir/Vtb_psd_core
```

Each testbench ends with the line `TB_RESULT checks=N failures=M`. Swap in another `tb_<unit>.sv`
to test a single unit. The whole-engine test takes a few seconds.
