# Polygonal Approximation Sampler (PAS)

A wearable sensor usually samples its signal at a fixed rate and hands every
sample to a processor. Biosignals such as an ECG, a respiration trace or a
posture-dominated inertial signal are mostly flat or slowly sloped. Almost all
of those samples could be rebuilt by drawing straight lines between a few of
them. The PAS sits between the ADC and the processor and forwards only those
few samples. It picks them with a polygonal-approximation rule derived from the
Wall–Danielsson method. A new vertex is emitted when the accumulated error
between the signal and the straight line from the last vertex exceeds a
threshold ε. The processor receives each vertex with the number of input samples
since the previous one, so it can rebuild the time axis. Between vertices it can
sleep.

This repository is a SystemVerilog implementation of that sampler. It follows
the published PAS procedure step for step. The surrounding choices that the
publication leaves open are listed in
[Where this RTL departs from or adds to the published description](#where-this-rtl-departs-from-or-adds-to-the-published-description).

```
 sensor ─► analog front end ─► ADC ──INPUT_SAMPLE──► PAS ──OUTPUT_SAMPLE──► processor
                                ▲                     │  ──OUTPUT_INDEX───►
                                └────SAMPLING_F───────┘  ──OUTPUT_VALID───► (wake-up)
                                                      ◄──THRESHOLD────────
```

The analog front end, the ADC and the processor are not part of this RTL. Their
signals are the ports of the top module `pas`.

## The approximation step

The PAS keeps a handful of numbers about the segment that starts at the last
forwarded sample `t_prev`:

| variable | meaning |
|---|---|
| `x` | samples since `t_prev`: the segment's horizontal extent (i − t_prev) |
| `y` | `sample[i] − sample[t_prev]`: its vertical extent |
| `f` | the accumulated error, compared with ε |
| `length` | `abs(y) + x` of the previous step: a city-block distance from the segment start |
| `peak` | the first sample where that distance started to shrink, if any |

For each new sample `i`, with the previous sample `sample[i-1]` at hand, the core
does the following. The horizontal step `dx` is fixed to 1 because the sampling
rate is constant.

```
dy = sample[i] - sample[i-1]
x  = x + 1
y  = y + dy
f  = f + x - y*dy                      (printed form; see "Two forms of the error update")
displacement = |y| + x
if displacement < length and no peak held:  peak = i-1
length = displacement
if |f| > ε:
    t = peak if a peak is held, else i-1
    forward (sample[t], t - t_prev)
    f = 0, drop the peak
    x = i - t,  y = sample[i] - sample[t],  length = |y| + x
    t_prev = t
```

Three points are easy to miss:

* **The vertex is behind the current sample.** The sample that triggers an
  emission is never the one emitted. The vertex is `sample[i-1]`, or the earlier
  peak. This is the one-sample look-ahead of the method.
* **The peak rule catches turning points.** While the signal moves away from
  the segment start, `|y| + x` grows. When it first shrinks, the signal has
  turned back, and the sample before that is remembered as the peak. If the
  error bound is crossed later in the same segment, the peak rather than
  `i-1` becomes the vertex. Extrema therefore land exactly on vertices, which
  keeps features such as the R wave of an ECG.
* **The next segment starts at the vertex, not at `i`.** After an emission,
  `x` and `y` are rebuilt from `t` to `i`, but `f` restarts at zero. The
  samples between `t` and `i` add no error to the new segment. That is how the
  procedure is published, and the RTL keeps it.

### Two forms of the error update

The published procedure writes the update as `f = f + x·dx − y·dy`. That is
what `pas_core` does by default (`ERR_FORM = ERR_PRINTED`). With `dx = 1` it
costs one 17×17-bit signed multiplier, `y·dy`. In this form `−Σ y·dy` is about
`−y²/2`, so ε acts roughly as the square of the smallest amplitude change worth
a vertex. The publication's rule of thumb for choosing ε says the same. The `x`
term adds about `x²/2` per segment, so a perfectly constant input is still
forwarded every `√(2ε)` samples or so.

The same publication also states that a constant input can run the index
counter into overflow. That only happens with the signed-area update of the
original Wall–Danielsson method, `f = f + x·dy − y·dx`. In that form `f` stays
at zero along any straight line, so only bends produce vertices. That form is
available as `ERR_FORM = ERR_AREA` and costs a 16×17-bit multiplier `x·dy`
instead. Both forms are verified against the same reference model. Which one
the original silicon used cannot be settled from the description. Pick
`ERR_AREA` if straight ramps should produce no vertices.

## Mapping the step onto registers

The step is one combinational block feeding one set of registers, so the core
accepts one sample per clock.

* **Relative indices.** In the procedure, `x` is always `i − t_prev`: it starts
  at 0 with `t_prev = 0` and is reset to `i − t` exactly when `t_prev` becomes
  `t`. So one `INDEX_W`-bit register is both the segment's `x` and the counter
  behind OUTPUT_INDEX. No absolute sample index is kept anywhere. This lets the
  sampler run forever, as the published design intends. The peak is stored as
  its offset from `t_prev` (always between 1 and `x − 1`), its sample value,
  and a valid bit that stands for the procedure's `peak = 0` test.
* **Counter overflow.** When `x` would reach 2^INDEX_W − 1, the core takes the
  normal emission branch as though ε had been crossed. The vertex is again the
  peak or `i-1`. The emitted index difference then always fits OUTPUT_INDEX,
  and `x` restarts at `i − t`. An assertion checks that `x` never holds the
  all-ones value between steps.
* **Widths.**

  | quantity | width | why |
  |---|---|---|
  | samples | 16 bits, two's complement | 16 bits is the published width |
  | `y`, `dy` | 17 bits | they are differences of two samples, so they cannot overflow |
  | `length`, displacement | 17 bits unsigned | |
  | `f` | `max(2·SAMPLE_W, INDEX_W+SAMPLE_W, THRESH_W) + 3` = 35 bits | between steps `abs(f) ≤ ε`, and one step adds less than twice the largest term, so `f` cannot wrap |
  | ε | 32 bits unsigned | enough for the square of a 16-bit step |

* **Start-up.** The first sample after reset only fills `sample[i-1]`. It is
  the procedure's `sample[0]` and is never forwarded. The first forwarded index
  difference is counted from it.

## Interface and timing

Top module `pas` (all ports are plain signals):

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; synchronous active-low reset |
| `input_sample` | in | 16 | ADC result, signed |
| `sampling_f` | out | 1 | conversion strobe to the ADC, one cycle per sampling period |
| `threshold` | in | 32 | ε, unsigned; may change at any time and applies from the next sample |
| `sample_div` | in | 16 | sampling period in clock cycles (0 and 1 both mean every cycle) |
| `output_sample` | out | 16 | value of the forwarded sample |
| `output_index` | out | 16 | samples between this and the previously forwarded sample |
| `output_valid` | out | 1 | one-cycle pulse per forwarded sample; the processor's wake-up |

Parameters: `SAMPLE_W` = 16, `INDEX_W` = 16, `THRESH_W` = 32, `DIV_W` = 16,
`ADC_LAT` = 1 and `ERR_FORM` = `ERR_PRINTED`.

Timing, with `ADC_LAT` = 1:

```
cycle        n            n+1                      n+2
sampling_f   1  (ADC starts conversion)
input_sample                new value valid
core                        step on the new value
output_valid                                         1 if the step emitted a vertex
```

`output_sample` and `output_index` hold until the next vertex. With
`sample_div` = 1, `sampling_f` stays high. The PAS clock is then the sample
clock and one sample is consumed per cycle. The published energy figure for
the PAS, one 7.09 ns active cycle per sample, assumes exactly this mode.

### Sampling-rate generator (`pas_rate_gen`)

The PAS, not the ADC, sets the sampling rate. `pas_rate_gen` is a down-counter
that reloads with `sample_div − 1` on its zero count and strobes `sampling_f` on
that count. A new `sample_div` therefore applies from the next reload. An
`ADC_LAT`-deep shift register turns the strobe into `sample_take`, the enable of
the core. This models an ADC whose result is ready a fixed number of clocks
after the conversion strobe.

## Rebuilding the signal on the processor side

Let the k-th forwarded pair be `(v_k, d_k)`. Its sample index is
`n_k = d_1 + … + d_k`, counted from the first sample after reset. The
approximation is the straight line from `(n_{k-1}, v_{k-1})` to `(n_k, v_k)`.
Vertex k is emitted some samples after `n_k`, when the next segment has built
up enough error. The processor therefore sees each vertex late. The delay is
bounded by the index range: at most 65,535 samples, or about 3 minutes at
360 samples/s.

## Size

Coarse synthesis of `pas` (yosys, word-level cells) at the default parameters
gives about 70 cells and 186 flip-flop bits: 168 in the core and 18 in the
rate generator. The core's multiplier, adders and comparators make up the
logic, with no memories. For comparison, the published 40 nm synthesis has
144 sequential cells. The register widths of that design are not published, so
the two counts are not directly comparable.

## Verification

Every testbench is self-checking and ends with a line
`TB_RESULT checks=<n> failures=<n>`.

| testbench | what it checks |
|---|---|
| `tb/pas_core_tb.sv` | three cores run side by side: default, 6-bit index, area form. Each is stepped against `pas_ref_pkg`, a 64-bit, absolute-index transcription of the procedure. The inputs are an ECG-like wave, a random walk with ε changed every 100 samples, piecewise-linear ramps, full-range random samples with ε = 0 and ε = 2³²−1, and long constants that overflow the counter. The cycle of every `out_valid` is compared, and each emission cause (threshold, peak, overflow) must occur. |
| `tb/pas_rate_gen_tb.sv` | strobe period and the ADC-latency delay for latencies 1 and 3, with `sample_div` changed at random, including to 0 and 1 |
| `tb/pas_tb.sv` | the whole `pas` at its default parameters with an ADC model. It runs one 20-s ECG window at 360 Hz with one sample per clock, a three-threshold sweep, a divided rate, a 140,000-sample constant that overflows the counter, and a return to full rate |
| `tb/pas_workload_tb.sv` | the three evaluated signal types side by side on one clock: an ECG at 360 Hz, six inertial axes at 50 Hz (one PAS per axis) and respiration at 125 Hz. It simulates 8 minutes of signal in four phases of rising ε and prints the sampling reduction factor of each. The waveforms are synthetic, so only the trend is meaningful. |

`tb/pas_ref_pkg.sv` is the reference model, and `tb/pas_channel.sv` bundles an
ADC model, a PAS and a checker for the system benches.

Running one with plain Verilator, from the repository root:

```
verilator --binary --timing --assert -Wno-fatal \
    rtl/pas_pkg.sv rtl/pas_rate_gen.sv rtl/pas_core.sv rtl/pas.sv \
    tb/pas_ref_pkg.sv tb/pas_tb.sv --top-module pas_tb
./obj_dir/Vpas_tb
```

For `pas_workload_tb`, add `tb/pas_channel.sv`. For `pas_core_tb` or
`pas_rate_gen_tb`, the package, the block and its bench are enough. Each bench
finishes in a few seconds.

The workload bench gives sampling reduction factors that rise with ε, from
about 82 % to 98 % for the ECG-like signal and from 35 % to 98 % for the
respiration-like signal. The numbers come from synthetic waveforms and do not
reproduce the published results, which used recorded datasets.

## Where this RTL departs from or adds to the published description

From the publication: the 16-bit sample width; the procedure, step by step,
with `dx = 1`; the port set and names; single-cycle processing; index
differences instead of absolute indices; and the overflow rule in outline.

This design's own choices:

* The index width (16), ε width (32) and accumulator width.
* Two's-complement samples; a synchronous active-low reset; registered outputs
  with a one-cycle `output_valid`.
* Which vertex is sent on counter overflow: the normal emission branch.
* The `ERR_AREA` option, for the conflict described above.
* The shape of `sampling_f`: a strobe from a clock divider. The added
  `sample_div` port, since the publication does not say who sets the rate. A
  fixed ADC latency.
* The description mentions five combinational processes. Here the step is one
  combinational block; the published split is not known.
* It also mentions a multiplier used for the segment length and its comparison
  with ε. The procedure as written has no such multiplier. The RTL follows the
  procedure: `length` is `|y| + x`, and `|f|` is compared with ε directly.
* One PAS handles one channel. A multi-channel sensor, such as the six-axis
  inertial unit, uses one instance per channel.
