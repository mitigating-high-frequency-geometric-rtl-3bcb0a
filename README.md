# A 1-bit sparse population transform with a low-pass clean-up stage

This design turns a short dense signal into a very sparse binary code and back
again, with no multiplier on the way back. A frame of 128 signed samples
`x` (each in [-127, 127]) is compared against an overcomplete dictionary `D` of
1024 signed 8-bit basis functions, each 128 samples long. Every basis function
whose correlation with the input reaches a threshold `tau` becomes an *active
neuron*, and the frame is now described by a 1024-bit population code `y`:

    p_i = sum_k D[i][k] * x[k]                    (projection, i = 0 .. 1023)
    y_i = 1 if p_i >= tau, else 0                  (hard threshold)
    raw = C * sum over active i of D[i]            (reconstruction)
    out = low-pass(raw), clipped to [-127, 127]

Because `y_i` is 0 or 1, the reconstruction is nothing but conditional
addition of whole basis functions. The price is that a sum of a few hundred
quantised basis functions carries a lot of energy at high spatial frequency:
the rebuilt waveform follows the input's shape but is covered in sample-to-sample
jitter. That jitter has little to do with the input, which is smooth, so a
cheap low-pass filter after the reconstruction removes most of it. The design
is that whole chain in hardware: projection, threshold, reconstruction that
visits only the active neurons, scaling, and a multiplier-free filter.

The structure, the sizes, the threshold rule, the conditional-addition
reconstruction with one global scale `C`, the skipping of inactive neurons and
the presence of a low-pass filter come from the published description of the
method. Everything the description leaves open was decided here and is listed
in [Where the design goes beyond the description](#where-the-design-goes-beyond-the-description).

## Data path and sizes

    x (128 x int8) --> projection_engine --> threshold_engine --> recon_accum --> lpf_smoother --> out (128 x int8)
                          D^T x, 24 bit        y, active list      sum of D_i       [1 2 1]/4 x F
                               ^                                     ^   >>> c_shift
                               +------------- dict_mem --------------+
                                   1024 x 128 x int8 = 1 Mbit

| quantity | value | width in the RTL |
|---|---|---|
| samples per frame `DIM` | 128 | 8-bit signed, [-127, 127] |
| neurons `NEURONS` | 1024 | code `y`: 1024 bits; count: 11 bits |
| dictionary entry | signed 8-bit | 128-bit words, 16 entries each |
| projection `p_i` | up to 128*128*127 < 2^21 in magnitude | 24-bit signed |
| threshold `tau` | any integer in the projection range | 24-bit signed |
| reconstruction sum | up to 1024*128 = 2^17 in magnitude | 20-bit signed |
| scale `C` | 2^-c_shift, c_shift = 0 .. 31 | 5-bit field |
| filter passes `F` | 0 (off) .. 15 | 4-bit field |
| lanes `LANES` | 16 dictionary entries per clock | parameter |

The sizes are parameters of `sparse_pop_top` (`P_NEURONS`, `P_DIM`, `P_LANES`)
with the values above as defaults; the shared widths sit in `sparse_pkg`.
`DIM/LANES` must be a power of two.

## How a frame runs

The stages run one after another under `frame_ctrl`; a frame never overlaps
the next one. Only one engine uses the dictionary at a time, and the phase
register decides which (host writes while idle, the projection engine, then
the reconstruction engine). Assertions in `sparse_pop_top` check that at most
one engine is busy and only in its own phase.

1. **Projection and threshold** (`projection_engine`, `threshold_engine`).
   Neurons are handled in index order. For each neuron the engine reads its
   basis function as `W = DIM/LANES = 8` dictionary words, multiplies 16 entries
   with 16 input samples per clock and accumulates. Each finished projection is
   handed to the threshold engine in the next clock; the engine sets the code
   bit and, if the neuron fired, appends its index to the *active list* and
   increments the count. Cost: `NEURONS*W + 1` = 8193 clocks.
2. **Reconstruction** (`recon_accum`). The engine walks the active list, reads
   the 8 words of each listed basis function and adds its 16 entries per clock
   into 128 accumulators. Neurons that did not fire are never visited, so this
   stage costs `A*W + 1` clocks for `A` active neurons: with 50 % of the
   neurons active it takes half the time of a full pass, with 10 % a tenth.
   The accumulators are scaled by an arithmetic right shift by `c_shift`
   (rounding toward minus infinity).
3. **Filter** (`lpf_smoother`), one clock per pass, `F + 1` clocks.
4. **Output**: 128 samples on a valid/ready stream, in index order.

With `out_ready` held high a frame takes exactly

    NEURONS*W + A*W + F + DIM + 9  =  8192 + 8A + F + 137 clocks

from the clock that takes `start` to the clock that shows `frame_done`, e.g.
12,281 clocks for 494 active neurons with the filter off. The projection
dominates; it needs 16 signed 8x8 multipliers. The reconstruction and filter
need adders and shifters only.

## The active list: skipping silent neurons

The code `y` is a plain 1024-bit register, but scanning it for set bits during
the reconstruction would either cost a clock per neuron or a 1024-bit priority
encoder. Instead the threshold engine writes the index of every neuron that
fires into a 1024 x 10-bit list as the projections stream past, in increasing
order. The reconstruction reads that list, so its run time is proportional to
the number of active neurons only. The list needs no clearing: entries at or
beyond `active_count` are ignored. `pop_code` and `active_count` remain visible
on the top's ports after the frame.

## The low-pass filter

Each pass replaces every sample by a weighted mean of itself and its two
neighbours,

    v'[k] = floor((v[k-1] + 2 v[k] + v[k+1] + 2) / 4)

with the first and last sample repeated beyond the ends. All 128 samples are
updated in parallel, so one pass is one clock and the hardware is 128 small
adders with fixed shifts. One pass has the frequency response
`H(w) = cos^2(w/2)`, zero at the Nyquist frequency, and `F` passes equal one
binomial kernel of `2F + 1` taps with response `cos^(2F)(w/2)`. The
half-power point lies at half the Nyquist frequency for `F = 1` and at about a
quarter of it for `F = 5` (an 11-tap kernel). `F = 0` passes the raw reconstruction
through unchanged, which is how the unfiltered results are produced. After the
last pass each sample is clipped to [-127, 127] and `out_saturated` reports
whether any was clipped.

## The threshold and its adaptation

`tau` lives in `tau_adapt`. The host loads it with `tau_load`/`tau_in` while
idle. With `adapt_en` set, the block compares each finished frame's active
count with `target_count` and moves `tau` by `tau_step`: up if too many
neurons fired, down if too few, unchanged on an exact match. The new value
applies from the next frame (it is written one clock after `frame_done`) and
saturates at the ends of the 24-bit range. `tau_raised`/`tau_lowered` pulse
when it moves. This is a first-order density controller: with a fixed input
it walks `tau` toward the value that gives the target count and then
oscillates around it by one step.

## Host interface

All ports are synchronous to `clk`; `rst_n` is an active-low asynchronous
reset. The top's ports are plain signals.

* **Dictionary load**: `dict_wr_en`, `dict_wr_addr` (13 bit), `dict_wr_data`
  (128 bit). Word `n*8 + j` holds entries `16j .. 16j+15` of basis function `n`,
  entry `16j` in bits 7:0. Writes are taken only while `dict_wr_ready` (idle).
* **Input load**: `x_wr_en`, `x_wr_idx`, `x_wr_data`, one sample per clock,
  only while `x_wr_ready`. A written -128 is stored as -127.
* **Configuration**: `tau_load`, `tau_in`, `adapt_en`, `target_count`,
  `tau_step`, `c_shift`, `filt_passes`. Hold them stable from `start` to
  `frame_done`.
* **Run**: pulse `start` while idle; `busy` is high until the frame ends.
* **Output**: `out_valid`, `out_ready`, `out_idx`, `out_data`; `frame_done`
  pulses with the last handshake.
* **Status**: `pop_code`, `active_count`, `tau`, `out_saturated`,
  `tau_raised`, `tau_lowered`.

A typical sequence: reset, write all 8192 dictionary words once, load `tau`,
then per frame write 128 samples, pulse `start` and drain 128 outputs.

## Where the design goes beyond the description

The published description defines the computation but not its hardware. These
choices were made here:

* **The dictionary contents are not known.** It is described as a proprietary
  8-bit 128 x 1024 dictionary, so here it is a writable memory loaded by the
  host. Any dictionary can be used; the testbenches use random and cosine
  dictionaries.
* **The projection multiplies.** The description says inference uses no
  matrix multiplication, yet its threshold rule is applied to `D^T x`, an
  8-bit matrix-vector product. The design follows the formula: the projection
  uses 16 multipliers, and only the reconstruction is multiplier-free.
* **`C` is a power of two.** The description has one global normalisation
  constant and calls the scaling multiplier-free; a right shift is the
  simplest scale that satisfies both. The host chooses `c_shift`.
* **The filter kernel.** The description asks for a digital low-pass filter
  and reports results for filter settings 0, 1 and 5 without naming the
  filter. Here the setting is read as the number of `[1 2 1]/4` passes.
* **Output format.** The output is 128 integers; here they are clipped to the
  input range so output and input share one format.
* **Threshold adaptation rule.** The description says `tau` is adjusted to
  control how many neurons fire, not how; the fixed-step rule above is the
  simplest controller that does that.
* **Lanes, sequencing, handshakes, reset, widths** are all this design's.
* **Not built**: the description also speaks of a "dual-stream (spatial and
  structural)" topology, but says nothing about what the two streams compute
  or how they combine, and its own pipeline and equations describe one path.
  Only that path is implemented.

The reported result plots also print a "Resp" figure per frame whose meaning
is not given; the design does not compute it.

## Verification

Every module has a self-checking testbench in `tb/` that compares against
values computed independently in the testbench (the integer model in
`tb/sparse_ref_pkg.sv`), checks cycle counts where the timing is defined, and
ends with a line `TB_RESULT checks=N failures=M`.

| testbench | what it checks |
|---|---|
| `tb_dict_mem` | write/read-back, one-clock latency, hold while disabled |
| `tb_input_buffer` | chunked reads, clamping of -128 |
| `tb_projection_engine` | all 1024 projections against `D^T x`, including the extreme sums; first result after 9 clocks, done after 8193 |
| `tb_threshold_engine` | code bits at, just below and around `tau`; active list and count; clear |
| `tb_tau_adapt` | raise/lower/hold, saturation, load priority |
| `tb_recon_accum` | sums and scaling for empty, single, random and full lists; `A*8 + 1` clocks |
| `tb_lpf_smoother` | 0/1/5/15 passes against the reference, clipping, timing, noise reduction |
| `tb_frame_ctrl` | phase order, one-clock start pulses, output back-pressure |
| `tb_sparse_pop_top` | whole design at the default sizes over ten frames: output samples, code, count, exact frame time; it also counts that neuron skipping, filter bypass, filtering, `tau` raised and lowered, an empty code, clipping, output back-pressure and refused host writes each occurred |
| `tb_workloads` | the six evaluated configurations, threshold adaptation to a target count, a high-threshold run (below); every output and code bit against the reference model; the filter must lower the high-frequency energy |

To run one with Verilator 5:

    verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
        rtl/sparse_pkg.sv tb/sparse_ref_pkg.sv tb/tb_sparse_pop_top.sv \
        --top-module tb_sparse_pop_top
    ./obj_dir/Vtb_sparse_pop_top

The full-size end-to-end test runs in well under a second of simulation time
on a workstation.

## The evaluated configurations

The method was evaluated on waveforms built from 12 and 24 trigonometric
terms, with `tau = 10` and `tau = 100` and filter settings 0, 1 and 5. All six
fit the design at its default sizes (128 samples, 1024 neurons, any 24-bit
`tau`, up to 15 passes). `tb_workloads` runs them on an illustrative
dictionary, a sampled cosine frame of 64 frequencies x 16 phases, because the
original dictionary is not available; the host picks `c_shift` so that the raw
reconstruction just fits in [-127, 127]. One run gave:

| terms | tau | passes | active neurons | RMS error raw | RMS error out | high-frequency energy out |
|---|---|---|---|---|---|---|
| 12 | 10 | 0 | 499 | 46.3 | 46.3 | 506,612 |
| 12 | 10 | 5 | 499 | 46.3 | 40.4 | 1,518 |
| 12 | 100 | 0 | 398 | 45.2 | 45.2 | 440,859 |
| 12 | 100 | 5 | 398 | 45.2 | 40.0 | 1,273 |
| 24 | 10 | 0 | 502 | 45.5 | 45.5 | 521,808 |
| 24 | 10 | 1 | 502 | 45.5 | 41.1 | 31,046 |
| 12 (new input) | 2000 | 0 | 32 | 29.9 | 29.9 | 896 |
| 12 (new input) | 2000 | 5 | 32 | 29.9 | 30.0 | 743 |

("High-frequency energy" is the sum of squared second differences of the
output; errors are in input units, against a signal peak of 127.) About half
of the neurons fire at `tau = 10`, as in the original evaluation. The filter
removes two to three orders of magnitude of the high-frequency energy, which
is the effect the method relies on. It does not, on this dictionary, bring the
error close to zero: even with the best single gain applied to the output the
RMS error stays at 35 to 45 for `tau` = 10 and 100. The cause is the
dictionary, not the hardware (every output matches the reference model): the
input contains only a few frequencies, the atoms of all other frequencies
have projections that are pure rounding noise of a few hundred, and at a
threshold of 10 or 100 about half of them fire and add broadband noise, much
of it below the filter's cut-off. Raising `tau` above that noise (2000, 32
active neurons) lowers the error to about 30. The small published error
figures were obtained with the original dictionary, which is not available, so
they are not reproduced here.

The same testbench also turns the threshold adaptation on, with a target of
195 active neurons (the count reported for the 12-term input at `tau = 100`)
and a step of 20, starting from `tau = 10`. In one run `tau` climbed to 290
within 60 frames, where exactly 195 neurons fire. Because the rounding-noise
projections cluster near zero, a coarse step (500 or more) makes the count
jump from about 500 to under 100, and the controller can then only bracket
the target.

## Files

| file | contents |
|---|---|
| `rtl/sparse_pkg.sv` | sizes, widths, phase type |
| `rtl/sparse_pop_top.sv` | top level, dictionary port arbitration |
| `rtl/frame_ctrl.sv` | frame sequencer and output stream |
| `rtl/dict_mem.sv` | dictionary memory |
| `rtl/input_buffer.sv` | input vector |
| `rtl/projection_engine.sv` | `D^T x`, 16 lanes |
| `rtl/threshold_engine.sv` | threshold, code, active list |
| `rtl/tau_adapt.sv` | threshold register and adaptation |
| `rtl/recon_accum.sv` | conditional-addition reconstruction and scale |
| `rtl/lpf_smoother.sv` | binomial low-pass filter and clipping |
| `tb/sparse_ref_pkg.sv` | integer reference model |
| `tb/tb_*.sv` | testbenches |
