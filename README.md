# A multiplierless in-filter acoustic classifier

This design classifies one-second audio clips (16 kHz, 10-bit samples) with a
kernel machine. It contains no multiplier. Two ideas make that possible.

* **The filter bank is the kernel.** A bank of 30 FIR band-pass filters is
  applied to the audio. Each filter output is half-wave rectified and summed
  over the clip, and the 30 sums form the kernel vector of a kernel machine
  directly. There is no separate feature extractor, and no support vectors
  are stored. The feature extractor and the kernel are the same piece of
  hardware.
* **Every dot product is replaced by Margin Propagation (MP).** Both the FIR
  filters and the kernel machine need a dot product. MP is a piecewise-linear
  approximation of log-sum-exp that uses only comparisons, additions and
  shifts. So the filters, the classifier and the decision all run on a few
  MP units, each shared in time across many operations.

The clock is 50 MHz, which leaves 3125 cycles between two samples. Six MP
units share the work:

* MP0 runs the anti-aliasing low-pass cascade.
* MP1 runs the 5 full-rate band-pass filters.
* MP2 runs the 25 band-pass filters of the decimated octaves.
* MP3, MP4 and MP5 form the kernel machine, which runs once per clip.

```
 x(n) ──┬──────────────► RegBank0 ─► MP1 (5 BP filters) ─► HWR+acc ─► RegBank5 (5 x 24 b) ─┐
        │                                                                                  │ sel6
        └─► LPRegBank0..3 ─► MP0 (L1..L4, decimate by 2) ─► RegBank1..4 ─► MP2 (25 BP) ─► HWR+acc ─► RegBank6 (25 x 24 b) ─┤
                                                                                                                          ▼
                                 upper 10 bits = Phi_0..29 ─► MP3, MP4 (kernel machine) ─► MP5 ─► p+, p-, p = p+ - p-
```

## Margin Propagation in integers

For inputs `L_1..L_n` and a margin `gamma >= 0`, MP returns the level `z`
that satisfies

    sum_i [L_i - z]_+ = gamma          ([a]_+ = max(a, 0))

Picture it as reverse water filling. Lower a water line from above until the
parts of the inputs that stick out above it add up to `gamma`. With
`gamma = 0`, `z` is the maximum. A larger `gamma` pulls `z` down towards a
soft average of the largest inputs.

The hardware works in integers. It returns the **largest integer `z` with
`sum_i [L_i - z]_+ >= gamma`**, which is the floor of the real-valued
solution. Every block and the reference model use this same convention, so
results match bit for bit.

How `mp_core` finds `z`:

1. Each term is at most `max - z`, so `z` always lies in `[max - gamma, max]`.
2. One cycle finds the maximum `m`.
3. A binary search over the offset from `m - gamma` then fixes one bit per
   cycle, MSB first.
4. For each trial level, an adder tree sums the positive parts of
   `L_i - z_trial`. The trial bit is kept if the sum is still `>= gamma`.

Latency is `GW + 2` cycles for a `GW`-bit margin: 12 cycles at `GW = 10`.
This needs one comparator tree, one adder tree and `N` subtract-and-clamp
units, and no multiplier.

`mp_serial` runs the same search for the kernel machine. Its 61 inputs arrive
as a stream, one kernel entry (two inputs) per cycle, instead of in parallel.

* One pass over the stream finds the maximum.
* Each further pass decides one bit of `z`.
* A run over `B` beats takes `(GW+1)(B+2)+2` cycles.

The unit asks for each pass with `pass_start`. The source must then stream
all beats once, ending with `in_last`.

## An FIR filter in the MP domain

A filter output `y = sum_k h_k x_k` is written as the difference of two
positive halves. Each half is approximated by MP, with `h+ = h`, `h- = -h`,
`x+ = x` and `x- = -x`:

    z_p = MP([h_k + x_k,  -h_k - x_k]_k, gamma_f)      (2M inputs)
    z_n = MP([h_k - x_k,  -h_k + x_k]_k, gamma_f)
    y   = z_p - z_n                                    (clamped to 10 bits)

`mp_filter` evaluates this on one `mp_core` used twice in a row. A
16-tap band-pass output, or a 6-tap low-pass output, takes `2(GW+2)+3 = 27`
cycles. The caller must hold the window and the coefficient row still until
`done`. All filter units share the margin `gamma_f`; it is an input port,
because it is a trained value.

## The octave filter bank

The 30 filters are arranged by octave. The highest band-pass filters run on
the 16 kHz input. Each lower octave runs on a copy of the input that has been
low-pass filtered and decimated by 2 once more. That keeps every filter
short: all band-pass filters have 16 taps and the anti-aliasing filters have
6. A direct filter bank would need up to about 200 taps for its lowest
bands.

* **Octave 1 (`bp_octave1`, MP1).** RegBank0 holds the last 16 input
  samples. For every input sample, MP1 runs the 5 filters of ROM1 one after
  another: 5 × 29 + 2 = 147 cycles.
* **Low-pass cascade (`lp_section`, MP0).**
  * Four 6-sample windows, LPRegBank0..3, feed the stages L1..L4.
  * L`k` reads the output of L`k-1`, decimated by 2; L1 reads the input.
  * Only outputs that survive decimation are computed. L1 runs on every
    second sample, L2 on every fourth, and so on: L`k` runs when the low `k`
    bits of the sample count are all ones.
  * Each kept output is pushed into the next LP window and into the
    band-pass window of its octave (RegBank1..4).
* **Decimated octaves (`bp_octaves`, MP2).**
  * A pending flag records which of RegBank1..4 received a new sample.
  * After the LP chain, MP2 runs only the filters of those banks: 29 cycles
    per filter, 1 cycle per skipped filter.
  * ROM2 holds the 25 coefficient rows.

The mapping of the 25 filters to banks is the least certain part of the
design. The structure calls for four decimated octaves, each with a 16-tap
bank, and 25 filters on them, alongside 5 filters per octave and 4 low-pass
filters. 25 filters cannot be split into 4 octaves of 5. This design uses:

* filters 0–19 in groups of five on RegBank1..4, so octaves 2–5 have 5
  filters each;
* filters 20–24, a sixth group with the lowest cut-offs, also on RegBank4,
  the lowest rate.

The kernel entries are numbered 0–29 here. Entries 0–4 are octave 1 (RegBank5)
and entries 5–29 are the decimated octaves (RegBank6).

The function `mfic_pkg::bank_of` holds this mapping. Changing it there
changes the hardware.

### The per-sample schedule

Each sample is handled in three steps:

1. MP1 and MP0 start together when a sample is accepted.
2. MP2 starts once the low-pass chain has finished.
3. The sample is finished when both MP1 and MP2 are done.

How long that takes depends on how many LP stages ran for that sample. These
numbers were measured at the default sizes, from sample accepted to ready
again:

| LP stages run | filters on MP2 | cycles |
|---|---|---|
| 0 (every other sample) | 0 | 148 |
| 1 | 5 | 200 |
| 2 | 10 | 369 |
| 3 | 15 | 538 |
| 4 (every 16th sample) | 25 | 846 |

The worst case is 846 cycles, well inside the 3125-cycle sample period. A
sample that arrives while the design is busy is dropped and counted. At
16 kHz this cannot happen.

## The kernel: rectify, accumulate, take the top bits

Every band-pass output `y` is half-wave rectified and added to that filter's
24-bit register:

* RegBank5 holds the 5 octave-1 filters (`u_acc5`).
* RegBank6 holds the other 25 (`u_acc6`).

Rectified 10-bit values over 16000 samples peak at 8.2 M, which is below
2^24 = 16.7 M. The registers still saturate instead of wrapping, so that
narrower accumulators stay meaningful.

The kernel value is `Phi_i` = the **upper 10 bits** of register `i`, an
unsigned value. Scaling is therefore a fixed shift by 14. There is no
mean-and-deviation standardisation in the hardware; any such scaling has to
be folded into the trained weights. All registers are cleared after each
classification. The filter windows are not cleared, so the filter state
carries over from one frame to the next.

## The MP kernel machine

A linear decision `f = sum_i w_i Phi_i + b` is again split into positive and
negative halves. With `K+ = Phi`, `K- = -Phi`, and weights
`w+_i`, `w-_i`, `b+`, `b-`:

    z+ = MP([w+_i + Phi_i,  w-_i - Phi_i  (i = 0..29),  b+], gamma_1)     MP3
    z- = MP([w+_i - Phi_i,  w-_i + Phi_i  (i = 0..29),  b-], gamma_1)     MP4
    z  = MP([z+, z-], gamma_n = 1)                                        MP5
    p+ = [z+ - z]_+ ,  p- = [z- - z]_+ ,  p = p+ - p-

MP5 normalises the two halves, so `p+ + p-` is always `gamma_n`, which is 1
or 2 in integers. The sign of `p` is the class: positive means the class is
present.

`inference_engine` reads the 30 kernel values one per cycle through the
`sel6` multiplexer. Entries 0–4 come from RegBank5 and 5–29 from RegBank6.

* MP3 and MP4 are two `mp_serial` units running in lock step. An assertion
  checks this.
* For every pass they request, the engine streams 30 beats `{w+ ± Phi,
  w- ∓ Phi}`, then a last beat with only the bias. The bias beat uses a lane
  mask.
* MP5 is a two-input `mp_core`.
* A complete decision takes `(GW+1)(P+3)+GW+8 = 381` cycles.
* The weight ROM has 31 rows of `{w+, w-}`; the last row is `{b+, b-}`.
* `gamma_1` is an input port, because it is learned.

## Top level: `mfic_top`

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock (50 MHz intended), asynchronous active-low reset |
| `x_valid`, `x` | in | 1, 10 signed | audio sample; taken only when `x_ready` is high |
| `x_ready` | out | 1 | design idle, next sample can be taken |
| `gamma_f`, `gamma_1` | in | 10 | MP margins of the filters and of the kernel machine |
| `result_valid` | out | 1 | one-cycle pulse once per frame |
| `p`, `p_plus`, `p_minus` | out | 15 signed, 14, 14 | decision value and its halves |
| `z_plus`, `z_minus`, `z` | out | 13, 13, 14 signed | MP3, MP4, MP5 outputs |
| `dropped` | out | 16 | samples refused because the design was busy (saturating) |
| `kernel_valid`, `kernel_idx`, `kernel_phi` | out | 1, 5, 10 | the 30 kernel values, one per cycle, as the classifier reads them |

Parameters:

* `N_SAMPLES_P`: frame length, default 16000.
* `ACC_W_P`: accumulator width, default 24. `Phi` is always the top 10 bits,
  so a narrower accumulator gives usable kernel values on short frames.
* `GW`: margin width, default 10.
* `GAMMA_N`: default 1.

After the last sample of a frame, the kernel machine runs. Its outputs are
registered and `result_valid` pulses. The accumulators are cleared and the
next frame starts with the next accepted sample. In a full-size run, the
result arrived 1227 cycles after the last sample was accepted: 846 to finish
that sample, then 381 for the classifier.

## Coefficients and weights

The trained filter coefficients and classifier weights are not available.
The ROM files hold stand-ins that let the design be exercised. Their
contents, all 10-bit two's complement, one value per line:

* `rom0_lp.hex` (4 × 6): the same low-pass filter for all four stages.
  * Hamming-windowed sinc, `h[n] = 2 fc sinc(2 fc (n - 2.5)) w[n]`, with
    cut-off `fc = 0.25` cycles per sample.
  * Scaled so the largest tap is 255, giving `-4 37 255 255 37 -4`.
* `rom1_bp.hex` (5 × 16): Hamming-windowed band-pass filters.
  * `h[n] = (2 f2 sinc(2 f2 (n-7.5)) - 2 f1 sinc(2 f1 (n-7.5))) w[n]`.
  * Bands `[0.125 + 0.025 i, 0.125 + 0.025 (i+1)]`, `i = 0..4`: equally
    spaced cut-offs in the upper half of each octave's band.
  * Scaled to a peak of 255.
* `rom2_bp.hex` (25 × 16): the five rows of `rom1_bp.hex` repeated for
  octaves 2–5, because each octave sees the same relative band at half the
  rate. Then five rows with bands `[0.0625 + 0.0125 i, …]` for the lowest
  group.
* `weights.hex` (31 × 2):
  * `w+_i = ((53 i + 17) mod 201) - 100`
  * `w-_i = ((29 i + 71) mod 151) - 75`
  * bias row `{20, -20}`

For real classification, replace the four files. The ROMs are read with
`$readmemh` from paths relative to the project root. Each file name is a
module parameter.

## Where this design departs from its source, and what is its own

* **MP unit internals.** The MP solver (max, then bit-serial search), its
  integer floor convention, the streamed variant and all latencies are this
  design's own. The method defines only what MP computes.
* **Filter-to-octave map.** Filters 20–24 on the lowest-rate bank: see
  above.
* **Decimation.** Decimation by computing only the kept low-pass outputs,
  and running a bank's filters only when it received a new sample, are own
  choices. They give the same numbers as computing everything and
  discarding.
* **Word widths.** Coefficients and weights are 10-bit, the datapath width.
  The source quantises its filter bank at 8 bits; 8-bit values fit in the
  10-bit ROMs unchanged.
* **No standardisation.** Kernel standardisation ((s - mu) / sigma) is not
  in the hardware: it would need a divider and trained statistics.
* **Both weights on both units.** MP3 and MP4 each read both `w+` and `w-`,
  as the kernel-machine equations require. A block diagram that routes only
  one weight to each unit was not followed.
* **Own sequencing and interfaces.**
  * Per-sample and per-frame sequencing.
  * The `x_valid`/`x_ready`/`dropped` handshake.
  * Registering `p+`, `p-` and `p` together.
  * The kernel-observation ports.
  * Asynchronous active-low reset everywhere.
* **Widths not given by the source.** Margins (`GW`) and MP input widths
  (data + 2 bits) are assumptions.
* **Not present.** The microphone and ADC, training, and the choice of class
  (one weight set per one-vs-all classifier) lie outside this RTL. Switching
  classes means loading another weight ROM image.

## Verification

`tb/mfic_ref_pkg.sv` is a behavioural reference written independently of the
RTL:

* an exact integer MP (sort, then closed form);
* the MP filter;
* a complete sample-by-sample model of the octave bank, the accumulators and
  the kernel machine.

Every testbench checks itself, ends with a `TB_RESULT checks=… failures=…`
line, and has a watchdog. Stimulus comes from `$urandom`.

| testbench | what it checks |
|---|---|
| `tb_mp_core` | 500 random MP problems (32- and 2-input units) against the reference; latency `GW+2` |
| `tb_mp_serial` | random streams with masked lanes; run length `(GW+1)(B+2)+2` |
| `tb_mp_filter` | 16- and 6-tap filters against the reference; latency 27; saturation cases |
| `tb_shift_regbank` | window contents after random pushes |
| `tb_coef_rom` | ROM rows against the files, filter symmetry, known values |
| `tb_kernel_accum` | rectify-and-accumulate against a model, saturation hit, clear, `Phi` slice |
| `tb_lp_section` | decimated outputs and order, stage run counts, cycles per sample |
| `tb_bp_octave1` | the 5 outputs per sample, 147 cycles per sample |
| `tb_bp_octaves` | random bank patterns; outputs, skipped banks, per-filter timing |
| `tb_inference_engine` | 120 random kernels; all MP outputs and `p`; 381 cycles; `p+ + p-` in {1, 2} |
| `tb_mfic_top` | three 32-sample frames with 11-bit accumulators (see below) |
| `tb_mfic_top_full` | one complete 16000-sample frame at the default parameters |

**`tb_mfic_top`** uses short frames, so that `Phi` is non-trivial and the
louder frames saturate the accumulators. It compares the 30-entry kernel
stream and all outputs of the kernel machine with the model, then checks:

* the cycles per sample depend only on, and grow with, the number of
  low-pass stages run, and stay below 3125;
* each mechanism occurs: every LP stage, every decimated bank, accumulator
  saturation, a dropped sample, a change of `gamma_1` between frames, and
  decisions of both signs.

**`tb_mfic_top_full`** feeds a 16000-sample noisy chirp that sweeps the band.
It checks the kernel vector, the decision, the timing budget and that no
sample is dropped. One such frame is the unit of work of the
classification tasks the design targets: one 1-second clip gives one
one-vs-all decision. It simulates in about 10 s.

## Simulating with Verilator

Run from the project root, because the ROM paths are relative to it. Any
testbench builds the same way: list the two packages first and let `-y rtl`
find the modules.

```
verilator --binary --timing -Wno-fatal -y rtl -Irtl \
    rtl/mfic_pkg.sv tb/mfic_ref_pkg.sv tb/tb_mfic_top_full.sv \
    --top-module tb_mfic_top_full -Mdir obj_full
./obj_full/Vtb_mfic_top_full
```

Replace `tb_mfic_top_full` with any testbench name from the table.
Parameters of the top can be overridden in a testbench instance, for example
`mfic_top #(.N_SAMPLES_P(32), .ACC_W_P(11))`. The reference model follows the
accumulator width through its `acc_w` field.

## Files

| file | contents |
|---|---|
| `rtl/mfic_pkg.sv` | shared widths, sizes, saturation helper, filter-to-bank map |
| `rtl/mp_core.sv` | parallel MP unit |
| `rtl/mp_serial.sv` | streamed MP unit |
| `rtl/mp_filter.sv` | one FIR output in the MP domain |
| `rtl/shift_regbank.sv` | sample window |
| `rtl/coef_rom.sv` | row-wide coefficient ROM |
| `rtl/lp_section.sv` | MP0, low-pass cascade with decimation |
| `rtl/bp_octave1.sv` | MP1, full-rate band-pass filters |
| `rtl/bp_octaves.sv` | MP2, band-pass filters of the decimated octaves |
| `rtl/kernel_accum.sv` | rectifier, accumulators, `Phi` read-out |
| `rtl/inference_engine.sv` | MP3/MP4/MP5 kernel machine |
| `rtl/mfic_top.sv` | top level and sample/frame sequencing |
| `rtl/*.hex` | ROM images (formulas above) |
| `tb/mfic_ref_pkg.sv` | reference model |
| `tb/tb_*.sv` | testbenches |
