# Modulated wideband converter: digital sampling and recovery core

A signal whose spectrum occupies only a few narrow bands, scattered somewhere
inside a very wide range (10 GHz here), can be captured at a rate close to
the total width of those bands rather than at the Nyquist rate of the whole
range. This holds even when the band positions are unknown. The modulated
wideband converter (MWC) does this with m parallel analog channels. Each
channel multiplies the input by its own periodic ±1 waveform p_i(t), lowpass
filters the product and samples it with a slow ADC. The mixing folds every
spectral slice of width fp onto baseband, each slice with a different complex
weight per channel. The m low-rate samples taken at one instant, y[n], are
then a linear mix of the L slice sequences z[n]:

    y[n] = A z[n],      A = m x L complex sensing matrix,  L >> m

Since only a few slices hold energy, z[n] is sparse. Its support S, the set of
active slices, is the same for every n. Recovery therefore splits into two
parts:

1. **Find S once.** This is done by the *continuous-to-finite* (CTF) step.
   It collects the correlation matrix Q = Σ y[n] y[n]ᴴ over a few dozen
   vectors. It then solves a small joint-sparse problem on Q: which few
   columns of A explain all of Q?
2. **Invert on S for every sample.** With S known, z_S[n] = A_S⁺ y[n]
   (pseudo-inverse of the columns of A in S), and z is zero outside S. This
   is a small, fixed linear map, applied at the sample rate.

A detector watches one slice outside S. When energy appears there, the
support has changed and the CTF runs again. The recovered slice sequences
then go to an analog back-end. That back-end modulates each sequence to its
slice's carrier and sums them to rebuild x(t).

This repository contains the digital part of that system in synthesizable
SystemVerilog. The mixers, lowpass filters, ADCs and the analog
reconstruction back-end are analog. They are outside the RTL, and their
signals are ports of the top level.

## Default configuration

| Parameter | Default | Meaning |
|---|---|---|
| `M_CH` | 100 | channels m |
| `M_LEN` | 195 | sign intervals per period, M (chip clock M·fp ≈ 10 GHz) |
| `L_SLICE` / `L` | 195 | spectral slices, L = 2·L0+1 with L0 = 97 |
| `N_BANDS` | 6 | bands N; the support holds at most 2N = 12 slices |
| `N_CTF` | 50 | vectors summed into the CTF frame |
| `N_MEM` | 50 | depth of the sample memory (vectors) |
| `SW` | 16 | ADC sample width (two's complement) |
| `SHARE_R` | = `M_CH` | sign registers actually loaded (see sharing) |

The parameters are those of a 10 GHz Nyquist range holding N = 6 bands of at
most 50 MHz each, sampled at fs = fp = 10 GHz/195 ≈ 51.3 MHz per channel. The
shared constants and the complex number structs are in `rtl/mwc_pkg.sv`.

## Sensing matrix and slice numbering

Column p of A (p = 0…L−1) belongs to slice p − L0. This slice is the part of
the spectrum at offset (p − L0)·fp that the mixers fold onto baseband. Column
L0 is baseband itself. Columns p and L−1−p are mirror images. For a real
input their z sequences are complex conjugates, so active slices always come
in mirror pairs.

The entries are A[i][p] = c_{i,L0−p}, with

    c_il = d_l · Σ_k α_ik · exp(−j2π l k / M),
    d_0 = 1/M,  d_l = (sin(2πl/M) − j(1 − cos(2πl/M))) / (2πl)

Here α_ik ∈ {±1} is the sign of p_i(t) during interval k. The hardware never
computes A. The host writes it, as 16-bit complex integers, through the
`a_*` port of the top. It may compute A from the sign patterns with this
formula, or measure it by calibration. Any scaling the host applies to a
column shows up as the inverse scaling of that slice's recovered z. The
testbench model `tb/mwc_model_pkg.sv` computes A from the formula. It scales
A so that the largest real or imaginary part is 2¹⁴.

## Sign waveform generators (`sign_waveform_gen`)

Each channel's ±1 waveform is one period of M = 195 signs. The signs are
held in a 195-bit circular shift register clocked at the chip rate
(`clk_chip`, M/Tp). The register rotates one position per clock, and its
bit 0 is the output. `p[i] = 1` means +1. The host loads a pattern per
channel with `load`/`load_ch`/`load_pattern`; after reset all signs are +1.
The waveforms run while `run` is high, and `phase` and `period_start` mark
the interval index.

**Register sharing.** With `SHARE_R = r < M_CH`, only the first r registers
are loaded and rotate. Channel i ≥ r reuses register i mod r, read at a
different tap. Its pattern equals that of channel i − r cyclically shifted
right by 5 intervals: α_i,k = α_{i−r},(k−5) mod M. Sharing saves flip-flops:
r = 20 needs 3,900 instead of 19,500. The host must build the matching
sensing matrix, which the test model does. At the default `SHARE_R = M_CH`,
every channel has its own register.

## Sample memory (`sample_memory`)

The sample memory is a circular buffer of `N_MEM` sample vectors. It delays
the ADC stream on its way to the DSP. It covers the time the CTF needs to
collect its frame after a support change. Samples taken just after the
change then reach the DSP after the new support is in place. One write and
one registered read occur per incoming vector. The buffer should be at least
as deep as `N_CTF`, which is why the default is 50. With a shallower memory,
about N_CTF − N_MEM vectors after each change are recovered on the old
support.

## CTF, part 1: frame builder (`ctf_frame_builder`)

The frame builder accumulates Q = Σ_{n} y[n] y[n]ᵀ over `N_CTF` vectors. The
ADC samples are real, so Q is a real symmetric m×m matrix. It holds 10,000
entries of 2·SW + ⌈log2 N_CTF⌉ + 1 = 39 bits. A `start` pulse clears Q. Each
accepted vector (`in_valid`/`in_ready`) then takes m² clocks, one
multiply-accumulate per clock. `done` pulses after the last vector. The
solver reads Q through a combinational port (`rd_row`, `rd_col`, `rd_data`).

The column space of Q is the space spanned by the measurements, so its
columns serve directly as the frame. The eigendecomposition that would give
an orthonormal frame, and the thresholding of small eigenvalues, are not
built. In exact arithmetic the joint support is the same. With noisy
samples, the weak noise directions stay in the frame with their small
weight, instead of being cut at a threshold.

## CTF, part 2: support solver (`ctf_mmv_solver`)

This block is the hardest to read, so it gets the most detail here. It runs
simultaneous orthogonal matching pursuit (SOMP) on the frame. The variant
adds one **mirror pair** of slices {l, L−1−l} per iteration and runs N = 6
iterations:

1. **NORM / LOAD.** The largest diagonal entry of Q sets a right shift that
   brings every entry into 29 bits. The residual R (m×m complex, 32-bit
   parts) is loaded with the shifted Q.
2. **SCORE.** For every slice l not yet selected, the solver computes
   score(l) = Σ_j |a_lᴴ r_j|², where a_l is column l of A and r_j are the
   residual columns. This takes L·m² clocks per iteration (1.9 M at the
   defaults) and dominates the run time.
3. **PICK.** It takes the pair maximising score(l) + score(L−1−l). The
   centre slice L0 is its own mirror, and selecting it adds one slice. Ties
   go to the lower index.
4. **ORTHO.** Each new column is orthogonalised against the basis kept so
   far. The method is modified Gram-Schmidt without normalisation:
   u = a·2⁸ − Σ_k R_k b_k, with R_k = b_kᴴu / |b_k|². The coefficients R_k
   keep 16 fraction bits. The solver stores b_new = u, |b_new|² and
   2⁹⁶/|b_new|². A single shared bit-serial divider (`seq_divider`, 100
   clocks per quotient) forms all the divisions.
5. **RESID.** Every residual column loses its projection on b_new.

After the N iterations the solver orthogonalises one more column, the
lowest-numbered slice outside S. This is the **watched slice** of the
change detector. It goes last and updates no residual. Because it comes
last, its coefficient under the pseudo-inverse of A_{S∪watch} is just
b_watchᴴ y / |b_watch|². The results are:

- `supp_mask` (L bits) and `supp_cnt`;
- `supp_idx`: the slices in selection order, then the watched slice;
- the factors (basis vectors, R, inverse norms), read by the DSP through
  the `f_*` port.

The scores are not normalised by column norm. The columns of A all have
similar norms (|d_l| decays slowly near baseband), and the bench checks
exact support recovery on random supports. With strongly unequal column
norms (for example, after a non-uniform calibration), a normalised score
would be safer.

## DSP (`dsp_recovery`)

The DSP applies A_S⁺ to each delayed vector without forming the
pseudo-inverse. The Gram-Schmidt factors give it directly:

    β_k = b_kᴴ y · 2⁹⁶/|b_k|²        (one projection per basis vector)
    z_k = β_k − Σ_{j>k} R_kj z_j     (back-substitution, last entry first)

The result is z_S (32-bit complex, 16 fraction bits, in units of the A that
was written). The watched slice's value is β_watch, which comes with no extra
work. Writing `load` copies the solver's factors into the DSP's own storage,
so the solver can run again while the DSP keeps working on the old support.
Vectors that arrive during the copy are dropped and counted. Band selection
happens here: an entry whose slice has `slice_en` = 0 is output as zero and
flagged inactive in `z_act`. Outputs per vector are `z_cnt`, `z_idx[k]`,
`z_val[k]`, `z_act`, `watch_idx` and `z_watch`.

Latency per vector is (K+1)(m+1) + K(K−1)/2 + 2 clocks for a support of K
slices: 1,430 clocks for K = 12 at m = 100.

## Support change detector (`support_change_detector`)

The detector compares |z_watch|² with a threshold (`det_thresh`, 65 bits).
It raises `trigger` for one clock after `CONSEC` = 4 consecutive vectors
above it. A value below the threshold restarts the count. A single noisy
sample therefore does not start a CTF run, while a band that moves into the
watched slice does.

## Controller (`mwc_controller`)

The controller is a state machine: OFF → FRAME → SOLVE → LOAD → RUN. It
starts a CTF run in three cases:

- when `enable` rises (start-up);
- when the detector triggers;
- when the application pulses `ctf_request`.

A request that arrives during a run is remembered and served after it. In
FRAME the live ADC stream (not the delayed one) feeds the frame builder.
After the solver finishes, the controller holds the DSP's `load` until the
copy starts. It then marks `support_valid` and arms the detector. It also
drives the carrier list for the analog back-end: `carrier_idx[k]` is the
slice of output k, or the baseband slice L0 when `carrier_override[k]` is
set. Override lets the application get an entry at baseband, without its
carrier shift. `ctf_runs` counts finished runs.

## Top level (`mwc_top`)

`mwc_top` wires the blocks as described above. The sign generators run in
`clk_chip`. Everything else runs in `clk` and takes one ADC vector per
`y_valid` pulse. The two clocks only meet at the host's configuration
inputs, which must be static while the generators run. The top adds two
counters, `det_triggers` and `dsp_drops`.

Operating sequence:

1. Load the sign patterns (`sg_load`, once per register) and set `sg_run`.
2. Write all m·L entries of A (`a_we`).
3. Set `det_thresh`, `slice_en` and `carrier_override`.
4. Raise `enable` and stream ADC vectors. The first support appears after
   N_CTF vectors plus the solver time, and `z_valid` pulses follow.

### Clock rate

Every datapath has one multiply-accumulate unit, which keeps the area small
(about 25 k flip-flops outside the sample memory, frame and matrix storage)
but makes the core slow relative to the sample rate:

- the frame builder takes m² clocks per vector;
- the DSP takes about (2N+2)(m+1) clocks per vector;
- one CTF run takes about N_CTF·m² + N·L·m² clocks.

At the defaults that is 10,000 and 1,430 clocks per vector, and 12.2 M
clocks per support estimate. Real-time operation at 51.3 MHz would need
m-wide MAC arrays in the frame builder and the DSP. The vector timing at
the ports stays the same; only `in_ready` would rise sooner. The bench
spaces vectors m² + 64 clocks apart.

## Departures from the described system

- The analog parts (mixers, filters, ADCs, reconstruction back-end) are not
  modelled. A is written by the host rather than computed.
- The CTF frame is Q itself. There is no eigendecomposition and no noise
  threshold.
- The SOMP score is not normalised by column norm.
- The throughput is one MAC per clock (see *Clock rate*), so the core clock
  must be far faster than fs.
- The 1:q sequence expander of the alternative configuration with fs = q·fp
  (fewer, faster channels plus digital filters) is not built. This core
  assumes fs = fp.
- The reset values, handshakes, the detector's run length, the fixed-point
  formats and the choice of the lowest free slice as the watched slice are
  this design's own choices.

## Verification

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=… failures=…` and has a watchdog. The reference values come
from an independent floating-point or integer model, and `tb/mwc_model_pkg.sv`
holds the shared sensing-matrix and signal model.

| Testbench | Checks |
|---|---|
| `tb_sign_waveform_gen` | every output bit of every channel over several periods, with and without register sharing |
| `tb_sample_memory` | the delay of exactly N_MEM vectors, the fill count and flush |
| `tb_ctf_frame_builder` | every entry of Q against an integer model, and the per-vector clock count |
| `tb_ctf_mmv_solver` | exact support recovery on random mirror-symmetric supports (m = 24, L = 31, N = 3) and the order of the watched slice |
| `tb_dsp_recovery` | z_S against the drawn z within 1 % (default size), band selection, the watched slice and the per-vector latency |
| `tb_support_change_detector` | the trigger against a counting model on random sequences |
| `tb_mwc_top` | the reduced system end to end (m = 24, L = 31, N = 3) |
| `tb_mwc_top_full` | the same scenario with every parameter at its default |

`tb_mwc_top` and `tb_mwc_top_full` share `tb/mwc_top_bench.sv`. The bench
performs these steps:

1. It loads random sign patterns and checks p_out.
2. It writes the matching A.
3. It streams y = A z for a random multiband z.
4. It switches to a new random support after the first CTF run.
5. It requests a run from the application side after the second run.

It checks every support estimate and every recovered z whose sample the DSP
handled with the correct support. It also counts these mechanisms and fails
if any never happens: start-up run, detector-triggered run,
application-requested run, dropped vector during factor copy, disabled
slice and carrier override. The full-size run simulates several million
clocks and takes a few minutes.

Simulation with plain Verilator (packages first):

    verilator --binary --timing --assert -Irtl -Itb \
      rtl/mwc_pkg.sv tb/mwc_model_pkg.sv $(ls rtl/*.sv | grep -v _pkg) \
      tb/mwc_top_bench.sv tb/tb_mwc_top.sv --top-module tb_mwc_top -o sim
    ./obj_dir/sim

The packages come first, and each file is listed once. For a block test,
replace the bench and top with the block's testbench file (add
`tb/mwc_model_pkg.sv` where it is imported).
