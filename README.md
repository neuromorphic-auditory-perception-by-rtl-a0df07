# Spiketrum: a two-cochlea audio-to-spike encoder in SystemVerilog

Spiketrum turns sound into sparse binary spikes in two stages. The first
stage is **efficient coding**. It describes each stretch of audio as a short
list of *codes* `(m, tau, s)`, each meaning "kernel `m`, placed at time `tau`,
scaled by `s`". The codes are found greedily by matching pursuit: correlate
the signal with every kernel at every shift, take the best match, subtract it,
and repeat. The second stage is **intensity-to-place (ITP) coding**. It turns
each code into one spike on one of `K` channels set aside for kernel `m`. The
channel is the one whose characteristic intensity is closest to `|s|`. So a
spike carries its time, its frequency band (the kernel) and its loudness (the
channel within the band), and no spike needs more than one bit.

This RTL implements the digital part of a stereo neuromorphic cochlea built
that way:

- two cochleae, one per ear;
- 40 Gammatone-like kernels and 3 intensity levels, so 120 channels per cochlea;
- 16 kHz audio, processed in 43.5 ms segments of 696 samples;
- a 200 MHz clock.

At the defaults, each cochlea makes up to 87 codes per segment, which is
2000 spikes/s. The first spike of a segment follows within 0.45 ms of the
segment being complete.

## One cochlea at a glance

```
 samples ─► Signal RAM ──► Convolution ──► Code Generator ──► ITP coder ─► spikes
            (2 banks)  ▲   (PL x NK MACs)   (argmax |H|)  │
                       │                                   │ code (m, tau, s)
                       └──── Error Feedback ◄──────────────┘
                             Shifter ─► Multiplier ─► Subtractor
            Kernel RAM ──► (read by Convolution and Shifter)
```

| file | role |
|---|---|
| `spiketrum_pkg.sv` | sizes, widths, `code_t` and `spike_t` |
| `signal_ram.sv` | two segment banks: one fills from the audio input while the other holds the residual being encoded |
| `kernel_ram.sv` | `NK` banks of `L` taps, all read in parallel at one address |
| `convolution.sv` | correlations `H_m(p)` of the residual with every kernel at every shift |
| `code_generator.sv` | running search for the largest `|H|`, and the code it gives |
| `shifter.sv`, `multiplier.sv`, `subtractor.sv` | address walk, `s*phi` and the write-back of the error feedback |
| `error_feedback.sv` | the three above, chained: removes `s*phi_m(t - tau)` from the residual |
| `itp_coder.sv` | table of characteristic intensities and the nearest-intensity search |
| `cochlea.sv` | the iteration controller and all of the above |
| `spiketrum_top.sv` | two cochleae and the choice of input source |

## Shifts, positions and what a code means

Everything hinges on one convention, used the same way in every block and in
the testbench reference:

- A segment holds samples `R[0 .. SEG-1]`.
- A kernel holds taps `phi_m[0 .. L-1]`.
- A *shift* `p` places tap 0 of the kernel on sample `p - (L-1)`. So
  `p = 0 .. SEG+L-2` covers every placement where kernel and segment overlap
  by at least one sample. At the defaults there are 696 + 1353 - 1 = 2048
  shifts.

The correlation at shift `p` is

```
H_m(p) = sum_j  R[p - (L-1) + j] * phi_m[j]      (samples outside the segment are 0)
```

Tap `j` of the kernel lands on sample `t = p - (L-1) + j`, which is tap
`j = t + (L-1) - p` of sample `t`. The error feedback uses the same relation,
`R[t] -= s * phi_m[t + L - 1 - p]`, for every `t` the kernel covers. The code's
`pos` field is this `p`. It is the time of the kernel's last tap, so kernels
that start before the segment (they reach into it from the previous one) and
kernels that end after it (they reach into the next one) are both
representable. Sample `SEG-1` of the segment is `p = SEG-1`.

## The matching-pursuit loop

For each segment the controller in `cochlea.sv` repeats four steps:

1. **Correlate.** One pass of the convolution produces `H_m(p)` for all `m`
   and `p`, in order of increasing `p`, with all `NK` kernels at once.
2. **Select.** The code generator keeps the largest `|H_m(p)|` seen so far.
   The comparison is strict, so ties go to the lower shift and then to the
   lower kernel. At the end of the pass it emits `m`, `p` and
   `s = H >>> 15`, saturated to 24 bits. With unit-energy kernels, `s` is the
   least-squares amplitude of that kernel in the residual.
3. **Encode.** The code goes to the ITP coder (a spike one cycle later) and to
   the code output.
4. **Remove.** The error feedback walks the samples the kernel covers. It reads
   `R[t]` and `phi_m[t+L-1-p]`, forms `s*phi` rounded to sample units, and
   writes back the saturated difference. It also adds up the energy change
   `x_new^2 - x^2`.

Iteration stops, and the cochlea waits for the next segment, when:

- `max_codes` codes have been made for the segment. This is the spike-rate
  control: 87 per segment is 2000 spikes/s.
- `eps_ratio` is non-zero and the residual energy has fallen below
  `eps_ratio/65536` of the segment's original energy. The test is
  `E << 16 < eps_ratio * E_1`, with no division. `E_1` is summed while the
  segment is being filled.
- The best code has `s == 0`. It would change nothing, so iterating again
  would find the same code forever.
- The next segment is complete. This check comes first, in any state: a pass
  or a removal in progress is dropped, and the new segment starts at once.
  This is the real-time rule. The encoder may spend the whole segment time on
  one segment, but no longer, so the output never falls behind the input.

Status pulses report each case: `ev_seg_start`, `ev_seg_cut`, `ev_stop_max`,
`ev_stop_energy` and `ev_stop_zero`. `codes_in_seg` counts the codes of the
current segment.

## The shift-parallel convolution

The correlation is the costly step: 40 kernels, 2048 shifts and up to 1353
taps per shift for every code. `convolution.sv` computes it directly in the
time domain with `PL * NK` multiply-accumulators (32 x 40 = 1280 at the
defaults). It needs only one Signal RAM read and one Kernel RAM read per cycle.

The shifts are handled in *groups* of `PL` consecutive shifts, `p0 .. p0+PL-1`.
Lane `i` of kernel `m` accumulates shift `p0 + i`. Within a group:

- A **window register** holds `PL` consecutive samples and moves one sample
  per cycle. One new residual sample enters at the top each cycle. Samples
  outside the segment enter as zero.
- After `PL-1` preload cycles the window holds samples `p0-(L-1) .. p0-(L-1)+PL-1`.
  From then on, each cycle reads tap `j` of every kernel (one Kernel RAM
  address, `NK` words) and **broadcasts** it to all lanes. Lane `i`
  multiplies it with window entry `i`, which at that moment is sample
  `p0 + i - (L-1) + j`: exactly the sample tap `j` meets at shift `p0 + i`.
- After the `L` taps, the `PL x NK` sums are complete. They are handed to the
  code generator **one shift per cycle**, over the next `PL` cycles. Those are
  the cycles in which the next group preloads its window and does not yet
  touch the accumulators. The one set of accumulators therefore serves every
  group, with no copy. The last hand-out reads the accumulators in the same
  cycle the next group's first tap overwrites them. The read sees the old
  value, as a registered read does.

A pass of `G = ceil((SEG+L-1)/PL)` groups takes

```
T_conv = G * (PL + L - 1) + n_last + 3  cycles     (n_last = shifts in the last group)
       = 64 * 1384 + 32 + 3 = 88,611 cycles at the defaults (0.44 ms at 200 MHz)
```

`PL` trades multipliers for time. `PL = 1` is a plain 40-lane correlator that
takes about 2.8 M cycles per code. `PL = 32` is the smallest power of two at
which 87 codes fit in one segment time.

## Timing of a segment

| quantity | cycles at the defaults | time at 200 MHz |
|---|---|---|
| segment of 696 samples at 16 kHz | 8,700,000 | 43.5 ms |
| convolution pass `T_conv` | 88,611 | 0.44 ms |
| one code: `T_conv + overlap + 5` (`overlap` ≤ 1353 samples touched by the removal) | ≤ 89,969 | ≤ 0.45 ms |
| 87 codes (2000 spikes/s) | ≤ 7.83 M | ≤ 39.1 ms |
| segment complete → first spike | 88,614 | 0.44 ms |

"Overlap" is the number of segment samples the removed kernel covers. It is
1353 for a kernel that lies fully inside the segment. Fewer samples are
touched near the segment ends. The error feedback spends `overlap + 3` cycles
on a removal, and the controller and code generator add 2.

Audio for the next segment keeps arriving during all of this, into the other
bank. When that bank is full, the banks swap in one cycle, `seg_ready`
pulses, and the previous residual is abandoned. The swap also sets
`seg_energy`. Engine writes are blocked in the swap cycle, so a write-back in
flight cannot land in the freshly filled bank.

## Fixed-point arithmetic

| quantity | format |
|---|---|
| samples, residual | signed 16-bit, read as Q1.15 |
| kernel taps | signed 16-bit Q1.15; a unit-energy kernel has `sum phi^2 ≈ 2^30` |
| `H_m(p)` | signed 48-bit, exact (no rounding anywhere in the correlation) |
| `s` | `H >>> 15` saturated to 24 bits, so it is in sample units (1.0 = 32768) |
| removal | `s*phi` rounded half up (`(s*phi + 2^14) >>> 15`), difference saturated to 16 bits |
| energies | 48-bit sums of squares of 16-bit samples |

The kernels are not built in. They are loaded through the `ker_*` port, one
tap per cycle. Matching pursuit only behaves as intended if every kernel has
(close to) unit energy. The testbenches build 4th-order Gammatone kernels with
centre frequencies spaced logarithmically from 100 Hz, with bandwidth
`24.7 + 0.108 f`, normalised to unit energy.

## Intensity-to-place coding

Each cochlea has a table of `NK*K` characteristic intensities `c_h`,
24 bits each. Channel `h = K*m + k` belongs to kernel `m` and level `k`. For a
code `(m, tau, s)` the coder compares `|s|` with the `K` entries of kernel `m`
and picks the nearest. Ties go to the lower level. It emits:

- `spike`: a struct holding the channel, the position and a segment counter;
- `spike_vec`: a one-hot `NK*K`-bit vector, pulsed for one cycle.

After reset the table holds the same log-spaced levels for every kernel:
`2^15 >> (3*(K-1-k))`, which is 512, 4096 and 32768 (1/64, 1/8 and 1 of full
scale). Any entry can be rewritten through `ci_we/ci_ch/ci_value`, for example
to give each band its own levels. The ITP testbench does this with the six
values 25.8 … 23.8 that label the first channels of the prototype's spike
plot.

## Top level

`spiketrum_top` holds `NC = 2` cochleae. The left one is index 0 of every
array port. Audio comes from one of two sources, chosen by `src_sel`:

- `src_sel = 0`: the per-ear ADC streams (`adc_valid[c]`, `adc_sample[c]`);
- `src_sel = 1`: a host stream that carries both ears with one valid
  (`usb_valid`, `usb_sample[c]`).

The choice is registered once before the cochleae. Both cochleae load the same
kernel set from one `ker_*` port. Their intensity tables are written
separately (`ci_sel` is a per-cochlea write mask). `max_codes` and
`eps_ratio` are shared. Everything outside the digital core stays outside:
microphones, ADCs, the host link and the spike output link. The top's ports
are where those connect.

## Where this design departs from the published prototype

- **Convolution method.** The prototype correlates through the frequency
  domain (FFT of the segment, products with stored kernel spectra, inverse
  FFT). Here the correlations are computed directly in the time domain with a
  shift-parallel MAC array. The results are the same, and here they are exact
  integers. The Kernel RAM therefore holds time-domain taps. The prototype's
  FFT sizes and scaling are not known, so its rounding is not reproduced.
- **Kernel length.** This is taken as 1353 taps, so that one segment has 2048
  shifts, the largest shift label shown for the prototype.
- **Selection.** The selection uses `|H|` and keeps the sign in `s`. The
  algorithm's `argmax H` is read as "largest amplitude", as the prose
  describes it.
- **Correlation and removal.** Both use the same kernel placement
  (`phi_m(t - tau)`). The algorithm's listing writes the correlation with
  `phi_m(t + tau)`.
- **Scale of `s`.** `s` is in raw sample units, not normalised to [0, 1]
  before ITP coding. The characteristic intensities are given in the same
  units instead.
- **Design choices not taken from the prototype.** These are the zero-code
  stop, the tie rules, all word widths, the two-bank Signal RAM, the stop
  priority, and the reset contents of the intensity table.

## Simulating

Each block has a self-checking testbench in `tb/` named `tb_<block>`. It
prints one `TB_RESULT checks=N failures=M` line and ends. `tb/spiketrum_ref_pkg.sv`
is a behavioural reference. It holds the matching-pursuit step, energy, ITP
channel and Gammatone taps, written independently of the RTL. It must be
compiled ahead of the testbenches that import it. With Verilator 5:

```
verilator --binary --timing -Wno-fatal --top-module tb_cochlea \
  -y rtl -y tb +libext+.sv rtl/spiketrum_pkg.sv tb/spiketrum_ref_pkg.sv tb/tb_cochlea.sv
./obj_dir/Vtb_cochlea
```

| testbench | size | what it covers |
|---|---|---|
| `tb_signal_ram`, `tb_kernel_ram` | small | bank swap, energy, write blocking; parallel kernel banks |
| `tb_convolution` | 3 kernels x 5 taps, 8 samples, 5 lanes | every `H_m(p)`, result order, exact pass length, back-to-back passes, abort |
| `tb_code_generator` | 4 kernels | random, ties, saturation of `s` |
| `tb_shifter`, `tb_multiplier`, `tb_subtractor`, `tb_error_feedback` | small | address walk, rounding, saturation, energy change, removal length `overlap + 3` |
| `tb_itp_coder` | full (120 channels) | reset levels, written levels, ties |
| `tb_cochlea` | 4 kernels x 8 taps, 16 samples, 4 lanes | all four stop causes, exact cycles between codes, every code against the reference |
| `tb_spiketrum_top` | 2 x (4 kernels x 8 taps), 16 samples, 3 lanes | both sources with decoys on the unused one, all stops, cut, all intensity levels, every code and spike |
| `tb_spiketrum_full` | all defaults | 12 codes per cochlea against the reference; first spike ≤ 0.5 ms; code period allows 87 codes per segment |

The full-size testbench simulates about 1.1 M cycles with 2 x 1280 active
MACs. Most of its run time goes to the testbench's own reference
correlations.

## Parameters

| parameter | default | meaning |
|---|---|---|
| `NC` | 2 | cochleae |
| `NK` | 40 | kernels per cochlea |
| `K` | 3 | intensity levels per kernel |
| `SEG` | 696 | samples per segment (43.5 ms at 16 kHz) |
| `L` | 1353 | taps per kernel |
| `PL` | 32 | shifts correlated at once |
| `SW`, `KW` | 16 | sample and tap width |
| `CW` | 24 | width of `s` |
| `AW`, `EW` | 48 | correlation and energy width |
| `LOG_STEP` | 3 | log2 spacing of the reset intensity levels |

The run-time controls are `max_codes` (87 gives 2000 spikes/s) and
`eps_ratio` (0 turns the energy stop off).
