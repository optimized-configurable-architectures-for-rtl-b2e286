# Soft-input soft-output MIMO detector with soft-boundary slicing

This design detects up to four spatially multiplexed QAM streams (BPSK up to
256-QAM per stream) and produces max-log soft output (LLRs) for a channel
decoder. The decoder's prior LLRs are taken into account. The core idea is a
two-layer MAP kernel that needs no general multipliers and no exhaustive
search:

- one layer is *enumerated*: all its symbols, up to 256, are evaluated in
  parallel;
- the other layer is *sliced*: its best symbol for each enumerated
  candidate is found directly, with decision boundaries that include the
  priors.

For more layers the channel is written as several two-level structures, one
per layer (a "WL decomposition"). A single kernel is time-multiplexed over
them, and the resulting lists of candidate distances are merged into LLRs. A
second mode uses the same kernel to classify the constellation of a
co-scheduled interferer in multi-user MIMO.

The RTL is SystemVerilog-2017 in `rtl/`. Self-checking testbenches are in
`tb/`.

## 1. The distance the kernel evaluates

A pass of the kernel receives eight constants A..H, precomputed per channel
realisation by a host DSP from the QL/WL decomposition and the received
vector. It also receives the prior LLRs of both layers. Real and imaginary
parts are separated, and every QAM symbol is treated as two PAM levels
`p = 2i-(P-1)`. For an enumerated symbol `x1` and a sliced symbol `x2` the
distance is

```
d(x) =  A x1R^2 + C x1R - b(x1R).lam    (f1R)
      + A x1I^2 + D x1I - b(x1I).lam    (f1I)
      + min over x2R of  uR*x2R + B x2R^2 + G x2R - b(x2R).lam
      + min over x2I of  uI*x2I + B x2I^2 + H x2I - b(x2I).lam
uR = E x1R + F x1I,     uI = E x1I - F x1R
```

where `b(p).lam` is the sum of the dimension's prior LLRs, each signed +1 for
bit 0 and -1 for bit 1. The level tables (`pam_metric_gen`) are built once per
pass. Every product of a constant with a level is a product by a small odd
integer, done as shifts and adds.

## 2. Slicing with priors, exactly in integers

Without priors the best `x2R` would be a plain slicer on `-(uR+G)/(2B)`. With
priors, the boundary between two levels moves by an amount that depends on
the LLRs. Within `boundary_gen`, for each pair of levels `i < k` (with
`m = k-i`), the comparison "level i is at least as good as level k" becomes a
single threshold on `u`:

```
u >= T(i,k) = -B (p_i + p_k) - G - floor( (b_i - b_k).lam / 2 / m )
```

The difference of two label vectors is always even, so the halving is exact.
Because `u` is an integer, taking the floor turns the real-valued boundary
into an exact integer decision, with ties going to the lower level. Each
level then has a range:

```
lo[i] = max over k > i of T(i,k)
hi[i] = min over k < i of T(k,i)
```

Level `i` is the minimiser exactly when `lo[i] <= u < hi[i]`. Exactly one
range holds any `u`; the kernel asserts that the chosen range holds it. The boundaries do not
depend on the enumerated symbol, so one `boundary_gen` per dimension serves
all 2 x 256 `slicer` instances. Each slicer is two comparator banks and a
priority encoder.

The divisions are by 1..15 and are constant per pair. The tables are elaborated
per constellation size (`kbits` = 0..4), and the active one is selected by
the modulation input.

## 3. Labels and bit order

The labels follow the LTE Gray mapping:

- The real part of a symbol carries bits b0, b2, b4, b6; the imaginary part
  carries b1, b3, b5, b7.
- In each dimension the first bit is the sign. Each further bit folds the
  magnitude around P/2, P/4, and so on.
- An equivalent description is the binary-reflected Gray code of the level
  index, with every bit inverted. The testbenches use this form as an
  independent reference.

All LLR vectors (`lam_in`, `llr`) are indexed `[layer][b0..b7]`. BPSK is a
one-bit real dimension with a one-level imaginary dimension.

## 4. The kernel pipeline (`map2x2_core`)

The kernel has six register stages and accepts one pass per clock:

1. Input registers; the priors are split into real and imaginary bits.
2. Four level tables, two boundary sets, and the odd multiples of E and F.
3. For each of the 256 candidates: `f1`, `uR` and `uI`.
4. 512 slicers.
5. `u * x2` (a shift-add of the sliced magnitude) plus the table entry.
6. The candidate distance. It is `f1 + f2R + f2I` on a list's first pass and
   `f2R + f2I` on later passes. Candidates outside the enumerated
   constellation get `DIST_MAX`.

A side-band tag (first/last pass, list, sliced layer, bank, vector end, mode,
and the vector's layer count and modulations) travels alongside the data.
The split of work between stages is this design's own.

## 5. N layers on one kernel

For N layers, list `m` enumerates layer `m`. Its N-1 passes slice layers
`m+1, m+2, ...` (mod N), one layer per pass, with that pass's constants.
`wld_ctrl` produces this order and reports it on `pass_list` / `pass_layer`,
so the host delivers the constants in that order. The prior LLRs of all
layers are sampled on a vector's first pass and held. Each vector therefore
takes N(N-1) passes: 2 for 2x2 and 12 for 4x4.

- `dist_accum` adds the passes of a list with saturation.
- `list_buffer` stores every pass's sliced symbols and every completed list.
  It has two banks, so one vector's LLR read-out overlaps the next vector's
  passes.
- `llr_proc` reads one list per clock. For each layer and bit it keeps the
  smallest distance among candidates whose bit is 0 and among those whose
  bit is 1, over all lists. The output LLR is their difference, saturated to
  17 bits. If one side is empty the LLR saturates; if both are, it is 0. With
  two layers this is the exact max-log MAP LLR.

A short vector must not finish before the previous vector's read-out has
ended. This only matters for a 2-layer vector after a 3- or 4-layer one. For
that case `in_ready` drops for one or two cycles on the last pass.

## 6. Interferer classification (MU-MIMO mode)

With `mu = 1` a tone takes four passes. Layer 0 (the desired user, `mods[0]`)
is enumerated. Layer 1 (the interferer) is sliced as QPSK, 16, 64 and
256-QAM in turn, with zero priors.

`const_estimator` accumulates the minimum of each hypothesis list over
`K_TONES` tones (12 by default) and adds a complexity bias. The bias
approximates `K log|X|` as `(2h+2) * bias_unit`, so the host sets
`bias_unit = K ln 2` in distance units. The estimator then outputs the
smallest total; ties go to the smaller constellation.

Each tone's layer-0 LLRs are formed from the list of the newest estimate. At
reset that estimate is 256-QAM, and the tone that closes a window already
uses the new estimate.

## 7. Interface and timing of `mimo_detector_top`

| port | meaning |
|---|---|
| `mu`, `nlayers`, `mods[4]`, `bias_unit` | configuration, changed only between vectors |
| `in_valid`, `in_ready`, `coefs`, `lam_in[4][8]` | one pass per accepted cycle |
| `pass_list`, `pass_layer` | which pass the detector expects next |
| `llr_valid`, `llr[4][8]` | one pulse per vector (per tone in MU mode) |
| `est_valid`, `est_mod`, `est_totals[4]` | one pulse per K-tone window |

- `llr_valid` follows a vector's last pass by 6 (kernel) + 1 (accumulator)
  + 1 (start) + N (read-out) cycles.
- At one pass per cycle, 256-QAM throughput is the clock divided by N(N-1),
  times 8N bits: 2.2 Gb/s for 2x2 and 733 Mb/s for 4x4 at 275 MHz.
- The clock rate itself has not been measured here.

## 8. Number formats

- Constants: 17-bit two's complement.
- Prior LLRs: 8-bit, with the same LSB as the constants.
- Internal distances: 28 bits. This is wide enough for 225·A, 450·E and
  sums over three passes without wrap-around.
- Output LLRs: saturated to 17 bits.

Only the 17-bit and 8-bit widths come from the reference design. The 28-bit
internal width is this design's choice. All widths are constants in
`mimo_pkg`.

## 9. Files

| file | role |
|---|---|
| `rtl/mimo_pkg.sv` | widths, types (`coefs_t`, `tag_t`, `mod_t`), label and arithmetic functions |
| `rtl/pam_metric_gen.sv` | level table K2 p^2 + K1 p - b.lam |
| `rtl/boundary_gen.sv` | exact per-level ranges for slicing with priors |
| `rtl/slicer.sv` | two comparator banks and a priority encoder |
| `rtl/map2x2_core.sv` | 6-stage two-layer kernel, 256 candidates |
| `rtl/dist_accum.sv` | pass accumulation into lists |
| `rtl/list_buffer.sv` | two-bank store of lists and sliced symbols |
| `rtl/llr_proc.sv` | LLRs from masked minima over all lists |
| `rtl/const_estimator.sv` | interferer constellation classification |
| `rtl/wld_ctrl.sv` | pass sequencer and flow control |
| `rtl/mimo_detector_top.sv` | the complete detector |
| `tb/tb_ref_pkg.sv` | independent reference: Gray labels, exhaustive slicing, one kernel pass |
| `tb/tb_<module>.sv` | one self-checking testbench per module |

## 10. Verification

Every testbench prints `TB_RESULT checks=N failures=M` and has a watchdog.

- The kernel testbench compares all 256 distances and sliced symbols of
  random passes (random constellations, constants and priors) with an
  exhaustive search. It also checks the 6-cycle latency.
- The end-to-end testbench plays the host. It checks every LLR of 2-, 3- and
  4-layer vectors against a brute-force evaluation over all lists, and
  checks the MU-mode estimates and LLRs. It counts each mechanism (pass
  accumulation, both banks, back-to-back vectors, `in_ready` stalls, mode
  switches, classification windows, priors, saturation, every modulation) and
  fails if any of them never occurred. It runs at the default parameters.

To simulate with Verilator, for example the complete detector:

```
verilator --binary --timing --assert -y rtl -y tb rtl/mimo_pkg.sv tb/tb_ref_pkg.sv \
          tb/tb_mimo_detector_top.sv --top-module tb_mimo_detector_top
./obj_dir/Vtb_mimo_detector_top
```

Building the kernel takes about 1.5 minutes; the simulation takes well under
a second.

## 11. Departures and limits

- **Outside the RTL:** the host DSP that produces A..H, the WL decompositions
  and the rescaling of output LLRs to the decoder's width are not part of
  this RTL.
- **Core count:** one kernel is time-multiplexed. The parallel 2-core and
  4-core arrangements are alternatives built from the same kernel.
- **Level tables:** they are written as products of coefficients with
  elaboration-time constants, which synthesis maps to shift-add trees. The
  explicit adder-sharing of a hand-optimised tree is not reproduced, so gate
  counts are not comparable.
- **LLR processing:** `llr_proc` does a flat bit-by-bit minimum search. It
  does not use a row/column-minimum shortcut for the enumerated layer.
- **MU-mode LLRs:** the reference scheme keeps the lists of all K tones of a
  window and forms their LLRs once the estimate is known. Here only the
  current tone's lists are buffered. So every tone of a window except the
  last uses the previous window's estimate. Storing K tones would need K
  times the list buffer.
- **Own choices:** the pass order, the bank scheme, the `in_ready` rule,
  tie-breaking, the MU-mode default estimate and the bias scaling are this
  design's own choices.
- **Not measured:** area, timing closure at 275 MHz and error-rate
  performance.
