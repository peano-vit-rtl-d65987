# PEANO-ViT non-linear units in SystemVerilog

A Vision Transformer spends most of its arithmetic in matrix products, but
three of its layers are not linear: layer normalization, softmax and GELU.
On an FPGA these are awkward. They need a square root, exponentials and
divisions, and a naive implementation uses many DSP slices and much power
for a small share of the work. PEANO-ViT replaces each of them with an
approximation that needs only adders, shifts, small tables and a few
multipliers, and no division at all:

* **Layer normalization.** 1/sqrt(Var) comes from a leading-one
  logarithm, a halving, and a 16-entry table of powers of two.
* **Softmax.** e^x is a Padé[2,2] rational function evaluated on
  x - max + 2 and cut to 0 below -3. Both divisions (inside the Padé
  ratio and by the row sum) use a *multi-scale reciprocal* (MSR): a
  31-entry table of 1/i and a shift.
* **GELU.** A seven-segment piecewise-linear function.

This repository holds synthesizable RTL for the three units as a streaming
FPGA datapath, with 16 elements per clock in every unit. It also holds
self-checking testbenches for every block and an end-to-end testbench. The
RTL reproduces the approximation accuracy reported for the method (see
"Accuracy"). Where the published description is silent or inconsistent,
the choices made here are listed in "Departures and choices".

## 1. Organisation

```
             +--------------------------------------------------------------------+
 host  --->  | input BRAM -> reader -+-> FIFO -> 16x (x, x^2) -> adder trees -> FIFO |
 ports       |                       |                          -> Avg, Var       |
             |                       +-> bypass FIFO --------> (x-Avg)*rsqrt*g+b  |
             |                                                  -> FIFO -> writer  | -> output BRAM
             +--------------------------------------------------------------------+
             | input BRAM -> reader -(1st read)-> row max -> max FIFO              |
             |                      -(2nd read)-> FIFO -> 16x PEANOexp -+-> adder tree -> FIFO
             |                                                          +-> side FIFO  |
             |                       row sum -> MSR(Sum) -> e * MSR(Sum) -> FIFO -> writer
             +--------------------------------------------------------------------+
             | input BRAM -> reader -> FIFO -> 16x (compare, LUT, multiply-add)    |
             |                                  -> FIFO -> writer                 |
             +--------------------------------------------------------------------+
```

The top module `peano_vit_nonlinear` holds three independent units:
`peano_layernorm`, `peano_softmax` and `peano_gelu`. Each has its own
input and output activation BRAM (`act_bram`, 4096 beats of 16 × 16 bits).
The linear part of the accelerator is not part of this design. It is
represented by host ports:

* a write port into each input BRAM;
* a read port out of each output BRAM;
* a write port for layer-norm gamma/beta;
* per unit, a small job interface: `start`, `row_len`, `num_rows`,
  `busy`, `done`.

The three units can run at the same time.

A **beat** is one BRAM word, the 16 elements a unit handles per clock.
Every row starts on a beat boundary. A row whose length is not a multiple
of 16 ends in a partial beat. Its padding lanes are masked all the way
through the pipeline: they add nothing to sums or maxima, and they are
written back as 0. So a tensor of R rows of length L takes R·ceil(L/16)
beats, and row r starts at beat r·ceil(L/16).

## 2. Number formats

| Quantity | Format |
|---|---|
| activations in and out (LN, GELU), gamma, beta | signed 16-bit, Q7.8 |
| softmax output | unsigned 16-bit, Q1.15 (1.0 = 0x8000) |
| PEANOexp value | unsigned 16-bit, 13 fraction bits (range 0 .. 7) |
| row mean Avg | signed 32-bit, 16 fraction bits |
| variance Var | unsigned 32-bit, 16 fraction bits |
| 1/i table (MSR) | 17-bit, 16 fraction bits |
| 2^(i/16) table (rsqrt) | 16-bit, 15 fraction bits |
| GELU slopes | 16-bit signed, 12 fraction bits |
| `inv_n` (1/row length) | 25-bit, 24 fraction bits |

The 16-bit fixed point follows the published 16-bit evaluation. The Q7.8
split and all the internal widths are this design's choice. All constants
live in `rtl/peano_pkg.sv`. The tables are computed there at elaboration
from their formulas, not typed in: `1/i` rounded, `2^(i/2^m)` rounded, and
the GELU segments from their real coefficients.

## 3. Layer normalization

**Statistics.**
1. Each lane registers x and x² (`ln_sumsq_lane`).
2. Two adder trees reduce a beat to one sum and one sum of squares
   (`adder_tree`, 4 clocks).
3. `ln_avg_var` accumulates the beat sums of a row, then multiplies by the
   host-supplied `inv_n = round(2^24 / n)`. This gives Avg and AvgSQ with
   no division in hardware.
4. It forms Var = AvgSQ − Avg². Var is clipped at 0, because rounding can
   push a near-constant row slightly negative.

The host computes `inv_n` once per job, since every row of a job has the
same length.

**Reciprocal square root** (`rsqrt_approx`, combinational). Write Var as
2^k·(1 + f) with k the leading-one position and 0 ≤ f < 1.

1. Approximate log2 Var ≈ k + f. The mantissa bits themselves stand in
   for the logarithm of the mantissa.
2. Then log2(1/sqrt Var) ≈ −(k + f)/2 = u + v, with u = floor(−(k+f)/2)
   an integer and v in [0, 1).
3. 2^v comes from a 2^m = 16-entry table indexed by the top m = 4 bits
   of v. 2^u is a shift.

The module returns the table value (a mantissa in [1, 2)) and the shift
count separately. The normalizer multiplies first and shifts last, so no
precision is lost to an early right shift. The exponent is corrected for
Var's 16 fraction bits; an odd fraction-bit count would need a half-bit
correction, so VF must be even.

A worked example: Var = 0.75 = 0x0000C000, so k = 15 and f = 0.5.

1. Correcting for the 16 fraction bits gives log2 ≈ −0.5, so
   −log2/2 = 0.25, u = 0 and v = 0.25.
2. The table entry 2^0.25 = 1.189 is the result. The exact value is
   1/sqrt(0.75) = 1.155.

**Normalization** (`ln_rsqrt_norm`). The unit reads each row once. The
beats go to the statistics path and, at the same time, into a *bypass
FIFO* that keeps the row until its statistics are ready. This avoids
reading the input BRAM twice. For each beat, the normalizer computes
y = ((x − Avg) · mant) · gamma, shifted by (16 + 15 − e), plus beta,
saturated to Q7.8. Gamma and beta are read per beat from a 64-beat RAM
that the host fills (beat b of every row uses entry b). The bypass FIFO
holds two maximum-length rows (128 beats), so row r+1 streams into the
statistics path while row r is normalized.

## 4. Softmax

**Row maximum.** PEANOexp needs max(x) before any exponential. The unit
reads every row twice.

* **First read.** It goes to `softmax_max`: a masked 16-input comparator
  plus a running maximum. The row maximum is pushed into a small FIFO.
* **Second read.** It goes to the exponential lanes.

The reader's two passes stay in lock-step per row. The first read of row
r+1 can overlap the exponentials of row r.

**PEANOexp** (`peano_exp`, 4 clocks). With x̃ = x − max + 2, which lies in
(−∞, 2]:

    PEANOexp = 0                                  if x̃ < −3
               (12 + 6x̃ + x̃²) / (12 − 6x̃ + x̃²)   otherwise

6x̃ is formed as (x̃ << 2) + (x̃ << 1). For x̃ in [−3, 2] the denominator
lies in [4, 39], which the MSR reciprocal handles well. Shifting the
maximum to x̃ = 2 uses the part of the Padé curve that is accurate. Cutting
below −3 costs at most e^−3 of the largest term, relative to e^2.

**MSR reciprocal** (`msr_recip`, combinational). To approximate 1/X:

1. Let k be X's leading-one position.
2. If k ≤ α* (= 4), then α = 0. Otherwise α = k − α*.
3. X >> α is then an integer in [1, 31], and the result is
   StoredRecip[X >> α] · 2^−α.

The table holds 1/1 … 1/31. As in the rsqrt, the 2^−α is returned as a
shift count and applied after the multiply that uses it. With parameter
`LMSR = 1`, the module also interpolates linearly between StoredRecip[i]
and StoredRecip[i+1]. The interpolation weight is the α bits dropped by
the shift. Plain MSR is the default.

**Normalization** (`softmax_norm`). The 16 exponentials of a beat go two
ways:

* an adder tree, whose beat sums go to the sum FIFO;
* a *side FIFO* of 128 beats, so they need not be recomputed.

`softmax_norm` adds the beat sums of a row and takes MSR(Sum) once per
row. It then multiplies every exponential from the side FIFO by the
reciprocal and writes unsigned Q1.15. Because both the exponentials and
1/Sum are approximate, a row's outputs sum to about 1.0 (the tests accept
0.98 … 1.08) rather than exactly 1.

## 5. GELU

`gelu_pwl` (3 clocks per lane) compares x with the breakpoints −3, −2.1,
−0.75, 0, 0.5 and 3. The segment number selects (slope, x-offset,
y-offset) from a 7-entry table, and the lane computes
y = slope·(x − offset) + y-offset. The segments are:

| range | y |
|---|---|
| x < −3 | 0 |
| −3 ≤ x < −2.1 | −0.0414(x + 3) |
| −2.1 ≤ x < −0.75 | −0.0982(x + 2.1) − 0.0373 |
| −0.75 ≤ x < 0 | 0.2266(x + 0.75) − 0.17 |
| 0 ≤ x < 0.5 | 0.6914x |
| 0.5 ≤ x < 3 | 1.0617(x − 0.5) + 0.3457 |
| x ≥ 3 | x |

The largest error against the tanh form of GELU is 0.048, near x = −0.4.

## 6. Streaming and flow control

Every unit is a chain of FIFOs and fixed-latency pipelines:

* **reader.** `stream_reader` issues one BRAM read per clock while
  allowed.
* **FIFOs.** Input FIFO, sum FIFOs and output FIFO are 16 deep; the bypass
  and side FIFOs are 128 deep.
* **Compute stages.** Each has a fixed latency.
* **writer.** `stream_writer` writes one beat per clock into the output
  BRAM. It never stalls, but the chain is written so that it could.

There is no ready signal inside a pipeline. A stage pops its input FIFO
only when the FIFO it feeds has more free entries than the results
already in flight towards it (a credit check). Nothing can overflow, and
a full FIFO stalls the stages before it.

Two places wait on a whole row:

* the layer-norm normalizer, until the row's statistics arrive;
* the softmax normalizer, until the row sum is complete.

The bypass and side FIFOs absorb that wait. The FIFOs assert on push when
full and pop when empty.

**Job interface.** With `busy` low, the host pulses `start` with
`row_len` (1 … 1024) and `num_rows`; layer norm also takes `inv_n`. `busy`
rises on the next clock. When the last output beat has been written, a
one-clock `done` pulse coincides with `busy` falling. A `start` while
`busy` is ignored. The input BRAM must not be written during a job.
`inv_n` and the gamma/beta RAM must stay stable for the whole job.
Output BRAM reads have one clock of latency.

**Throughput** (measured at 16 lanes):

| Job | Beats | Clocks | Rate |
|---|---|---|---|
| layer norm, 64 rows of 768 | 3072 | 3326 | ≈1.08 clocks per beat |
| layer norm, 64 rows of 1024 | 4096 | 4366 | |
| layer norm, 200 rows of 128 | 1600 | 2222 | a few clocks of per-row overhead |
| softmax, 197 rows of 197 (each beat read twice) | 2561 | 5348 | ≈2.1 clocks per beat |
| GELU, 16 rows of 4096 | 4096 | 4103 | one beat per clock |

At 250 MHz, one DeiT-B attention head (197 × 197) takes about 21 µs.

## 7. Accuracy

The unit testbenches compare each approximation with the exact function
over its whole input range:

| function | measured MSE | published MSE |
|---|---|---|
| 1/sqrt on [1, 128], m = 3 | 2.6e-5 | 4.93e-5 |
| 1/sqrt on [1, 128], m = 4 (default) | 1.23e-5 | 9.56e-6 |
| 1/sqrt on [1, 128], m = 5 | 1.28e-5 | 7.86e-6 |
| reciprocal on [8, 64], MSR, α* = 4 (default) | 1.5e-6 | 4.19e-6 |
| reciprocal on [8, 64], LMSR, α* = 4 | 7.3e-10 | 3.63e-9 |
| reciprocal on [8, 64], MSR, α* = 5 | 3.7e-7 | 4.03e-6 |
| reciprocal on [8, 64], LMSR, α* = 5 | 4.0e-10 | 3.58e-9 |
| GELU on [−4, 4] | 2.26e-4 | 2.65e-4 |

The error sampling differs from the published one (input grids and fixed
point here), so only the order of magnitude is meant to agree. One trend
differs: a fifth table bit (m = 5) does not help the 1/sqrt here. Beyond
m = 4 the error of the leading-one logarithm dominates. Truncating v to m
bits biases the result low, which partly cancels that logarithm's high
bias at m = 4. Across a whole softmax unit, LMSR lowers the squared error
against exact softmax by about 2.7× compared with MSR, and MSR at α* = 5
by about 1.5× (summed squared error over the same test rows: MSR α* = 4
4.0e-3, MSR α* = 5 2.6e-3, LMSR α* = 4 1.4e-3). The 1/sqrt
approximation is between 5 % low and 4.5 % high. The Padé exponential is
within 0.03 + 7 % of e^x on [−3, 2] (0.027 high at −3).

## 8. Departures and choices

Places where the published description is incomplete or inconsistent,
and what this RTL does:

* **Sign of v in the 1/sqrt algorithm.** The algorithm listing writes
  v = u − log2Approx. The text requires v ∈ [0, 1) with u = floor. The
  RTL uses v = log2Approx − u, the only reading that satisfies both
  u = floor and v ∈ [0, 1).
* **Denominator of PEANOexp.** The softmax listing writes 12 − 6x̃ + 6x̃².
  The equation writes 12 − 6x̃ + x̃², which is the Padé approximant of e^x.
  The RTL uses x̃².
* **Shifts in MSR and rsqrt.** The published algorithms shift the table
  value (>> α, << u) before it is used. The RTL multiplies first and
  shifts after. The value is the same, but fewer bits are lost.
* **Row maximum.** The block diagram does not show where max(x) is found.
  Here it comes from a first read of the row.
* **1/n for the mean.** This is supplied by the host as `inv_n`; the
  published method does not say how 1/n is formed.
* **Design choices, not published.** Gamma/beta storage, BRAM depth
  (4096 beats), maximum row (1024), FIFO depths, the Q7.8 format, internal
  widths, the job interface and credit flow control.
* **Multipliers.** Layer norm uses 3 per lane (x², ·1/sqrt, ·gamma).
  Softmax uses 3 per lane (x̃², numerator·1/den, e·1/Sum). GELU uses 1.
  The published FPGA results report 52, 48 and 16 DSPs for 16 lanes,
  consistent with these counts.
* **Tuning knobs.** The paper's three accuracy knobs are parameters of
  the top and of every module below it that uses them: `M` (m, default
  `LN_M` = 4), `ASTAR` (α*, default `ALPHA_STAR` = 4) and `LMSR` (default
  0, plain MSR). The unit tests run layer norm at m = 3, 4 and 5 and
  softmax with MSR at α* = 4 and 5 and LMSR at α* = 4 and 5, each checked
  bit for bit.

## 9. Files

`rtl/` holds one module or package per file:

| file | role |
|---|---|
| `peano_pkg.sv` | sizes, formats, table formulas, GELU constants |
| `peano_vit_nonlinear.sv` | top: three units, seven RAMs |
| `peano_layernorm.sv`, `ln_sumsq_lane.sv`, `ln_avg_var.sv`, `rsqrt_approx.sv`, `ln_rsqrt_norm.sv` | layer normalization |
| `peano_softmax.sv`, `softmax_max.sv`, `peano_exp.sv`, `msr_recip.sv`, `softmax_norm.sv` | softmax |
| `peano_gelu.sv`, `gelu_pwl.sv` | GELU |
| `act_bram.sv`, `sync_fifo.sv`, `adder_tree.sv`, `stream_reader.sv`, `stream_writer.sv` | shared infrastructure |

Each file starts with a comment on what it does, its interface, latency,
and which parts follow the published method.

`tb/` holds one testbench per module, `tb_<module>.sv`. The three unit
testbenches keep their checks in parameterized modules
(`peano_<unit>_check.sv`). They run each unit at 16 lanes and at 8 lanes,
because the lane count is a parameter of the design, and at several
settings of m, α* and LMSR. `peano_ref_pkg.sv`
holds the bit-exact reference models the testbenches use: integer
versions of every approximation, written independently of the RTL, plus
the exact functions. Each testbench checks:

* bit for bit against the reference models;
* within stated bounds of the exact function.

It prints `TB_RESULT checks=N failures=M`.

`tb_peano_vit_nonlinear` runs the top at its default parameters. Per
round it runs one layer-norm, one softmax and one GELU job at the same
time. The rounds use the row sizes of DeiT-B, DeiT-S, ViT-L and Swin-B,
and a final short round tests restarting. About 1 million values are
checked. It also counts the mechanisms and fails if one never occurs:

* concurrent units;
* rows waiting in the bypass FIFO and side FIFO;
* exponentials cut to 0;
* MSR shifts (α > 0) in both divisions;
* the 1/sqrt shift in both directions;
* every GELU segment;
* padding lanes.

## 10. Simulating

With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv \
    rtl/peano_pkg.sv tb/tb_peano_vit_nonlinear.sv --top-module tb_peano_vit_nonlinear
./obj_dir/Vtb_peano_vit_nonlinear
```

Replace the testbench name to run any other. The end-to-end test takes
well under a minute to build and run. Testbenches use only `$urandom`, so
they run on two-state simulators.

To change the number of lanes, set the `N` parameter of the top. Beats
become N elements wide, and the row buffers scale so that rows of up to
1024 elements still fit (`ROW_WORDS = MAX_ROW / N`). The top lints cleanly
at N = 8, 16 and 32. The unit testbenches simulate N = 8 and 16. The
approximation settings are the top's `M`, `ASTAR` and `LMSR` parameters.
The maximum row length and the BRAM depth are in `peano_pkg.sv`.
