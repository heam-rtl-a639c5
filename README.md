# HEAM: an 8×8 approximate multiplier shaped by its operands, and a systolic array built from it

Most of the arithmetic in a quantized neural network is done by 8-bit multipliers. In such a
network the operands do not fill their 8-bit range evenly. The activations of a typical layer are
mostly close to 0. The weights, stored with a zero point, cluster around 128. A multiplier only has
to be accurate on the operand pairs that actually occur. HEAM is an unsigned 8×8 multiplier built
on that idea.

- It keeps the upper half of the partial-product matrix exact.
- It replaces the lower half (32 bits) by **six single-bit terms**. Each term is one bit of that
  half, or an AND or OR of two of its bits, and each is placed at a chosen binary weight.

Which bits, which operation and which weight were picked offline. The search minimised the
squared error weighted by the measured operand distributions of an 8-bit LeNet, with a penalty
on the number of terms. The published result is a multiplier about 45 % smaller than an exact one
that costs almost no network accuracy.

This RTL gives that multiplier, `heam_mul8`. It also gives a 16×16 weight-stationary systolic
array, `heam_sa`, of the kind used in TPU-style accelerators, whose 256 multipliers are HEAM
multipliers. That array is the setting in which HEAM's area and power were compared against
other multipliers. The offline search (a mixed-integer genetic algorithm) is software and is not
part of the RTL. Only its result, the term list, is.

## 1. The partial-product matrix and the six terms

Write the product of `x` and `y` as eight rows of partial products. Row `i` is
`x & {8{y[i]}}`, shifted left by `i`. So the bit `pp[i][j] = x[j] & y[i]` is worth
`2^(i+j)`. Here `x` runs along a row and `y` selects the row.

```
 output bit:  15 14 13 12 11 10  9  8  7  6  5  4  3  2  1  0
 row 7 (y7)       .  .  .  .  .  .  .  .                        exact
 row 6 (y6)          .  .  .  .  .  .  .  .                     exact
 row 5 (y5)             .  .  .  .  .  .  .  .                  exact
 row 4 (y4)                .  .  .  .  .  .  .  .               exact
 -----------------------------------------------------------------------
 row 3 (y3)                   R  G  B  .  .  .  .  .            replaced
 row 2 (y2)                      G  B  .  .  .  .  .  .         replaced
 row 1 (y1)                         Y  P  .  .  .  .  .  .      replaced
 row 0 (y0)                            P  .  .  .  .  .  .  .   replaced
```

The four lower rows (`y[3:0]`) are dropped. In their place the sum gets these terms:

| # | term bit                          | operation | added at | exact weight of the bits |
|---|-----------------------------------|-----------|----------|--------------------------|
| 0 | R = `x7·y3`                       | none      | 2^10     | 2^10                     |
| 1 | B = `x6·y2`, `x5·y3`              | AND       | 2^9      | 2^8                      |
| 2 | B = `x6·y2`, `x5·y3`              | OR        | 2^9      | 2^8                      |
| 3 | G = `x7·y2`, `x6·y3`              | OR        | 2^9      | 2^9                      |
| 4 | Y = `x7·y1`                       | none      | 2^8      | 2^8                      |
| 5 | P = `x7·y0`, `x6·y1`              | OR        | 2^8      | 2^7                      |

So the whole multiplier is:

```
p = (y[7:4] * x) << 4
  + 1024 * (x7 y3)
  +  512 * ((x6 y2) & (x5 y3)) + 512 * ((x6 y2) | (x5 y3))
  +  512 * ((x7 y2) | (x6 y3))
  +  256 * (x7 y1)             + 256 * ((x7 y0) | (x6 y1))
```

### 1.1 Reading the terms

Three things about the list are easy to misread.

- **Only high bits of `x` are used.** Every term uses `x[7]`, `x[6]` or `x[5]`. For a weight
  near 128 these are the bits that are usually set. Weights from 128 up have `x[7] = 1`; weights
  from 96 to 127 have `x[6] = x[5] = 1`. The low bits of `x`, which vary the most around 128,
  contribute nothing from the lower rows. For `x = 128` the result is exact, except that `y[0]`
  adds 256 where 128 is due.
- **Terms are placed too high on purpose.** Terms 1, 2 and 5 go one column above the weight of
  their bits. Terms 1 and 2 share one bit pair `(a, b)`: `(a&b) + (a|b) = a + b`, so together
  they add `2·(a+b)` times 2^8, twice the exact amount. The surplus makes up, on average, for the
  24 bits of rows 0..3 that no term uses. The error over all 65536 operand pairs has a mean of
  -44 and a mean magnitude of 137, where the products themselves average about 16 000.
- **No carries between terms.** Each term is a single gate, or a wire for a single bit. All
  carry-propagating addition is left to the final sum. The final sum has four shifted 8-bit rows
  and six bits above row 4 (32 bits for an exact multiplier), and its largest possible value is
  64 272, so 16 bits always hold it.

### 1.2 Where each detail comes from

The paper gives the group and term pictures only as coloured dots, without bit numbers or
equations. Here is how each part was read:

- **Bit positions.** They were counted from the drawn output row of the pictures.
- **Operators.** The AND/OR symbols are the printed ones.
- **Operand roles.** Which operand runs along the rows is not stated. `x` is taken to be the
  weight because every kept term uses a high bit of `x` (section 1.1). With the operands swapped,
  the same six terms would almost never be 1 for activations near 0.
- **Final adder.** Its structure is not given. Here it is a plain `+` left to the synthesis tool.
  The hardware figures compared in the paper came from a commercial synthesis tool, so the adder
  structure there is also the tool's.

### 1.3 Changing the multiplier

The term list is a parameter of `heam_mul8` (`TERMS`, default `heam_pkg::HEAM_TERMS`). Each
entry of type `term_t` holds:
- an operation: `OP_PASS` for a single bit, `OP_AND`, `OP_OR` or `OP_XOR`;
- two bits, each given as (row, x-bit);
- the output column (0-based).

`FIRST_EXACT_ROW` says how many lower rows are replaced. Together these describe any multiplier
of this family, for example one found by re-running the search for another network. The
testbenches hold their own written-out copy of the default terms, so they must be updated too.

## 2. The systolic array

`heam_sa` is a `ROWS × COLS` grid (default 16 × 16) of `heam_pe` cells. For each input vector
`a` (one 8-bit activation per row) it computes `out[c] = Σ_r heam(W[r][c], a[r])`, the column
sums of HEAM products. `W` is the weight matrix held in the array.

```
             in_act[0] ─────────────► PE(0,0) ─► PE(0,1) ─► … ─► PE(0,15)
             in_act[1] ─[1 reg]─────► PE(1,0) ─► PE(1,1) ─► …
                …                       │ psum      │
             in_act[15]─[15 regs]───► PE(15,0) ─► …           PE(15,15)
                                        │           │             │
                                    [15 regs]   [14 regs]  …   [0 regs]
                                        ▼           ▼             ▼
                                   out_psum[0] out_psum[1]   out_psum[15]
```

- **PE.** Each PE holds one weight and drives the HEAM multiplier with `x = weight` and
  `y = activation`. In each cycle it registers the activation, passed to the right, and
  `psum_in + product`, passed down. Partial sums enter the top row as zero.
- **Skew and deskew.** Row `r` gets its activation `r` cycles late, so it meets the partial sum
  coming down at the right time. Column `c`'s result is then delayed `COLS-1-c` cycles, so all
  columns of one vector come out together. Seen from outside, whole vectors go in and come out.
- **Latency and throughput.** A result leaves `ROWS + COLS − 1` cycles (31 at 16 × 16) after
  its vector went in. A new vector can enter every cycle, without back-pressure; `in_valid` may
  have gaps. `out_valid` is `in_valid` delayed by the latency, and `busy` is high while any vector
  is inside.
- **Weights.** Write them one row per cycle with `w_we`, `w_row` and `w_data`. Write only while
  the array is idle (`in_valid` and `busy` both low), or one vector would see old and new weights
  mixed. An assertion checks this rule, and another checks that `w_row` is in range.
- **Accumulation.** Sums are 32 bits wide (`ACC_W`). Sixteen products of at most 64 272 need
  20 bits.
- **Reset.** `rst_n`, active low and synchronous, clears weights, pipelines and valid bits.

What the array does not do: it has no weight double-buffering, and no on-chip memory for weights
or activations. It also leaves out the zero-point correction and requantization that an 8-bit
quantized network applies around the raw sums. A layer larger than 16 × 16 runs as a sequence of
weight tiles that an outside controller loads and streams.

The paper states only that a 16 × 16 TPU-style array was built with the HEAM multiplier.
Everything above about the array is this design's choice: the dataflow, the skew registers, the
interface, the widths and the reset.

## 3. Accuracy on distribution-shaped data

`tb_heam_workload` runs one 16 × 16 weight tile of a fully-connected layer, with 256 activation
vectors, through the full-size array. The operands mimic a LeNet layer:
- activations: 70 % in 0..15, with a tail to about 140;
- weights: centred on 128, standard deviation about 19.

For comparison it repeats the run with uniform operands. Every column sum matches the bit-level
model exactly. Against exact products, the column sums had these errors in one run (the values
vary a little with the random seed):

| operands        | RMS error | bias     |
|-----------------|-----------|----------|
| shaped like DNN | 0.84 %    | +0.16 %  |
| uniform         | 0.32 %    | −0.20 %  |

The bias is small for the shaped operands. The relative RMS error is larger there than for
uniform data, because products of small activations are small, so the few dropped low-order bits
weigh more. The search behind HEAM minimised absolute squared error, not relative error. How
these errors affect network accuracy is a question for a software model of the network; it is
not part of this RTL.

## 4. Files

| file                     | contents |
|--------------------------|----------|
| `rtl/heam_pkg.sv`        | widths, `term_t`/`term_op_e` types, the default term list |
| `rtl/heam_mul8.sv`       | the approximate multiplier (combinational) |
| `rtl/heam_pe.sv`         | one systolic-array cell: weight register, HEAM multiply, accumulate |
| `rtl/heam_sa.sv`         | the `ROWS × COLS` array with skew, deskew and valid pipeline (top) |
| `tb/tb_heam_mul8.sv`     | all 65 536 operand pairs against a written-out model and structural properties |
| `tb/tb_heam_pe.sv`       | random weights, activations and sums; reset; weight-write timing |
| `tb/tb_heam_sa.sv`       | full 16 × 16 array, end to end: three weight matrices, bursts, gaps, latency, extreme values |
| `tb/tb_heam_sa_rect.sv`  | the same end-to-end test on a non-square 5 × 3 array |
| `tb/tb_heam_workload.sv` | the distribution-shaped tile of section 3 |

Each testbench checks its results itself. Each one ends by printing
`TB_RESULT checks=<n> failures=<m>` and has a watchdog that stops a run that hangs.

## 5. Simulating

With Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_heam_sa \
    -y rtl -y tb +libext+.sv -Irtl rtl/heam_pkg.sv tb/tb_heam_sa.sv
./obj_dir/Vtb_heam_sa
```

Replace `tb_heam_sa` by any other testbench name. Every test runs in well
under a second. To try another array size, change `ROWS`/`COLS` in the testbench and pass them to
`heam_sa`.

## 6. Scope and trust

- **Multiplier.** It follows the published structure term by term. The reading of the figures is
  explained in section 1.2. Its only open point is the operand roles, and it was tested
  exhaustively against an independent model.
- **Array.** It is a plain weight-stationary design of the TPU kind. The paper names it but does
  not describe it, so its area and power need not match the reported figures.
- **Not provided.** The paper also fitted two other accelerator blocks from the literature with
  HEAM: the processing block of the TASU DoReFa-Net accelerator, and the Systolic Cube
  convolution module. Their structure is not described, so they are not provided.
