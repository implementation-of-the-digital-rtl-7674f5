# MVDR weight solver and output stage for a 57-element QS-SVM beamformer

This is an adaptive receive beamformer for an antenna array. Every snapshot
a(t) holds the 57 complex element outputs. The hardware learns the
interference from those snapshots and forms weights w that pass the steered
direction at unit gain (0 dB) and put nulls on everything else. The output
y = w^H a(t) is the spatially filtered signal.

The weights are the minimum-variance distortionless response (MVDR)
solution:

    P = sum_t lambda^(T-t) a_t a_t^H       (exponentially weighted covariance)
    x = P^-1 h                              (h = steering vector)
    w = x / (h^H x)                         (so that w^H h = 1)

P is never formed or inverted. The design keeps only its Cholesky-like
triangular factor R, with R^H R = P. Each new snapshot is rotated into R by
a recursive QR update with a forgetting factor. Q is never formed, which is
why this is called a "Q-less" QR. x is then found from R by one forward and
one back substitution.

The block structure follows a published Simulink/HDL model of a QS-SVM
beamformer. The signal-model side of that model (antenna, channel, the
preliminary LCMV beamformer and the SVM classifier) ran in software and is
not part of this RTL.

## Data flow

```
 a(t) ──Z⁻¹──┬──────────────────────────────────────────────┐
             └─conj──┐                                       │
 h ──────Z⁻¹─────────┤ rate_up (Repeat 87x / ↑87)            │
 validIn ─Z⁻¹────────┤    │A(i,:)=conj(a)  │B=h   │h          │
 restart ─Z⁻¹────────┘    ▼                ▼      │           │
                   qless_solver: A^H A X = B      │           │
                   (qless_qr + fwd_back_sub)      │           │
                          │X, validOut            ▼           │
                          └──────────► weight_update          │
                                       w = x/(h^H x)          │
                                          │ Z⁻¹               │
                                       rate_down (Downsample) │
                                          │ w                 ▼
                                          ├──────► svm_inner_product ──Z⁻¹── y
                                          └──Z⁻¹── w,  validOut ──Z⁻¹
```

`qs_svm_beamformer` is the top. Its ports are the four inputs a(t), h,
validIn and restart, and the three outputs y, w and validOut. It also brings
out the solver's readyA/readyB and the snapshot strobe `sample_tick`.

### Two clock rates on one clock

The solver side works at `RATE` = 87 processing cycles per snapshot.
`rate_up` has a free-running phase counter. In phase 0 (`sample_tick`) it
samples the snapshot, the steering vector and the strobes. It then holds the
data for 87 cycles ("repeat") and turns validIn and restart into one-cycle
pulses ("upsample"). Because the top's inputs pass a register first, the
values taken are the ones on the top's inputs in the cycle just before
`sample_tick` goes high. A source that holds each snapshot for a full
period and moves to the next one while `sample_tick` is high meets this.
The testbench drives its inputs this way.

`rate_down` brings the weights back. The output changes only in the cycle
after a tick. The weight update pulses its valid for a single cycle, at any
phase, so `rate_down` holds such a result and releases it at the next tick.

The output stage, `svm_inner_product`, runs every cycle on the registered
a(t). It always uses the latest weights.

## The solver (hardest part)

### Row update (`qless_qr`)

R is stored as an N×N array, of which only the upper triangle is used.
Each row has an "empty" flag, so `restart` clears R in one cycle. A
restart that arrives while an update or a solve is running is held until
the solver is ready. The running solve therefore still finishes on the old
R and delivers its result, and the next row goes into an empty R. For a new
row a (the conjugated snapshot) and every column k:

```
r   = sqrt(lambda) * R[k][k]            real and >= 0
rho = sqrt(r^2 + |a[k]|^2)              bit-serial integer square root
c   = r / rho,  s = a[k] / rho          one sequential reciprocal, then two multiplies
R[k][k] = rho
for j > k:  t = sqrt(lambda) * R[k][j]
            R[k][j] = c t + conj(s) a[j]
            a[j]    = c a[j] - s t
```

This is a complex Givens rotation. It keeps the diagonal of R real and
non-negative and zeroes a[k]. Each stored element is scaled by
sqrt(lambda) exactly once per row, when it is read for its rotation. This is
the "scale the triangular factor by the square root of the forgetting
factor" step.

A single rotation unit updates one element per cycle. One row therefore
costs at most N·(W + 2F + 8) + N(N−1)/2 cycles, which is 7 980 cycles at
the defaults.

### Substitution (`fwd_back_sub`)

The substitution reads R one element per cycle through a combinational read
port of `qless_qr`. It solves

```
forward   R^H y = b:  y[i] = (b[i] − Σ_{j<i} conj(R[j][i]) y[j]) · (1/R[i][i])
backward  R   x = y:  x[i] = (y[i] − Σ_{j>i} R[i][j] x[j])       · (1/R[i][i])
```

The reciprocals of the diagonal are computed during the forward pass and
reused in the backward pass. A zero on the diagonal (an R that is still
empty) gives a zero reciprocal, so x = 0 instead of an overflow. A solve
takes about N·(2F+3) + N² + 2N cycles, about 6 700 cycles at N = 57.

`qless_solver` joins the two. For every row it accepts, it updates R, runs
one solve against the buffered B, and pulses validOut. readyA and readyB are
low for the whole of that time, and a row offered then is not taken. In
total one row costs at most about 14 900 cycles at N = 57. That is about
170 snapshot periods, so the weights are retrained from roughly every 170th
snapshot. While R is not yet of full rank, rows cost less. A column whose
rho is zero has nothing to rotate, so its division is skipped.

### Weight update (`weight_update`)

This block computes d = Re(h^H x) with one multiply-accumulate over N
cycles. It then forms 1/|d| with the sequential divider, and finally scales,
rounds and saturates the N elements of x into the weight format, again over
N cycles. For x = P^-1 h, d is real and positive. The normalisation is what
gives the 0 dB response in the steered direction.

## Output stage (`svm_inner_product`, `inner_product`, `cplx_mult`, `tree_sum`)

The output stage computes y = Σ conj(w_i) a_i. There are N parallel
complex multipliers and a pipelined adder tree, and one result is produced
per cycle.

- **`cplx_mult`** uses three real multipliers:
  - Z = A(C+D), X = (A+B)D and Y = (B−A)C;
  - Re = Z − X and Im = Z + Y.

  It is built as register stages D1 (two deep) and D2–D5, for a latency of
  6 cycles.
- **`tree_sum`** has one register per tree level, so its latency is
  d = ceil(log2 N) = 6 cycles.
- **`inner_product`** is the multipliers, one register and the tree. Its
  valid follows the same 6 + 1 + d = 13 cycle path.
- **`svm_inner_product`** ties validIn high and catches the result in a
  register enabled by validOut.

From a snapshot on the top's input to y on its output is 16 cycles. From a
change of the output w to the matching y is 14 cycles. All results are
full precision: y has 48 bits with 32 fraction bits.

## Number formats

All formats are two's-complement fixed point, set in `beamformer_pkg`:

| signal | format | bits |
|---|---|---|
| a(t), steering vector h | Q3.12 | 16 |
| R, y, x, accumulators | Q19.28 | 48 |
| weights w | Q3.20 | 24 |
| y output | Q15.32 | 48 |

The forgetting factor `LAMBDA` defaults to 0.99. sqrt(lambda) is computed
at elaboration.

## What follows the source model and what does not

The RTL follows the source model in these points:

- the block structure and wiring of the top;
- the one-cycle registers on every input and output;
- the conjugate on a(t) in front of the solver;
- the factor 87;
- the solver's port set (A(i,:), B, validInA, validInB, restart, X,
  validOut, readyA, readyB);
- the forward-then-backward substitution;
- scaling R by sqrt(lambda);
- the three-multiplier complex multiplier with its 6-cycle latency;
- the inner-product pipeline with its valid delay chain.

The following are this design's own choices:

- **Sequential solver.** The source used a partial-systolic solver that
  takes a new row every 87 cycles. This one takes about 14 900 cycles per
  row and skips the snapshots in between, so it adapts about 170 times more
  slowly. The source's three "manager" blocks (output manager, B buffer
  manager, forward-substitute memory manager) became a read port and two
  register buffers.
- **Word widths and lambda.** The source only says the data are fixed
  point, so every word width and the value of lambda were chosen here.
- **Downsampler hold.** The source gives no downsampling factor. 87 is
  assumed, and a result that arrives between ticks is held until the next
  one.
- **Reset.** Every register that is read has a synchronous reset.
- **Restart.** Restart empties R, at once when the solver is idle and
  otherwise just before the next row. The source does not describe what
  restart does.
- **MVDR normalisation.** The source prints the MVDR equations in a garbled
  form, so the standard w = P^-1 h / (h^H P^-1 h) is used.
- **Element count.** The element count of 57 is the number of measured
  outputs per array given for the source system. Its antenna table
  (20 elements per loop, 40 per cylinder, 3 cylinders, 2 loops) does not
  multiply out to 57.

The DoA classifier (the quadratic-surface SVM), the LCMV pre-beamformer and
the signal environment are not in the RTL.

## Verification

Each module has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`:

| testbench | what it checks |
|---|---|
| `tb_cplx_mult` | exact products of random and extreme operands, 6-cycle latency |
| `tb_tree_sum` | exact sums for N = 57 and N = 5, latency ceil(log2 N) |
| `tb_inner_product` | exact w^H v for N = 57, 13-cycle latency, valid path |
| `tb_svm_inner_product` | exact result 14 cycles after the inputs |
| `tb_qless_qr` | R upper-triangular with a real diagonal ≥ 0; R^H R equal to the weighted Gram matrix kept in double precision; restart when idle, with a row and during an update; cycle budget (N = 8) |
| `tb_fwd_back_sub` | R^H R x = b for random R; R = 0 gives x = 0; cycle budget (N = 8) |
| `tb_qless_solver` | P X = B after full rank; rows offered all through the busy time are refused; restart when idle and while busy; cycle budget (N = 8) |
| `tb_weight_update` | w = x / Re(h^H x) to within 2 LSB; Re(w^H h) = 1; negative d; x = 0 |
| `tb_rate_up`, `tb_rate_down` | tick spacing, hold, pulses, release of held results |
| `tb_qs_svm_beamformer` | the whole design at its default size (see below) |
| `tb_batch_latency` | the whole design at its default size: latency of training batches of 5 to 35 rows, one weight vector per row |

`tb_qs_svm_beamformer` runs the whole design at N = 57 and RATE = 87. It
uses a desired source at 45°, interferers at 30° and 50°, and white noise.
For the array it models a half-wavelength line of 57 elements; this is the
testbench's own stand-in for the real array geometry.

The testbench compares every output sample y exactly against w^H a(t)
formed from the output weights and the applied snapshot. It also keeps its
own double-precision MVDR reference. This is the weighted covariance of the
snapshots the solver took, factored by Cholesky, with w = P^-1 h / (h^H P^-1 h).
Once N + 8 rows have gone in since a restart, every weight vector the
design delivers must match that reference to a relative error of 10^-3. The
largest error seen is 2.5·10^-5. After training it also requires:

- unit gain (±1 %) towards 45°;
- nulls below −10 dB on both interferers. The run gives −27.8 dB and
  −18.7 dB.

These nulls are shallow for 57 elements. The reason is the training data,
not the arithmetic. The desired signal is present in every row, and the
forgetting factor leaves only about 100 effective rows for 57 unknowns.
Exact MVDR weights from the same rows give the same pattern.

It then restarts the design and retrains with the interferers at 20° and
60°. The nulls follow them (−17.1 dB and −22.9 dB).

It also requires that each of these events happens at least once: a
restart, a restart arriving while the solver is busy, a skipped snapshot, a
held downsampler result and a validOut. The
run takes about 2.3 million cycles, which is under a minute with
`verilator --binary`.

`tb_batch_latency` restarts the design for each batch size B = 5, 10, ...,
35. It feeds B rows and measures the cycles from the first row taken to the
weights of the last row on the output:

| B | 5 | 10 | 15 | 20 | 25 | 30 | 35 |
|---|---|---|---|---|---|---|---|
| cycles | 57 421 | 116 755 | 177 220 | 239 164 | 302 587 | 367 576 | 433 957 |

The cost per row grows slowly with B, from 11 500 to 12 400 cycles. Every
batch is shorter than N = 57 rows, so R is never of full rank here. Each new
row adds one more column that needs a division. Converting these numbers to time needs the clock
frequency of the target device.

To run a testbench with plain Verilator (package first):

```
verilator --binary --timing --assert -Irtl rtl/beamformer_pkg.sv \
    $(ls rtl/*.sv | grep -v beamformer_pkg) tb/tb_qs_svm_beamformer.sv \
    --top-module tb_qs_svm_beamformer -Mdir obj
./obj/Vtb_qs_svm_beamformer
```

## Changing it

- **Number of elements.** Change `N_ELEM` in `beamformer_pkg`, or the `N`
  parameter of the top. The inner product scales with N; solver time grows
  as about 1.5·N² + 170·N cycles per row.
- **Number formats.** `IN_*`, `ACC_*` and `WGT_*` set the formats. Keep
  `ACC_F` > `IN_F` and `ACC_F` > `WGT_F`.
- **Forgetting factor.** `LAMBDA` sets lambda. The effective memory is about
  1/(1−lambda) training rows.
- **Snapshot rate.** `RATE` sets the processing cycles per snapshot. It
  changes only the snapshot timing, not the solver's speed.
