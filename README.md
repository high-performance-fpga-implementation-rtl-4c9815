# Pipelined EASI independent component analysis with sequential mini-batch gradient descent

This is synthesizable SystemVerilog for an adaptive independent component
analysis (ICA) engine. It takes a stream of M-dimensional samples `x`, each a
mixture of N independent sources (here M = 4, N = 2). It returns N estimates
`y = B x` of those sources and keeps improving the N x M separation matrix
`B` on every sample. The learning rule is EASI (equivariant adaptive
separation via independence).

The design follows the architecture of "High-Performance FPGA Implementation
of Equivariant Adaptive Separation via Independence Algorithm for Independent
Component Analysis" (Nazemi, Nazarian, Pedram). That work adds *sequential
mini-batch gradient descent* (SMBGD) to the plain EASI update. SMBGD lets the
whole computation run as a pipeline that accepts a new sample on every clock.
All arithmetic is IEEE-754 single precision, as in that work. The RTL here
was written from the published description. Where the description leaves a
detail open, this design makes its own choice; the section
[Where this design goes beyond the description](#where-this-design-goes-beyond-the-description)
lists those choices.

## The algorithm

Plain EASI does four steps per sample:

    y = B x                                   (separate)
    g = g(y)           element-wise           (nonlinearity, here y^3)
    H = I - y y^T + g y^T - y g^T             (relative gradient, N x N)
    B = B - mu H B                            (update)

The update changes `B` before the next sample can use it. A straightforward
pipeline would therefore have to stall for the whole loop on every sample.

SMBGD adds a running gradient matrix `Hhat`. It replaces `mu H` in the update:

    Hhat = gamma * Hhat + mu * H     first sample of a mini-batch (p = 0)
    Hhat = beta  * Hhat + mu * H     other samples (0 < p < P)
    B    = B - Hhat B

In the first mini-batch, `gamma` is taken as zero. `P` is the mini-batch size:

- Inside a mini-batch, `beta` weights recent gradients more than older ones,
  with weights that decay exponentially.
- At the start of a new mini-batch, `gamma` carries part of the previous
  batch's gradient forward as momentum.

With `MOMENTUM = 0`, the gamma path is left out and every mini-batch starts
from zero. This is the cheaper variant, for when convergence speed matters
less than resources.

The nonlinearity is the cubic `g(y) = y^3`. It needs only multipliers.

### Sign convention and the sign of mu

The gradient is built exactly as written above, with `I - y y^T`. Cardoso's
original EASI instead uses `y y^T - I` and updates `B - mu (...) B`. With a
**negative** `mu`, the formula above:

- has the usual stable whitening term `-|mu| (y y^T - I)`;
- behaves like the original EASI with `g(y) = -y^3`.

In that setting it separates **super-Gaussian** sources. The separation test
(`tb_easi_separation`) mixes two Laplacian sources into four channels. With
`mu = -2^-12`, `beta = 0.5`, `gamma = 0.25` and `P = 8`, the cross-talk of
both outputs falls below 1 % after about 4000 samples. In the same test:

- uniform and binary (sub-Gaussian) sources do not separate;
- a positive `mu` lets `B` shrink or diverge.

`mu`, `beta` and `gamma` are run-time inputs, so the sign is the user's choice.

## The pipeline

`easi_top` chains five units. Every unit is fully pipelined and accepts one
sample per clock:

| unit                | computes                               | register stages     |
|---------------------|----------------------------------------|---------------------|
| `mat_vec_mul`       | `y = B x`: N*M products, then a row adder tree | 1 + log2(M) = 3 |
| `cubic_nl`          | `g = (y*y)*y`, plus `y` delayed alongside | 2                |
| `rel_gradient`      | outer products; `I - yy^T` and `gy^T - yg^T`; their sum | 3 |
| `smbgd_update`      | `mu*H`; `c*Hhat + mu*H` (c = gamma, beta or 0) | 2           |
| `sep_matrix_update` | `Hhat*B` products, adder tree over N, `B - Hhat B` | 1 + log2(N) + 1 = 3 |

That makes 13 stages for M = 4, N = 2. In general it is `10 + log2(M*N)`,
the stage count the reference architecture states.

Take a sample presented with `x_valid` on clock edge `t`:

| edge   | event                                                          |
|--------|----------------------------------------------------------------|
| t      | `B*x` products registered, using the B held before edge t       |
| t+2    | `y` registered; `y_valid` is high after this edge               |
| t+4    | `g(y)` registered                                               |
| t+7    | `H` registered                                                  |
| t+9    | `Hhat` registered; `hhat_valid` is high after this edge         |
| t+10   | `Hhat*B` products registered, using the B held before edge t+10 |
| t+12   | `B` replaced by (B before edge t+12) - (sum of those products)  |

### How the loop is kept at one sample per clock

This is the part that most needs care when reading or changing the RTL. Two
recurrences stay inside the pipeline, and each closes within one clock:

- `Hhat`: stage 2 of `smbgd_update` does one multiply and one add per cycle
  on its own register.
- `B`: the final subtraction in `sep_matrix_update` reads and writes the `B`
  register in the same cycle.

Everything else is feed-forward. As a result:

- A sample entering on edge `t` is separated with the `B` of that edge. The
  updates of the 12 samples entered before it are still in the pipeline and
  not yet in that `B`.
- The correction `Hhat B` for a sample is computed with the `B` of edge
  `t+10`. It is subtracted from the `B` of edge `t+12`, which by then holds
  the two updates that came in between.

So the hardware runs a pipelined, delayed-gradient form of the per-sample
rule `B <- B - Hhat B`. The accumulated `Hhat` weights many samples. This is
what keeps the update smooth enough to tolerate the delay, and why the step
can be taken on every sample. The testbench model (`tb_easi_top`) encodes
exactly these edges, so any retiming of the RTL shows up there.

There is no back-pressure. Cycles with `x_valid` low travel through as
bubbles: they advance neither the sample counter `p` nor `B`.

### Mini-batch bookkeeping

`minibatch_ctrl` (inside `smbgd_update`) keeps three values:

- `p`, the sample index inside the mini-batch;
- `k`, the mini-batch index;
- a first-batch flag.

`p` counts accumulated gradients and wraps at `P` (`batch_size`; 0 counts as
1). `k` then increments and the first-batch flag clears. The coefficient
applied to the old `Hhat` is:

- `0` at p = 0 in the first mini-batch (or always at p = 0 with
  `MOMENTUM = 0`);
- `gamma` at p = 0 afterwards;
- `beta` otherwise.

A single `Hhat` register serves both cases. At p = 0 the previous batch's
last value is multiplied by `gamma`, and the result overwrites the register.
No separate clear is needed.

## Number format

`fp_add` and `fp_mul` are combinational single-precision units. Pipeline
registers sit in the units that use them. They follow these rules:

- rounding to nearest, ties to even;
- subnormal inputs read as zero, and subnormal results are flushed to a
  signed zero (after rounding);
- an exponent field of 255 is infinity, whatever the fraction. Overflow
  gives infinity. `0 * inf` gives 0 and `inf - inf` gives the first operand,
  so NaN never appears;
- `x - x` gives +0.

Subtraction is addition with the sign bit of the second operand flipped.
`easi_pkg::fp_neg` does the flip.

Summation order is fixed, and the testbenches reproduce it bit for bit:

- adder trees pair neighbours level by level, e.g. `((p0+p1)+(p2+p3))`;
- `H` is `(I - yy^T) + (gy^T - yg^T)`.

## Interface of `easi_top`

| port                 | dir | width      | meaning                                               |
|----------------------|-----|------------|-------------------------------------------------------|
| `clk`, `rst_n`       | in  | 1          | clock; asynchronous active-low reset (B, Hhat, counters, valids to 0) |
| `x_valid`, `x[M]`    | in  | 1, 32 each | input sample                                          |
| `mu`, `beta`, `gamma`| in  | 32 each    | hyperparameters, single precision; hold them stable while training |
| `batch_size`         | in  | 16         | mini-batch size P                                     |
| `b_load`, `b_init[N][M]` | in | 1, 32 each | load a start matrix and restart SMBGD (p = 0, k = 0, Hhat = 0) |
| `y_valid`, `y[N]`    | out | 1, 32 each | component estimates, 3 cycles after the sample        |
| `b[N][M]`            | out | 32 each    | current separation matrix                             |
| `hhat_valid`, `hhat[N][N]` | out | 1, 32 each | accumulated gradient, 10 cycles after the sample |
| `sample_index`, `batch_index` | out | 16, 32 | p and k                                          |
| `busy`               | out | 1          | a sample is still in the pipeline                     |

How to use it:

1. Reset.
2. Set the hyperparameters and `batch_size`.
3. Pulse `b_load` for one cycle with a random start matrix on `b_init`.
4. Stream samples.

`b_load` must only be given while `busy` and `x_valid` are low; an assertion
checks this. After reset, `B` is zero, and a zero `B` gives a zero `y` and no
learning, so a load is required.

Parameters:

| parameter  | default | meaning                                   |
|------------|---------|-------------------------------------------|
| `M`        | 4       | input features                            |
| `N`        | 2       | independent components                    |
| `MOMENTUM` | 1       | 0 removes the gamma (momentum) path       |

Any `M, N >= 1` elaborates. Adder trees pad to the next power of two with
+0. The stage count is then `10 + ceil(log2 M) + ceil(log2 N)`.

At the defaults, a yosys coarse synthesis counts about 2600 flip-flop bits.
The reference FPGA implementation reports 3648 register bits for the same
M = 4, N = 2 problem.

## Where this design goes beyond the description

The published description gives the algorithm, its block diagram, the
fp32/cubic choices, M = 4, N = 2 and the stage count. The following are this
design's own decisions:

- **Stage split**: the split of the 13 stages across the units (table above)
  is chosen so that it adds up to the stated `10 + log2(MN)`.
- **When B is read**: which `B` each step uses (the stale-B timing above). The
  description only says that SMBGD removes the loop-carried dependency and
  admits a sample per clock.
- **The update is per sample**: `B` is updated by `Hhat B` for every sample,
  as the block diagram prints it, not once per mini-batch.
- **Momentum source**: at p = 0 the momentum term uses the last `Hhat` of the
  previous mini-batch (written `Hhat^P_{k-1}` in the rule, where p runs only
  to P-1).
- **The nonlinearity**: exactly `y^3`. The description says only "a cubic
  function".
- **Run-time settings**: the hyperparameters and P are inputs, since no
  values are published. The start matrix comes from outside through
  `b_load`; the description says only that `B` starts random.
- **Number format**: flush-to-zero, no NaN, round to nearest even.
- **Interface**: valid signals without back-pressure, the `busy` output and
  the load-when-idle rule.

The baseline it is compared against is not included: a non-pipelined EASI
with per-sample SGD. Neither is the FPGA tool flow. The convergence study in
the source (4166 against 3166 iterations) gives no problem data, so it cannot
be reproduced. The separation test uses a problem of its own.

## Verification

Every unit has a self-checking testbench in `tb/`. Each compares against
reference arithmetic in `tb/fp_ref_pkg.sv`. That package computes through the
simulator's `real` type and rounds to single precision with its own code, so
it shares no code with the RTL. Checks are bit-exact, and latencies are
checked too.

| testbench              | what it does                                            |
|------------------------|---------------------------------------------------------|
| `tb_fp_add`, `tb_fp_mul` | 40 000 random operand pairs over the full exponent range, plus hand-worked ties, overflow and underflow |
| `tb_mat_vec_mul`, `tb_cubic_nl`, `tb_rel_gradient` | random streams with gaps; values and latency |
| `tb_minibatch_ctrl`    | random advances, several P (including 0 and 1), restarts |
| `tb_smbgd_update`      | the three coefficient cases, restarts; a second instance with `MOMENTUM = 0` |
| `tb_sep_matrix_update` | overlapping updates and loads, B compared after every edge |
| `tb_easi_top`          | whole design at its default size against a transaction model with the edge timing above; three training runs (P = 7, 1, 16), full-rate bursts, bubbles, batch ends, momentum and first-batch steps |
| `tb_easi_separation`   | 10 000 samples of a 4 x 2 Laplacian mixture; requires cross-talk below 2 % with the two outputs on different sources |

Each testbench ends with a line `TB_RESULT checks=<n> failures=<n>`.

To run one with Verilator 5:

    verilator --binary --timing --assert -y rtl +libext+.sv -Itb \
        rtl/easi_pkg.sv tb/fp_ref_pkg.sv tb/tb_easi_top.sv \
        --top-module tb_easi_top
    ./obj_dir/Vtb_easi_top

Replace `tb_easi_top` with any testbench name. All of them finish in seconds.
`tb_easi_separation` accepts `+src=0` (sub-Gaussian sources), `+mu=<real>`
and `+samples=<n>`.

## Files

- `rtl/easi_pkg.sv`: the `fp32_t` type, constants and default sizes.
- `rtl/fp_add.sv`, `rtl/fp_mul.sv`: the single-precision arithmetic.
- `rtl/fp_adder_tree.sv`: the registered adder tree.
- `rtl/mat_vec_mul.sv`, `rtl/cubic_nl.sv`, `rtl/rel_gradient.sv`,
  `rtl/minibatch_ctrl.sv`, `rtl/smbgd_update.sv`,
  `rtl/sep_matrix_update.sv`: the pipeline units.
- `rtl/easi_top.sv`: the top level.
- `tb/`: the testbenches and `fp_ref_pkg.sv`.
