# Det3 KAN trainer: training a Kolmogorov-Arnold network on an FPGA in 17 clocks per record

This RTL trains a small Kolmogorov-Arnold network (KAN) entirely in hardware, one training
record at a time. It follows the all-integer, division-free scheme that Polar and Poluektov
published in "Concurrent training methods for Kolmogorov-Arnold networks: Disjoint datasets
and FPGA implementation". Every step of the Newton-Kaczmarz training algorithm is applied to
all functions and parameters of a layer at once, so a record costs a fixed number of clocks
whatever the layer sizes are. Here that number is 14 clocks of network work, plus 2 clocks to
generate the record on chip and 1 clock to clear per-record state. At 100 MHz that is 5.88
million training records per second.

The default configuration is the published "Det3" demonstrator. The chip makes random 3x3
integer matrices and learns to predict their determinants while it makes them. Each record
is scored before the model learns from it, so the running error is always measured on unseen
data. In simulation the default design reaches a correlation of 0.98 between prediction and
target after about 150 000 records.

## The model

A KAN layer maps an input vector `y` (length M) to an output vector `z` (length N) by adding
up one-dimensional functions:

    z_i = sum_j g_ij(y_j)

Each `g_ij` is piecewise linear. It is stored as its values `G[i][j][0..P-1]` at P nodes that
are evenly spaced across the input range. The network here has two layers:

    y_j = sum_l h_jl(x_l)    inner layer: 9 inputs -> 6 hidden values, 3 nodes per function
    z   = sum_j g_j(y_j)     outer layer: 6 hidden values -> 1 output, 21 nodes per function

That gives 9*6*3 + 6*21 = 288 trainable integers.

**Evaluation.** The nodes are `2^D` apart, so locating a value `v` on the grid needs no
divider:

    k = (v - vmin) >> D            left node index
    f = (v - vmin) & (2^D - 1)     offset from the left node, 0 .. 2^D-1
    g = ((2^D - f) * G[k] + f * G[k+1]) >>> D

**Training step.** The outer layer gets its residual `r = z* - z` from the record's target
`z*`. For each function, only the two nodes around the current input move:

    G[k+1] += r * f       / 2^(D+MU)
    G[k]   += r * (2^D-f) / 2^(D+MU)

`2^-MU` is the damping factor. It includes the usual Kaczmarz normalisation by the number of
functions, which is about `1/(m*n)` for piecewise-linear bases. The inner layer's target
comes from the outer layer's Jacobian. Its slope on the active segment is
`(G[k+1] - G[k]) / 2^D`, which gives

    r_hidden_j = (G_j[k+1] - G_j[k]) * r / 2^(D_OUT+SBP)

The inner layer is then updated from `r_hidden` with the same two-node rule. The Jacobian is
read before any parameter changes.

**Truncation.** The outer layer can only interpolate inside `[0, 20*2^10)`. A hidden value
below that range is replaced by 1. A value at or above the top of the range is replaced by
the top minus 1. Frequent truncation means the damping is wrong. Both cases are counted
(`trunc_lo_count`, `trunc_hi_count`).

## The 17-clock record

`kan_sequencer` is a ring of 17 states, each raising one strobe of `kan_pkg::phase_t`. While
`run` is high the ring repeats with no gaps.

| clock | strobe | what happens | unit |
|---|---|---|---|
| 1 | `clr` | per-record registers cleared | layers, back-propagation |
| 2 | `gen` | random generator steps, nine matrix entries registered | `det3_datagen` |
| 3 | `det` | determinant and target `det >>> 10` registered | `det3_datagen` |
| 4 | `l1_fn` | all 54 inner `h_jl(x_l)` computed; `k`, `f` kept | inner `kan_layer` |
| 5 | `l1_sum` | 6 hidden sums | inner `kan_layer` |
| 6 | `l2_fn` | hidden values truncated; 6 outer `g_j(y_j)` computed | `range_clamp`, outer `kan_layer` |
| 7 | `l2_sum` | prediction `z` | outer `kan_layer` |
| 8 | `res_out` | `resid = target - z`, `pred = z` | top |
| 9 | `res_in` | 6 hidden residuals; `resid` pushed into the error window | `kan_backprop`, `err_ring` |
| 10, 11 | `l2_uhi`, `l2_ulo` | outer update terms for `f`, then for `1-f` | outer `kan_layer` |
| 12, 13 | `l1_uhi`, `l1_ulo` | inner update terms for `f`, then for `1-f` | inner `kan_layer` |
| 14, 15 | `l2_ahi`, `l2_alo` | outer `G[k+1]`, then `G[k]` updated | outer `kan_layer` |
| 16, 17 | `l1_ahi`, `l1_alo` | inner `G[k+1]`, then `G[k]` updated (`rec_done`) | inner `kan_layer` |

Clocks 4 to 17 are the 14 training clocks of the published scheme, in the same grouping:
4 forward, 2 residual, 4 update-term and 4 apply clocks. The published design gives how many
clocks each part takes. The order used here is this design's own choice:

- the clear and generation clocks come before the training clocks;
- in each update and apply pair, the outer layer goes first.

Nothing overlaps between records, so each step works on settled registers. The layer
asserts that no two of its strobes are ever high together.

`run` is sampled only in the last clock of a record. Dropping it stops the trainer after the
current record. The parameters can then be read out through the `rd_*` port.

## Damping, scaling and rounding

This is the part where the integer design differs most from the floating-point algorithm,
and where most of the choices below were made.

- **Word width.** All parameters, sums and residuals are 32-bit signed. Products are formed
  at 64 bits and scaled back down.
- **Inputs.** Matrix entries are 8-bit unsigned. With `D_IN = 7` the range 0..255 is exactly
  the two segments of a 3-node inner function, so inputs never need truncation.
- **Hidden range.** `D_OUT = 10` with 21 nodes gives a hidden range of 0..20480. The inner
  parameters start near `10240/9`, so every hidden value starts near the middle of the range.
- **Target scale.** The target is the determinant shifted right by 10 bits. Its standard
  deviation is then about 3000.
- **Damping.** `MU_OUT = 3` divides the outer step by 8; the outer layer has 6 functions.
  `SBP = 8` and `MU_IN = 0` set the inner step. These values were chosen by experiment. The
  inner step is sensitive: with `SBP = 6` hidden values start hitting both ends of their
  range, and with `SBP = 5` the model no longer learns.
- **Rounding.** Interpolation divides by `2^D` with a plain arithmetic shift, which rounds
  towards minus infinity. The update terms and the back-propagated residual are rounded to
  nearest instead. A floor shift makes every small negative update -1 instead of 0. The
  resulting downward drift of all parameters stopped training completely in a bit-exact
  software model of this datapath.
- **Initial model.** The published design starts from random parameters. Here reset loads
  fixed pseudo-random values: a 32-bit integer hash of `(seed, i, j, k)`, within ±256 of the
  base for the inner layer and ±64 of zero for the outer layer. Every reset therefore starts
  from the same model, which keeps runs reproducible.

## On-chip data and the accuracy monitor

`det3_datagen` holds a 128-bit xorshift128 generator (Marsaglia, 2003). In the `gen` clock it
steps once and the low 72 bits of the new state become the nine entries, row-major. In the
`det` clock it forms the determinant by cofactor expansion along the first row.

`err_ring` keeps the last 256 residuals, as the published demonstrator does. It also keeps
their sum of absolute values, adding the new entry and subtracting the one it overwrites, so
`mae = err_sum >> 8` is the mean absolute error over the window. The published design does
not say which accuracy figure it computes from its buffer. Its experiments report Pearson
correlation, which needs division. Any entry of the window can be read through
`err_rd_addr`/`err_rd_diff`, so a host can compute correlation itself.

## Modules

    kan_trainer_top
    ├── kan_sequencer          17-state record schedule, phase strobes
    ├── det3_datagen           random 3x3 matrix and its determinant
    ├── kan_layer  (u_l1)      inner layer, M=9, N=6, P=3, D=7
    │   └── plf_locate x9      shift-and-mask segment locator
    ├── range_clamp x6         truncation of hidden values
    ├── kan_layer  (u_l2)      outer layer, M=6, N=1, P=21, D=10
    │   └── plf_locate x6
    ├── kan_backprop           hidden residuals J^T r
    └── err_ring               256-entry error window
    kan_pkg                    shapes, scaling constants, phase_t, helpers

`kan_layer` is generic in M, N, P, D and MU. Both layers use it unchanged. A different
network shape is a matter of parameters. Only the record generator is specific to 3x3
matrices.

### Top-level ports

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock (100 MHz on the published board), asynchronous active-low reset |
| `run` | in | 1 | train continuously while high |
| `busy`, `rec_done`, `rec_count` | out | 1, 1, 32 | a record is in progress; last clock of a record; records completed |
| `x`, `target` | out | 9 x 8, 32 | the record being trained |
| `pred`, `resid` | out | 32, 32 | prediction before this record's update; `target - pred` |
| `mae`, `err_sum`, `err_full` | out | 32, 40, 1 | error-window mean, sum, window filled |
| `err_rd_addr`, `err_rd_diff` | in, out | 8, 32 | read window entry n (0 = newest) |
| `trunc_lo_count`, `trunc_hi_count` | out | 32, 32 | hidden values truncated at the bottom or top of the range |
| `rd_layer`, `rd_i`, `rd_j`, `rd_k`, `rd_val` | in, out | 1, 3, 4, 5, 32 | read parameter `G[i][j][k]` of the inner (0) or outer (1) layer |

All outputs are registered except `rd_val` and `err_rd_diff`, which are combinational reads.
Read parameters while `busy` is low.

## Parameters

| parameter | default | where it comes from |
|---|---|---|
| `N_IN`, `N_HID`, outer blocks | 9, 6, 1 | published Det3 demonstrator |
| `P_IN`, `P_OUT` | 3, 21 | published |
| `ERR_DEPTH` | 256 | published |
| cycles per record | 14 + 2 + 1 | published |
| node spacing `2^D_IN`, `2^D_OUT` | 2^7, 2^10 | this design |
| `MU_IN`, `MU_OUT`, `SBP` | 0, 3, 8 | this design, by experiment |
| `TSHIFT` | 10 | this design |
| input width, value width | 8, 32 bits | this design |
| random generator, initial model | xorshift128; hash of indices | this design |

## Verification

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog. The expected values are computed inside
the testbench, never taken from the design:

- `tb_plf_locate`: every grid position, checked against division and remainder.
- `tb_range_clamp`: boundary and random values.
- `tb_kan_layer`: a 6x2 layer with 21 nodes against a reference model, over 300 records, with
  all parameters compared.
- `tb_kan_backprop`: random Jacobians against a rounded dot product.
- `tb_err_ring`: against a queue of the last 256 values.
- `tb_kan_sequencer`: strobe order, 17-clock records, 14 contiguous training clocks, stop and
  restart.
- `tb_det3_datagen`: against a separate xorshift128 and the rule of Sarrus.

`tb_kan_trainer_top` runs the whole design at its default parameters for 150 000 records,
which takes a few seconds of simulation. The testbench trains its own integer copy of the
network on the records the chip reports. For every record it checks the target, prediction
and residual, and the spacing of 17 clocks between records. At each pause (every 50 000
records) it compares all 288 parameters, the error window and the truncation counters.
Finally it requires a Pearson correlation above 0.95 over the last 256 predictions. The run
reaches 0.98, against 0.51 after 2 000 records.

At the default damping, hidden values only ever leave their range at the top.
`tb_kan_trainer_stress` repeats the same test with `SBP = 6`. There hidden values are
truncated at both ends and the model still reaches a correlation above 0.9.

To run a testbench with Verilator:

    verilator --binary --timing --assert --top-module tb_kan_trainer_top \
        -y rtl -y tb +libext+.sv -Irtl rtl/kan_pkg.sv tb/tb_kan_trainer_top.sv
    ./obj_dir/Vtb_kan_trainer_top

Verilator has two-state logic. Everything that is read is reset.

## Departures from the published design and limits

- The published RTL is described only in outline. The widths, scales, damping values,
  rounding, generator and initial values here are this design's own. Results therefore
  match the published behaviour (fixed 17-clock records, correlation above 0.98 on unseen
  data after some 10^5 records) but not its exact numbers.
- The published design reports correlation above 98% after one pass of 50 000 records. This
  design gets 0.97 to 0.98 after 50 000 to 60 000 records and 0.98 to 0.99 later.
- Accuracy on chip is the windowed mean absolute error, not a correlation.
- Getting values off the board is not modelled. The readout ports stand in for whatever host
  link a board would use.
- Multiplier budget: each function needs one multiplier for evaluation and one for its update
  terms. The interpolation is computed as `(G[k] << D) + f*(G[k+1]-G[k])`, and the two update
  terms share the product `r*f`, because `r*(2^D-f) = (r << D) - r*f`. Both rewrites are exact.
  The design therefore has 54+54 multipliers in the inner layer, 6+6 in the outer layer, 6 in
  the back-propagation unit and 9 in the determinant: 135 in all, mostly 32 x 8 bits. That is
  within the 240 DSP slices of the published board (Artix-7 100T). Timing closure at 100 MHz
  has not been checked. The longest path is the clock-6 chain: truncation, location, one
  multiply-add and the register.
- The CPU-side strategies of the same work are not hardware and are not included:
  - training copies of the model on disjoint batches and averaging them;
  - pre-training sub-models;
  - dynamic `alpha`/`beta` rescaling.
  In hardware, truncation and fixed power-of-two damping take the place of rescaling.
- Larger networks from the same work do not fit the default parameters. For example, a
  25-200-1 network with 4 and 16 nodes has 23 200 parameters. Such networks need new layer
  parameters and a matching data source, and their multiplier count grows with the number of
  functions.
