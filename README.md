# A factor-graph solver for LiDAR-inertial odometry

LiDAR-inertial odometry tracks a moving platform by keeping a short history of
*keyframes*. Each keyframe state holds the pose, velocity and sensor biases. Each
new measurement adds a constraint between these states:

- a GPS fix constrains one keyframe (a *unary factor*);
- LiDAR scan matching and IMU preintegration constrain two consecutive keyframes
  (a *binary factor*).

Taken together, the keyframes and constraints form a factor graph. Here that graph
is a chain:

```
   g0        g1        g2                g(n-1)      unary (GPS) factors
   |         |         |                  |
  x0 --e0-- x1 --e1-- x2 -- ... -- x(n-2) --e(n-2)-- x(n-1)
                 binary (LiDAR + IMU) factors on the edges
```

Estimating the trajectory is a nonlinear least-squares problem, solved with
Gauss-Newton. Each iteration linearises every factor at the current estimate
X, solves the sparse linear system A·δ = ε, and sets X ← X + δ.

This RTL does not solve that system as one large matrix. It eliminates one
variable at a time, using a small dense Householder QR on just the factors
that touch that variable. Each elimination does two things:

- it leaves a *conditional* p(x_j | x_neighbour), a triangular block
  [R_j | T_j | d_j], in a Bayes-net store;
- it passes a new factor τ on to the neighbour.

When the last variable (the *root*) has been eliminated, back substitution
walks the Bayes net outwards: R_j δ_j = d_j − T_j δ_neighbour.

Because the graph is a chain, every elimination has the same shape. So one
fixed-size QR engine, with a fixed matrix builder in front of it, serves
every step.

Two ideas make this fast in hardware:

1. **Parallel elimination from both ends.** The chain is eliminated from x_lo
   upwards and from x_hi downwards at the same time, by two independent QR
   engines. The two sides meet at the middle keyframe, which becomes the root.
   Back substitution then runs on both halves at once, with two units.
2. **An overlapped QR pipeline.** Inside each QR engine, building the reflector
   for step k+1 (the *Evaluate* phase) overlaps applying the reflector of step
   k to the remaining columns (the *Update* phase). The Update phase is spread
   over NU time-multiplexed Update units, chained through FIFOs in a ring.

The same hardware also does *incremental smoothing*: it re-solves only the
three newest keyframes while the rest of the chain stays fixed.

## Sizes and number format

| symbol | default | meaning |
|---|---|---|
| `D`  | 15 | dimension of one keyframe variable: pose 6, velocity 3, gyro and accelerometer bias 6 |
| `G`  | 3  | rows of a GPS (unary) factor: a position fix |
| `B`  | 21 | rows of an edge (binary) factor: LiDAR odometry 6 stacked on IMU preintegration 15 |
| `KF_MAX` | 30 | keyframes held on chip |
| `NU` | 9  | Update units in each QR engine |

These give a largest elimination matrix of M_ROWS = max(D+G+B, 2D+G) = 39 rows
by N_COLS = 2D+1 = 31 columns. The last column is the right-hand side.

- KF_MAX = 30 and NU = 9 are taken from the evaluation this architecture was
  published with. NU = 9 was the fastest configuration in its sweep of NU = 4..9.
- D, G and B are this design's choices for a typical LIO state and set of
  factors. The published description does not fix them.

All arithmetic is signed fixed point, Q15.16: 32 bits, 16 of them fractional.
The type is `fg_pkg::fx_t`, and products are computed by `fx_mul`. This is the
largest departure from the original design, which uses single-precision
floating point. With Q15.16, the range is ±32768 and the resolution is
1.5·10⁻⁵. Residuals and Jacobians must be whitened and scaled into that range
by whoever writes them in. Sums of squares inside the QR are the first values
to overflow: keep column norms well under 181 (√32768).

## The Householder QR engine (`partial_qr`)

`partial_qr` takes an m×n matrix column by column, with a valid/ready
handshake. It reduces the first `nhat` columns to upper-triangular form. m, n
and nhat are set at run time, up to M_ROWS and N_COLS. Result columns leave with
their index on `out_*`, one per clock, with no backpressure.

Inside it there are three parts:

- **Evaluate unit (`qr_evaluate`)**
  - Takes the pivot column a of step k. It computes σ = Σ_{i≥k} a_i², ‖a‖ = √σ,
    α = −sign(a_k)·‖a‖, v = a − α·e_k (zero above k), and β = 1/(σ + ‖a‖·|a_k|).
    β is the 2/vᵀv of the usual formulation, written so it needs no second sum.
  - H = I − β·v·vᵀ is never formed. Only v and β go on.
  - The reduced pivot column (α on the diagonal, zeros below it) is emitted
    straight away. The zeros are written, not computed.
  - The sum takes one clock per row. The square root (`fx_sqrt`, 24 clocks) and
    the divide (`fx_div`, 48 clocks) are sequential. An all-zero column gives
    β = 0, so H = I.
- **Update units (`qr_update`, ×NU)**
  - Each applies a ← a − β·(vᵀa)·v to one column at a time, on rows k..m−1
    only. The rows above k are already final.
  - It has one multiplier. Its latency is 2(m−k)+4 clocks per column.
- **FIFOs (`col_fifo`, one behind each Update unit)**
  - Each holds whole columns together with their index.

Step k is given to Update unit u = k mod NU. That unit reads its columns from
the FIFO of unit u−1, or from the input port when k = 0, and writes into its own
FIFO, which feeds the unit of step k+1. After NU steps the ring wraps back to
unit 0.

The first column that step k writes is column k+1, the pivot of step k+1. The
Evaluate unit takes it from that FIFO at once. While it builds reflector k+1,
unit u is still updating columns k+2.. of step k. This is the overlap.

The Evaluate unit for step k has to wait while unit k mod NU is still busy with
step k−NU. This wait is the one stall in the engine, and it is visible on
`eval_wait`.

- With m rows and few columns, the stall rarely happens.
- When NU is small compared with nhat, it happens often.
- The engine's testbench runs with NU = 2 on purpose, so that it does.

Columns that finish step nhat−1 are emitted with rows nhat..m−1 holding the
reduced remainder. That remainder is the τ factor passed on to the neighbour.

An assertion checks that the Evaluate unit always takes columns in index
order. If it does, the ring can never reorder a pivot.

## One elimination (`elim_side`)

`elim_side` wraps one QR engine with the builder that assembles the matrix
Ā_j for eliminating keyframe j. The chain fixes which factors take part, so
the builder needs no variable indices. It reads them straight from the linear
system buffer and from its own carried factor τ, one element per clock.

```
side job (eliminate x_j, neighbour x_n)         root job (eliminate x_r)
          x_j      x_n      rhs                           x_r     rhs
 tau_j  [ R_tau  |  0     | d_tau ]  D rows      tau_left [ R  | d ]  D rows
 g_j    [ A_g    |  0     | e_g   ]  G rows      tau_rght [ R  | d ]  D rows
 e      [ A_e,j  | A_e,n  | e_e   ]  B rows      g_r      [ A_g| e ]  G rows
```

- Left side (dir = 0): the neighbour is j+1, on edge e = j.
- Right side (dir = 1): the neighbour is j−1, on edge e = j−1. The edge's two
  column blocks are swapped so that x_j always comes first.

A side job is reduced over all 2D variable columns. This gives:

- rows 0..D−1: the conditional [R_j | T_j | d_j], written to the Bayes-net
  store;
- rows D..2D−1 of the neighbour and rhs columns: a triangular D×(D+1) factor,
  which becomes τ for the next job.

This full triangularisation is this design's choice. The original description
stops the QR after the first D columns, so the carried factor grows by B rows
at every step. Reducing it at once keeps every matrix at a fixed size, 39×31,
however long the chain is. It gives the same least-squares solution, at the
cost of D more Householder steps per job.

The root job stacks both carried factors and the root's own GPS factor, and
eliminates the root alone.

## The sequencer (`fg_accel`)

`fg_accel` is the top level. It wires together:

- the state store (`input_buffer`);
- the linear system buffer (`linear_system_buffer`);
- two elimination sides (`elim_side`);
- the Bayes-net store, and the δ store;
- two back-substitution units (`back_substitution`);
- the result store (`output_buffer`);
- the cost accumulator (`cost_unit`).

One solve of the window x_lo..x_hi runs as follows:

1. **Linearise.** `lin_req` rises. The external factor block reads X through
   `fb_x_*`, writes the whitened Jacobians and residuals through `ls_*`, and
   answers with `lin_ack`.
2. **Eliminate.** The two elimination orders are chosen at run time with `mode`.
   - Parallel mode: the root is r = ⌊(lo+hi)/2⌋. Side 0 eliminates lo..r−1 and
     side 1 eliminates hi..r+1, both at the same time. Then side 0 runs the root
     job, using side 1's τ.
   - Serial mode: side 0 alone eliminates lo..hi−1, and the root is hi.
3. **Back-substitute.** The root is solved first. Then the two units work
   outwards, one on each half, each reading the δ of its parent.
   - Parallel mode uses both units.
   - Serial mode uses one unit, from hi−1 down to lo.
4. **Update.** X ← X + δ over the window, and max|δ| is recorded.
5. **Test for convergence.** The solve stops when max|δ| < `conv_thresh`, or
   after `max_iter` iterations. Otherwise it goes back to step 1.
6. **Publish.** X is copied into the output buffer, and `xs_valid` rises. Then
   `done` pulses, and `converged` says which of the two limits ended the solve.

The three modes of operation:

- **Batch optimisation:** the window is the whole chain.
- **Incremental smoothing:** the window is the three newest keyframes
  (win_hi−2..win_hi). Keyframes outside the window keep their values. As in
  the original scheme, only the subgraph of those three keyframes is rebuilt
  and eliminated. The factor on the edge into the window from the fourth-newest
  keyframe is left out, so the older keyframes do not hold the window in place
  through it.
- **Cost evaluation:** the factor block streams residuals into `res_*`, and
  `cost` returns Σ ε². There is no dedicated state for it: it can run whenever
  the solver is idle.

## Memories

- **`input_buffer`**
  - Holds X as KF_MAX·D words, at address keyframe·D + entry.
  - The host loads it.
  - The solver adds δ to it one word per clock. If the host writes the same
    word in the same clock, the host write wins.
  - It has two combinational read ports: one for the factor block, and one for
    the copy to the output buffer.
- **`linear_system_buffer`**
  - Stores the linearised system with no bookkeeping: no factor type, no
    variable index, no zero blocks.
  - The unary factor of keyframe j is at j·G·(D+1). The binary factor of edge j
    is at j·B·(2D+1).
  - The residual is the last column of each.
  - One write port serves the factor block. Two combinational read ports serve
    the two elimination sides.
- **Bayes-net store (inside `fg_accel`)**
  - One D×(2D+1) conditional per keyframe.
- **`output_buffer`**
  - Holds X* for the host.
  - `valid` falls when a new solve starts, and rises when the copy is complete.
  - A read returns 0 while the buffer is not valid.

The memories are written as plain arrays. The largest is the linear system
buffer: (30·3·16 + 29·21·31)·32 bits, about 650 kbit.

## Back substitution (`back_substitution`)

One unit solves R_j δ_j = d_j − T_j δ_parent for one conditional. It works on
rows D−1 down to 0, one row at a time:

1. Accumulate the right-hand side minus the T and R terms already known. This
   needs one multiply per clock.
2. Divide by the pivot, using `fx_div`.

A zero pivot gives δ = 0 for that row, rather than an error. The solved entries
go out on `delta_*`.

## Timing

At the defaults, with the linearisation handshake counted, the solver takes
these clock counts:

| solve | iterations | clocks | about, at 143 MHz |
|---|---|---|---|
| batch, 30 keyframes, parallel | 2 | 297,559 | 1.0 ms per iteration |
| batch, 30 keyframes, serial | 2 | 492,317 | 1.7 ms per iteration |
| incremental, 3 keyframes, parallel | 2 | 102,297 | 0.36 ms per iteration |
| incremental, 3 keyframes, serial | 2 | 116,201 | 0.41 ms per iteration |

143 MHz is the clock the original was run at.

Parallel elimination is 1.65× faster than serial for the full chain, but
gains little on three keyframes. There, the root job and the linearisation
make up most of the time.

Within each elimination, the Update units take most of the clocks:

- they have one multiplier each;
- a 39-row column costs about 80 clocks;
- each side job has 30 Householder steps.

More Update units shorten a job, because the Evaluate unit then stalls less
often. One full-size side job (39×31, reduced over 30 columns) takes:

| NU | 4 | 5 | 6 | 7 | 8 | 9 |
|---|---|---|---|---|---|---|
| clocks | 9679 | 8228 | 7286 | 6612 | 6174 | 5752 |

The root job (33×16, 15 columns) stops improving at NU = 7, because it has too
few steps to keep more units busy. Adding multipliers per Update unit is the
other obvious way to go faster.

## Verification

Each block has a self-checking testbench in `tb/`, named `tb_<module>`. It
compares the block with a model computed in the testbench itself, using
`real` arithmetic for the numerical blocks. Every testbench prints
`TB_RESULT checks=N failures=M`, and has a watchdog.

- `tb_partial_qr` runs matrices of several shapes and nhat values, with NU = 2,
  so that the Evaluate stall happens. It compares every result column with a
  double-precision Householder QR that uses the same sign convention. That
  includes the zeros below the diagonal and the unreduced remainder.
- `tb_fg_accel` runs the whole design end to end, at a reduced size
  (7 keyframes, D = 4, G = 2, B = 5, NU = 2). The factor block is a linear
  measurement model inside the testbench. The test runs:
  - parallel and serial batch solves;
  - an even-length window;
  - incremental windows, in both modes;
  - the iteration limit;
  - the cost path.

  The measurements are made from a hidden true state. The test checks that
  Gauss-Newton reaches that state, within the fixed-point tolerance, and
  converges in the expected number of iterations. It also counts how often each mechanism occurred: Evaluate stalls,
  both QR engines busy at once, and both back-substitution units busy at once.
- `tb_qr_nu_sweep` puts six QR engines, with NU = 4 to 9, side by side at the
  full matrix size. They reduce the same side-job-shaped and root-job-shaped
  matrices. The test checks every result, and checks that adding Update units
  never slows a job down.
- `tb_fg_accel_full` runs the same scenarios, with the top at its default
  parameters: 30 keyframes, D = 15, G = 3, B = 21 and NU = 9.

To simulate with Verilator, for example:

```
verilator --binary --timing -Wno-fatal -Irtl --top-module tb_fg_accel \
    rtl/fg_pkg.sv rtl/*.sv tb/tb_fg_accel.sv
./obj_dir/Vtb_fg_accel
```

`tb_fg_accel_full` builds in about half a minute and runs in about five seconds.

## What is not here

- **The factor block.** It evaluates GPS, IMU and LiDAR residuals and
  Jacobians, and it sits outside the top level. Its ports are on the top: read
  X, write A_b and ε_b, handshake with `lin_req`/`lin_ack`, and stream
  residuals to the cost unit.
- **Storage of measurements and covariances.** Only the factor block would read
  them.
- **Compressing the fixed entries of the Jacobians.** The original also drops
  the fixed zero and identity entries of the IMU Jacobian, and half of the
  symmetric LiDAR block. The linear system buffer here stores them in full.
- **The accept/reject rule for a step.** The cost unit computes the cost, but
  the sequencer always accepts δ.
- **Floating point.** See *Sizes and number format*.
