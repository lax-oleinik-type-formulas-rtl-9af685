# Streaming FPGA solvers for control-constrained Hamilton-Jacobi problems

This RTL evaluates, point by point, the solution S(x, t) of a family of
high-dimensional Hamilton-Jacobi equations. It also returns the optimal
control trajectory gamma(s) that ends at x at time t. The equations come
from optimal control problems with a running cost quadratic in the state and
a box constraint on the velocity: coordinate i moves with velocity in
[-b_i, a_i].

For these problems a Lax-Oleinik-type formula gives the solution exactly.
It minimises, over the trajectory's starting point u,

    S(x,t) = min_u { sum_i V(x_i, t; u_i, a_i, b_i) + J(u) },

where J is the initial cost. V is an explicit one-dimensional cost: piecewise
cubic in (x, u, t), and infinite outside u_i in [x_i - a_i t, x_i + b_i t].
No grid or time stepping is involved. Everything reduces to one-dimensional
proximal problems,

    u* = argmin_{u in [x-at, x+bt]} V(x,t;u,a,b) + lambda/2 (u - z)^2,

and these have closed-form solutions.

The design contains three solvers built on that one primitive:

* **Quadratic initial cost.** For J(u) = lambda/2 ||u - y||^2 + alpha, the
  problem splits into n independent proximal problems, one per coordinate.
  This is the building block.
* **Min of quadratics.** For J(u) = min_j { lambda/2 ||u - y_j||^2 + alpha_j },
  which is nonconvex, it runs one building block per piece j in parallel and
  takes the smallest result.
* **ADMM.** For J(u) = 1/2 ||u - 1||_1^2, which is convex but not separable,
  it runs a fixed number of unrolled ADMM iterations. Each iteration uses the
  building block for its per-coordinate step.

All arithmetic is IEEE-754 double precision. Points stream in one coordinate
per cycle.

## The one-dimensional proximal step (`prox1d_pipe`)

This is the heart of the design and the hardest part to follow.

The objective F(u) = V(u) + lambda/2 (u - z)^2 is strictly convex on
[x - at, x + bt]. V has up to three smooth pieces:

* a cubic in u and x on the region where the trajectory never stops at 0;
* u^3/(6b) + x^3/(6a) where it rests at 0 and then moves right;
* u^3/(6b) - x^3/(6b) where it rests at 0 and then moves left.

Negative u is handled by mirror symmetry, (x, u, a, b) -> (-x, -u, b, a).

Setting the derivative of each piece to zero gives a quadratic equation in u.
So the minimiser is one of six candidates:

* the roots u1, u2 of the two non-mirrored pieces;
* the mirrored roots u1', u2';
* the two interval ends x - at and x + bt.

Rather than decide analytically which region holds, the pipeline evaluates
all six candidates and keeps the one with the smallest F. V is evaluated in
a branch-free form: max{V3, min{V1, V2}} for u >= 0, and the mirrored form
for u < 0. It is +inf outside the interval.

The nine stages are:

1. Products of the inputs.
2. Square-root arguments.
3. Square roots.
4. The six candidates.
5. Their cubes.
6. The sign mirror of each candidate.
7. The three V pieces.
8. F for each candidate.
9. The argmin.

Ties go to the first candidate in the order above. The block accepts one
element per cycle and returns u*, F(u*) and V(u*) nine cycles later. An
opaque tag travels with each element, so callers can carry side data through
the pipe.

`traj1d` turns u* into gamma_i(s) in one cycle. The three path shapes are:

* move straight;
* move to 0, wait, then move right;
* move to 0, wait, then move left.

Each shape is written as a min/max expression, selected by the signs of x
and u.

## Quadratic kernel (`quad_hj_kernel`)

An element (x_i, t, y_i, a_i, b_i, s, last) passes through:

1. `prox1d_pipe`, with z = y_i.
2. `traj1d` and `hj_accum` in parallel. `hj_accum` sums F_i over the point
   and adds alpha.

A point of n coordinates takes n consecutive cycles. Its S leaves with the
last output element, 10 cycles after that element entered.

The pipeline has one clock enable, `ce = out_ready`, so back-pressure freezes
every stage. `in_ready` equals `out_ready`.

## Min-plus kernel (`minplus_kernel`)

For each coordinate, `coef_store` attaches the stored constants to the
incoming (x_i, t, s) element. The constants are a_i, b_i, the centres
y_j[i], the offsets alpha_j and lambda. Its element counter resets on the
`last` flag.

M = 3 quadratic kernels run in lockstep. `minplus_combine` buffers their
element results. When a point ends, it selects r = argmin_j S_j, with the
lowest j winning ties. It then presents one record per point: S, r, n, and
the vectors u* and gamma(s) of piece r, zero beyond n.

The result comes 11 cycles after the point's last coordinate. The input
rate is one coordinate per cycle.

The constants are written through `cfg_we`/`cfg_sel`/`cfg_j`/`cfg_i`/`cfg_data`.
`cfg_sel` selects:

| `cfg_sel` | Value written |
|---|---|
| 0 | a |
| 1 | b |
| 2 | y_j |
| 3 | alpha_j |
| 4 | lambda |

Write them only while the kernel is idle; an assertion checks this. With
M = 1 and alpha = 0, this kernel is the plain quadratic solver.

## ADMM kernel (`admm_kernel`, `admm_iter`)

Each iteration (`admm_iter`) performs three updates:

* **v-update.** Proximal point of J/lambda at d - w. For
  J = 1/2 ||. - 1||_1^2, let z = d - w - 1. The solution is a soft threshold:

      v_i = 1 + sign(z_i) max(|z_i| - theta, 0),
      theta = max_k S_k / (lambda + k),

  where S_k is the sum of the k largest |z_i|. (The optimality condition is
  lambda theta = sum_i max(|z_i| - theta, 0). On the true active set,
  theta = S_k/(lambda + k); for any other k the ratio is smaller.)
* **d-update.** d_i = prox step of the building block with z = v_i + w_i.
* **w-update.** w_i = w_i + v_i - d_i.

The v-update needs the whole vector before any coordinate can proceed. So
an iteration stage has three phases:

| Phase | Cycles | What happens |
|---|---|---|
| COLLECT | n | Buffer the point's n records (x, t, s, a, b, v, d, w). |
| THETA | n | Candidate k = rank of coordinate j: sum the |z_i| ranked at or above it, divide by lambda + k, keep the maximum. |
| EMIT | n | Send the records through a private `prox1d_pipe`; w is formed at its output. |

`admm_kernel` has three parts:

* an input stage that widens (x_i, t, s) into the iterate record, with
  d = x, w = 0, and a_i, b_i from a `coef_store`;
* N_ITER chained iteration stages;
* an output stage, which accumulates sum_i V_i and sum_i |d_i - 1|, forms
  S = sum V + 1/2 (sum |d - 1|)^2 on the last element, and computes gamma
  through `traj1d`.

Timing:

* An isolated point of n coordinates leaves n + N_ITER (2n + 9) cycles
  after its first coordinate enters. That is 180 cycles for n = 16 and
  N_ITER = 4, or 45 per iteration.
* A stream of n-coordinate points moves at one point per 3n + 9 cycles,
  with each stage holding a different point.

There is no tolerance test. The hardware always runs N_ITER iterations and
returns u = d^N.

## Top level (`hj_fpga_top`)

`hj_fpga_top` holds one min-plus kernel (`mp_*` ports) and one ADMM kernel
(`ad_*` ports). They share only clock and reset. Point streams enter as
`pt_elem_t`, with fields x, t, s and last.

Defaults:

| Parameter | Default |
|---|---|
| NMAX (largest dimension) | 16 |
| M (quadratic pieces) | 3 |
| N_ITER (ADMM iterations) | 4 |

## Arithmetic (`fp64_pkg`)

The package holds binary64 add, multiply, divide, square root, compare and
min/max. Each is written as a combinational function and called from
pipeline stages, so one stage may chain several operations.

* Rounding is to nearest, ties to even.
* Subnormals are flushed to zero.
* NaN is never produced. Square roots of negative arguments return 0, and
  those candidates are discarded.
* +inf marks "outside the domain".

The functions are exact at the bit level, but they are not timing-optimised.
A stage chaining several double-precision divides will not close timing at
300 MHz on an FPGA. A production version would retime the stages into deeper
pipelines of vendor floating-point cores. The interfaces would not change,
only the latencies.

## Where this design departs from the reference implementation

The original solvers were FPGA kernels generated by high-level synthesis for
an Alveo U280 at 300 MHz. This RTL reproduces their function and streaming
structure with its own micro-architecture:

* **Latencies.**
  * The quadratic and min-plus kernels have a 10- and 11-cycle pipeline
    depth. The reference reports depths of roughly 224-288 cycles: for
    example, 400,224 cycles for 100,000 points at n = 4.
  * Throughput is the same: one coordinate per cycle.
* **ADMM schedule.** The reference streams the iterates between unrolled
  iterations, in one of two ways:
  * a single stream of doubles (high throughput; interval at least 4n + 1
    per point);
  * separate streams (low latency; 92.8 cycles per iteration at n = 16).

  Here each coordinate's record travels as one wide word. The iteration
  costs 2n + 9 cycles of latency and 3n + 9 cycles of interval.
* **Iteration count.** The reference's N depends on the dimension and the
  variant:

  | n | Low latency N | High throughput N |
  |---|---|---|
  | 4 | 9 | 8 |
  | 8 | 7 | 4 |
  | 12 | 5 | 3 |
  | 16 | 4 | 2 |

  Here N_ITER is a parameter with default 4.
* **The quadratic kernel at the top.** The reference's quadratic-cost
  kernel takes the centre y_i in its input stream, element by element.
  `quad_hj_kernel` does the same. At the top level, however, it is used only
  inside the min-plus kernel, where the centres come from the constant
  store. The quadratic example J = 1/2 ||x - 1||^2 therefore runs at the top
  as the min-plus kernel with y_1 = 1, alpha_1 = 0 and the other pieces given
  a large alpha, or directly on `quad_hj_kernel`.
* **One top.** Both kernel types sit in one top. The reference builds each
  as its own FPGA image.
* **Board not modelled.** The board shell, host link and HBM data movers
  are not modelled; the streams are ports.
* **Handshake.** Valid/ready with a global stall. The reference uses HLS
  streams.

## Verification

Each module has a self-checking testbench in `tb/`. The reference model
(`tb/hj_ref_pkg.sv`) works in `real` arithmetic and is deliberately
independent of the datapath:

* V comes from its region-by-region definition.
* u* comes from a 200-step ternary search over the interval.
* gamma comes from the three trajectory cases.
* The ADMM v-update threshold comes from bisection on
  lambda theta = sum max(|z_i| - theta, 0).

| Testbench | What it checks |
|---|---|
| `fp64_pkg_tb` | Random operands compared bit for bit with the simulator's own IEEE `real` results. |
| `prox1d_pipe_tb`, `traj1d_tb`, `hj_accum_tb` | Random elements, with stalls. |
| `quad_hj_kernel_tb` | Quadratic example, II = 1 and 10-cycle latency, then random traffic with back-pressure. |
| `coef_store_tb`, `minplus_combine_tb` | Table writes and reads; argmin selection and padding. |
| `minplus_kernel_tb` | Min-plus example; II, 11-cycle latency and mechanism counters. |
| `admm_iter_tb` | One iteration against the reference, exact 3n + 8 point timing. |
| `admm_kernel_tb` | Four iterations on the l1-squared example; latency, 3n + 9 interval, stalls. |
| `hj_fpga_top_tb` | Both kernels at full default size, concurrently. |

The example workloads are:

* **Min-plus.** y_1 = (-2, 0, ...), y_2 = (2, -2, -1, 0, ...),
  y_3 = (0, 2, 0, ...), alpha = (-0.5, 0, -1).
* **ADMM.** J = 1/2||x - 1||_1^2.
* **Both.** a = (4, 6, 5, ..., 5), b = (3, 9, 6, ..., 6), lambda = 1,
  x in [-4, 4]^n, t in [0, 0.5], n in {4, 8, 12, 16}.

`hj_fpga_top_tb` counts each mechanism and fails if one never occurred:

* output stalls on both kernels;
* each piece winning the minimum;
* each dimension;
* t = 0;
* minimisers at an interval end and inside;
* both signs of u*;
* shrunk and clamped coordinates in the v-update.

Typical tolerances are 1e-5 relative on minimisers (the reference search
limits this) and 1e-9 on V.

To run a testbench with Verilator (5.x), list the packages first:

    verilator --binary --timing --assert rtl/fp64_pkg.sv rtl/hj_pkg.sv \
        tb/hj_ref_pkg.sv rtl/*.sv tb/hj_fpga_top_tb.sv \
        --top-module hj_fpga_top_tb -Wno-fatal
    ./obj_dir/Vhj_fpga_top_tb

Each testbench ends with a line `TB_RESULT checks=N failures=F`.

The large combinational floating-point functions make C++ compilation slow:
several minutes for the kernel-level testbenches.
