// minplus_kernel -- min-plus Hamilton-Jacobi solver kernel.
//
// Solves, at a stream of query points (x, t), the optimal control problem
//     S(x,t) = min { int_0^t |x(s)|^2/2 ds + J(x(0)) :
//                    -b_i <= dx_i/ds <= a_i, x(t) = x }
// whose value is the viscosity solution of the HJ equation
//     dS/dt + sum_i H_i(dS/dx_i) - |x|^2/2 = 0,  H_i(p) = a_i p (p>=0), -b_i p,
// for the nonconvex initial cost J(u) = min_j { lam/2 ||u - y_j||^2 + alpha_j },
// j = 1..M. By the min-plus argument S = min_j S_j, where each S_j has a
// quadratic initial cost and is solved exactly, coordinate by coordinate, by
// the closed-form proximal step. The kernel therefore holds M copies of the
// quadratic building block (quad_hj_kernel) running in parallel on the same
// element stream, and a combiner that takes the smallest S_j with its
// minimiser and trajectory (paper: three copies, n up to 16).
//
// Dataflow, one coordinate per cycle:
//   in (x_i, t, s, last) -> coef_store adds a_i, b_i, y_j[i] -> M x
//   quad_hj_kernel (u_ji*, gamma_ji(s), S_j) -> minplus_combine -> result
// A point in n dimensions takes n input cycles; its result appears 11 cycles
// after its last coordinate entered (10 in the kernels, 1 in the combiner).
// M = 1 with one loaded centre is the plain quadratic-cost solver.
//
// Interface. Configuration writes (cfg_*) load a_i, b_i, y_j, alpha_j and
// lambda (see coef_store); they must not overlap a running stream. The input
// is a valid/ready stream of pt_elem_t; the output is one word per point
// (out_valid/out_ready) with S, the selected subproblem r, the dimension n and
// the vectors u* and gamma(s) of subproblem r (entries n..NMAX-1 are zero).
// The pipeline advances whenever no result is waiting or the waiting one is
// taken; otherwise everything stalls. Synchronous active-low reset.
module minplus_kernel
  import fp64_pkg::*;
  import hj_pkg::*;
#(
  parameter int unsigned NMAX = 16,
  parameter int unsigned M    = 3
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // configuration
  input  logic                      cfg_we,
  input  logic [2:0]                cfg_sel,
  input  logic [$clog2(M+1)-1:0]    cfg_j,
  input  logic [$clog2(NMAX)-1:0]   cfg_i,
  input  f64_t                      cfg_data,
  // query stream, one coordinate per element
  input  logic                      in_valid,
  output logic                      in_ready,
  input  pt_elem_t                  in_d,
  // one result per point
  output logic                      out_valid,
  input  logic                      out_ready,
  output f64_t                      out_s,
  output logic [$clog2(M+1)-1:0]    out_r,
  output logic [$clog2(NMAX+1)-1:0] out_n,
  output f64_t [NMAX-1:0]           out_u,
  output f64_t [NMAX-1:0]           out_g
);

  logic                    ce;
  f64_t                    a_i, b_i, lam;
  f64_t [M-1:0]            y_i, alpha;
  quad_elem_t [M-1:0]      k_in;
  logic [M-1:0]            k_in_ready, k_out_valid;
  quad_res_t [M-1:0]       k_out;
  f64_t [M-1:0]            k_s;

  assign ce       = out_ready || !out_valid;
  assign in_ready = ce;

  coef_store #(.NMAX(NMAX), .M(M)) u_coef (
    .clk,
    .rst_n,
    .cfg_we,
    .cfg_sel,
    .cfg_j,
    .cfg_i,
    .cfg_data,
    .adv     (in_valid && ce),
    .adv_last(in_d.last),
    .idx     (),
    .a       (a_i),
    .b       (b_i),
    .y       (y_i),
    .alpha,
    .lam
  );

  for (genvar j = 0; j < M; j++) begin : g_sub
    assign k_in[j].x    = in_d.x;
    assign k_in[j].t    = in_d.t;
    assign k_in[j].y    = y_i[j];
    assign k_in[j].a    = a_i;
    assign k_in[j].b    = b_i;
    assign k_in[j].s    = in_d.s;
    assign k_in[j].last = in_d.last;

    quad_hj_kernel u_kernel (
      .clk,
      .rst_n,
      .lam,
      .alpha    (alpha[j]),
      .in_valid,
      .in_ready (k_in_ready[j]),
      .in_d     (k_in[j]),
      .out_valid(k_out_valid[j]),
      .out_ready(ce),
      .out_d    (k_out[j]),
      .out_s    (k_s[j])
    );
  end

  minplus_combine #(.NMAX(NMAX), .M(M)) u_comb (
    .clk,
    .rst_n,
    .ce,
    .in_valid (k_out_valid[0]),
    .in_res   (k_out),
    .in_s     (k_s),
    .out_valid,
    .out_s,
    .out_r,
    .out_n,
    .out_u,
    .out_g
  );

  a_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
    (&k_in_ready || ~|k_in_ready) && (&k_out_valid || ~|k_out_valid));

  a_no_cfg_while_busy: assert property (@(posedge clk) disable iff (!rst_n)
    cfg_we |-> !in_valid);

endmodule
