// admm_kernel -- ADMM solver kernel for the non-separable initial cost
// J(u) = 1/2 ||u - 1||_1^2 (paper, Sec. 3.2 and Algorithm 1).
//
// What it does. For each point (x, t) in n <= NMAX dimensions it runs N_ITER
// ADMM iterations starting from d^0 = x, w^0 = 0 (as in Algorithm 1), then
// returns
//   u* = d^N                         (element stream, one coordinate/cycle)
//   gamma_i(s) from u_i*             (trajectory, via traj1d)
//   S(x,t) = sum_i V(x_i,t;d_i,a_i,b_i) + 1/2 (sum_i |d_i - 1|)^2.
// lam comes from the coefficient store (reset value 1.0, the paper's choice).
//
// How it works. The input stream is pt_elem_t (x_i, t, s); a_i and b_i are
// read from a coef_store (M = 1 set) indexed by the coordinate count, and the
// element is widened to the ADMM iterate record (d = x, w = 0). N_ITER
// admm_iter blocks are chained, each one a full iteration (v-update of the
// whole vector, then the per-coordinate proximal d-update). The output stage
// accumulates sum V and sum |d - 1| over the elements of the point and feeds
// the trajectory unit; S is formed on the last element.
//
// Paper versus this design. The paper unrolls a fixed number of iterations N
// chosen by FPGA resources (N = 9/7/5/4 for n = 4/8/12/16 in the low-latency
// kernel, 8/4/3/2 in the high-throughput one); N_ITER defaults to 4, the
// low-latency value for n = 16 (= NMAX). The tolerance test of Algorithm 1
// (eps = 1e-8) is not applied: like the paper's unrolled kernels, the
// hardware always runs N_ITER iterations. Returning gamma(s) from d^N and the
// stream/handshake structure are this design's own.
//
// Interface and timing. cfg_* writes a (cfg_sel 0), b (1) or lam (4) for
// coordinate cfg_i while the kernel is idle. Input and output are valid/ready
// element streams; a point is n consecutive elements with the last flag on
// the final one. An isolated point leaves n + N_ITER (2n + 9) cycles after its
// first element entered (180 cycles for n = 16, N_ITER = 4, i.e. 45 cycles
// per iteration); a stream of n-coordinate points moves at one point per
// 3n + 9 cycles, each iteration stage holding a different point. out_s is valid
// with the output element whose last flag is set. Synchronous active-low reset.
// Lint notes: the store's y/alpha tables (M = 1) and the element index are
// not used by this kernel, nor are the v/w fields of the final iterate.
module admm_kernel
  import fp64_pkg::*;
  import hj_pkg::*;
#(
  parameter int unsigned NMAX   = 16,
  parameter int unsigned N_ITER = 4
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // configuration
  input  logic                    cfg_we,
  input  logic [2:0]              cfg_sel,
  input  logic [$clog2(NMAX)-1:0] cfg_i,
  input  f64_t                    cfg_data,
  // point stream
  input  logic                    in_valid,
  output logic                    in_ready,
  input  pt_elem_t                in_d,
  // result stream
  output logic                    out_valid,
  input  logic                    out_ready,
  output quad_res_t               out_d,
  output f64_t                    out_s
);

  f64_t c_a, c_b, c_lam;
  f64_t [0:0] c_y, c_alpha;

  coef_store #(.NMAX(NMAX), .M(1)) u_coef (
    .clk,
    .rst_n,
    .cfg_we,
    .cfg_sel,
    .cfg_j   (1'b0),
    .cfg_i,
    .cfg_data,
    .adv     (in_valid && in_ready),
    .adv_last(in_d.last),
    .idx     (),
    .a       (c_a),
    .b       (c_b),
    .y       (c_y),
    .alpha   (c_alpha),
    .lam     (c_lam)
  );

  // chain of iterations: stage k's input is it_d[k]
  logic       [N_ITER:0] it_valid, it_ready;
  admm_elem_t [N_ITER:0] it_d;

  always_comb begin
    it_d[0]      = '0;
    it_d[0].x    = in_d.x;
    it_d[0].t    = in_d.t;
    it_d[0].s    = in_d.s;
    it_d[0].a    = c_a;
    it_d[0].b    = c_b;
    it_d[0].d    = in_d.x;
    it_d[0].last = in_d.last;
  end
  assign it_valid[0] = in_valid;
  assign in_ready    = it_ready[0];

  for (genvar k = 0; k < N_ITER; k++) begin : g_iter
    admm_iter #(.NMAX(NMAX)) u_iter (
      .clk,
      .rst_n,
      .lam      (c_lam),
      .in_valid (it_valid[k]),
      .in_ready (it_ready[k]),
      .in_d     (it_d[k]),
      .out_valid(it_valid[k+1]),
      .out_ready(it_ready[k+1]),
      .out_d    (it_d[k+1])
    );
  end

  // ------------------------------------------------------------ output stage
  typedef struct packed {
    f64_t u, f, s;
    logic last;
  } res_tag_t;

  logic       ce;
  admm_elem_t fin;
  f64_t       sum_v, sum_l, sum_v_n, sum_l_n, s_pt;
  res_tag_t   t_in, t_out;

  assign ce                 = out_ready;
  assign it_ready[N_ITER]   = ce;
  assign fin                = it_d[N_ITER];

  always_comb begin
    sum_v_n = f_add(sum_v, fin.fv);
    sum_l_n = f_add(sum_l, f_abs(f_sub(fin.d, F64_ONE)));
    s_pt    = f_add(sum_v_n, f_mul(F64_HALF, f_mul(sum_l_n, sum_l_n)));
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      sum_v <= F64_ZERO;
      sum_l <= F64_ZERO;
    end else if (ce && it_valid[N_ITER]) begin
      sum_v <= fin.last ? F64_ZERO : sum_v_n;
      sum_l <= fin.last ? F64_ZERO : sum_l_n;
    end
  end

  assign t_in.u    = fin.d;
  assign t_in.f    = fin.fv;
  assign t_in.s    = s_pt;
  assign t_in.last = fin.last;

  traj1d #(.TAG_W($bits(res_tag_t))) u_traj (
    .clk,
    .rst_n,
    .ce,
    .in_valid (it_valid[N_ITER]),
    .in_x     (fin.x),
    .in_t     (fin.t),
    .in_u     (fin.d),
    .in_a     (fin.a),
    .in_b     (fin.b),
    .in_s     (fin.s),
    .in_tag   (t_in),
    .out_valid,
    .out_g    (out_d.g),
    .out_tag  (t_out)
  );

  assign out_d.u    = t_out.u;
  assign out_d.f    = t_out.f;
  assign out_d.last = t_out.last;
  assign out_s      = t_out.s;

  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
    (out_valid && !out_ready) |=> (out_valid && $stable(out_d)));

endmodule
