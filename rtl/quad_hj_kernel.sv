// quad_hj_kernel -- streaming solver for a quadratic initial cost (the
// building block of the design).
//
// For J(u) = lam/2 ||u - y||^2 + alpha the Lax-Oleinik-type formula splits
// into one independent proximal problem per coordinate, so a point (x, t, y)
// in n dimensions is streamed one coordinate per cycle: element i carries
// x_i, t, y_i, the velocity bounds a_i, b_i and the trajectory time s. Each
// element passes through
//   prox1d_pipe  u_i* and F_i = V_i + lam/2 (u_i* - y_i)^2   (9 cycles)
//   traj1d       gamma_i(s) from u_i*                         (1 cycle)
//   hj_accum     S(x,t) = sum_i F_i + alpha                   (1 cycle, in
//                parallel with traj1d)
// so an n-dimensional point occupies the kernel for n cycles (initiation
// interval 1 per element, as in the paper) and its value S appears together
// with its last output element, LAT = 10 cycles after that element entered.
// Streaming elementwise at II 1 and the block's function follow the paper;
// the stage split, the field layout and the handshake are this design's own.
//
// Interface. Input and output are valid/ready streams. The whole pipeline
// advances on cycles where out_ready is high; in_ready equals out_ready, so
// a stalled output freezes every stage (a global stall, no skid buffer).
// out_s is meaningful on the output element whose last flag is set. lam and
// alpha are static configuration. Synchronous active-low reset. The V(u*)
// output of the proximal pipeline is not needed here (F already includes it),
// so lint reports those bits of p_out as unused.
module quad_hj_kernel
  import fp64_pkg::*;
  import hj_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  f64_t       lam,
  input  f64_t       alpha,
  input  logic       in_valid,
  output logic       in_ready,
  input  quad_elem_t in_d,
  output logic       out_valid,
  input  logic       out_ready,
  output quad_res_t  out_d,
  output f64_t       out_s
);


  typedef struct packed {
    f64_t x, t, a, b, s;
    logic last;
  } side_t;

  typedef struct packed {
    f64_t u, f;
    logic last;
  } res_tag_t;

  logic      ce;
  prox_in_t  p_in;
  side_t     p_side_in, p_side_out;
  logic      p_valid;
  prox_out_t p_out;
  res_tag_t  t_tag_in, t_tag_out;
  logic      t_valid;
  f64_t      t_g;
  logic      a_valid;

  assign ce       = out_ready;
  assign in_ready = ce;

  assign p_in.x   = in_d.x;
  assign p_in.t   = in_d.t;
  assign p_in.z   = in_d.y;
  assign p_in.a   = in_d.a;
  assign p_in.b   = in_d.b;
  assign p_in.lam = lam;

  assign p_side_in.x    = in_d.x;
  assign p_side_in.t    = in_d.t;
  assign p_side_in.a    = in_d.a;
  assign p_side_in.b    = in_d.b;
  assign p_side_in.s    = in_d.s;
  assign p_side_in.last = in_d.last;

  prox1d_pipe #(.TAG_W($bits(side_t))) u_prox (
    .clk,
    .rst_n,
    .ce,
    .in_valid,
    .in_d     (p_in),
    .in_tag   (p_side_in),
    .out_valid(p_valid),
    .out_d    (p_out),
    .out_tag  (p_side_out)
  );

  assign t_tag_in.u    = p_out.u;
  assign t_tag_in.f    = p_out.f;
  assign t_tag_in.last = p_side_out.last;

  traj1d #(.TAG_W($bits(res_tag_t))) u_traj (
    .clk,
    .rst_n,
    .ce,
    .in_valid (p_valid),
    .in_x     (p_side_out.x),
    .in_t     (p_side_out.t),
    .in_u     (p_out.u),
    .in_a     (p_side_out.a),
    .in_b     (p_side_out.b),
    .in_s     (p_side_out.s),
    .in_tag   (t_tag_in),
    .out_valid(t_valid),
    .out_g    (t_g),
    .out_tag  (t_tag_out)
  );

  hj_accum u_acc (
    .clk,
    .rst_n,
    .ce,
    .alpha,
    .in_valid (p_valid),
    .in_f     (p_out.f),
    .in_last  (p_side_out.last),
    .out_valid(a_valid),
    .out_s
  );

  assign out_valid  = t_valid;
  assign out_d.u    = t_tag_out.u;
  assign out_d.f    = t_tag_out.f;
  assign out_d.g    = t_g;
  assign out_d.last = t_tag_out.last;

  // The point value must come out with the last element of its point.
  a_sum_aligned: assert property (@(posedge clk) disable iff (!rst_n)
    a_valid == (t_valid && t_tag_out.last));

  // Valid/ready rule: a presented output stays until taken.
  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
    (out_valid && !out_ready) |=> (out_valid && $stable(out_d)));

endmodule
