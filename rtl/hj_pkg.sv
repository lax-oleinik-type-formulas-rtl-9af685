// hj_pkg -- types and constants shared by the Hamilton-Jacobi solver blocks.
//
// The solver evaluates S(x,t) = min_u { sum_i V(x_i,t;u_i,a_i,b_i) + J(u) } for
// the optimal control problem with running cost |x|^2/2 and velocity bounds
// -b_i <= dx_i/ds <= a_i. Points are streamed one coordinate (element) per
// clock cycle; these structs are the element records that travel between the
// blocks. All reals are IEEE-754 binary64 (fp64_pkg::f64_t). The sizes
// themselves (up to 16 coordinates, three quadratic pieces, four ADMM
// iterations, as in the evaluated configurations) are module parameters.
// The field layout is this design's own.
package hj_pkg;
  import fp64_pkg::*;

  // One element of the 1-D proximal problem
  //   u* = argmin_u V(x,t;u,a,b) + lam/2 (u - z)^2
  typedef struct packed {
    f64_t x;
    f64_t t;
    f64_t z;
    f64_t a;
    f64_t b;
    f64_t lam;
  } prox_in_t;

  // Its result: minimiser, objective F(u*) and value-function part V(u*).
  typedef struct packed {
    f64_t u;
    f64_t f;
    f64_t v;
  } prox_out_t;

  // Element of the quadratic-cost kernel input stream (Sec. 3.1 streams
  // (x_i, t, y_i); a_i, b_i and the trajectory time s travel with it).
  typedef struct packed {
    f64_t x;
    f64_t t;
    f64_t y;
    f64_t a;
    f64_t b;
    f64_t s;
    logic last;     // last coordinate of the current point
  } quad_elem_t;

  // Element of the kernel output stream.
  typedef struct packed {
    f64_t u;        // minimiser component u_i*
    f64_t f;        // F_i(u_i*) = V_i + lam/2 (u_i* - y_i)^2
    f64_t g;        // trajectory component gamma_i(s)
    logic last;
  } quad_res_t;

  // Element of the top-level input stream (min-plus kernel of Sec. 3.3
  // streams (x_i, t); s is the trajectory time).
  typedef struct packed {
    f64_t x;
    f64_t t;
    f64_t s;
    logic last;
  } pt_elem_t;

  // Element of the ADMM iterate stream (Sec. 3.2): the point (x_i, t), its
  // constants and the iterates v_i, d_i, w_i travel together between the
  // unrolled ADMM iterations; fv is V(x_i,t;d_i,a_i,b_i) for the current d_i.
  typedef struct packed {
    f64_t x;
    f64_t t;
    f64_t s;
    f64_t a;
    f64_t b;
    f64_t v;
    f64_t d;
    f64_t w;
    f64_t fv;
    logic last;
  } admm_elem_t;

endpackage
