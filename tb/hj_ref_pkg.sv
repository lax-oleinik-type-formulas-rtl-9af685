// hj_ref_pkg -- reference model (real arithmetic) shared by the testbenches.
//
// It is written from the original region-by-region definition of the
// one-dimensional value function V(x,t;u,a,b) (regions Omega_1..Omega_3 for
// u >= 0, mirror symmetry for u < 0) and of the optimal trajectory, not from
// the branch-reduced forms the hardware uses, and it finds the proximal point
// by ternary search over [x-at, x+bt] instead of by the candidate formulas.
// That keeps the reference independent of the datapath it checks.
package hj_ref_pkg;

  localparam real INF = 1.0e300;

  function automatic real absr(real v);
    return v < 0 ? -v : v;
  endfunction

  function automatic real cube(real v);
    return v * v * v;
  endfunction

  // V(x,t;u,a,b) for u >= 0
  function automatic real v_pos(real x, real t, real u, real a, real b);
    real tb, eps;
    tb  = u / b;
    // slack on the outer domain ends absorbs rounding of x-at, x+bt
    eps = 1.0e-12 * (1.0 + absr(x) + absr(u));
    if ((t < tb && x >= u - b * t - eps && x <= u + a * t + eps) ||
        (t >= tb && x >= a * t - a * u / b && x <= u + a * t + eps))
      return cube(u) / (6 * b) + cube(x) / (6 * a)
             - (1.0 / (6 * a) + 1.0 / (6 * b)) * cube((a * u + b * x - a * b * t) / (a + b));
    if (t >= tb && x >= 0 && x < a * t - a * u / b)
      return cube(u) / (6 * b) + cube(x) / (6 * a);
    if (t >= tb && x >= u - b * t - eps && x < 0)
      return cube(u) / (6 * b) - cube(x) / (6 * b);
    return INF;
  endfunction

  function automatic real v_ref(real x, real t, real u, real a, real b);
    if (u >= 0) return v_pos(x, t, u, a, b);
    return v_pos(-x, t, -u, b, a);
  endfunction

  function automatic real f_ref(real x, real t, real u, real a, real b,
                                real lam, real z);
    real v;
    v = v_ref(x, t, u, a, b);
    if (v >= INF) return INF;
    return v + lam / 2 * (u - z) * (u - z);
  endfunction

  // argmin of the strictly convex F over [x-at, x+bt] by ternary search
  function automatic real prox_ref(real x, real t, real z, real a, real b,
                                   real lam);
    real lo, hi, m1, m2;
    lo = x - a * t;
    hi = x + b * t;
    for (int i = 0; i < 200; i++) begin
      m1 = lo + (hi - lo) / 3;
      m2 = hi - (hi - lo) / 3;
      if (f_ref(x, t, m1, a, b, lam, z) < f_ref(x, t, m2, a, b, lam, z)) hi = m2;
      else lo = m1;
    end
    return (lo + hi) / 2;
  endfunction

  // gamma(s;x,t,u,a,b) for u >= 0, from the three trajectory cases
  function automatic real g_pos(real s, real x, real t, real u, real a, real b);
    if (u / b > t || x >= a * t - a * u / b) begin     // Omega_1
      if (s < (-x + u + a * t) / (a + b)) return u - b * s;
      return a * (s - t) + x;
    end
    if (x >= 0) begin                                   // Omega_2
      if (s < u / b) return u - b * s;
      if (s < t - x / a) return 0.0;
      return a * (s - t) + x;
    end
    if (s < u / b) return u - b * s;                    // Omega_3
    if (s < t + x / b) return 0.0;
    return -b * (s - t) + x;
  endfunction

  function automatic real g_ref(real s, real x, real t, real u, real a, real b);
    if (u >= 0) return g_pos(s, x, t, u, a, b);
    return -g_pos(s, -x, t, -u, b, a);
  endfunction


  // Threshold of the v-update for J(v) = 1/2 ||v - 1||_1^2: the theta >= 0
  // with lam*theta = sum_i max(m_i - theta, 0), found by bisection.
  function automatic real theta_ref(real m[16], int n, real lam);
    real lo, hi, mid, g;
    lo = 0.0;
    hi = 0.0;
    for (int i = 0; i < n; i++) if (m[i] > hi) hi = m[i];
    for (int it = 0; it < 200; it++) begin
      mid = (lo + hi) / 2;
      g = lam * mid;
      for (int i = 0; i < n; i++) if (m[i] > mid) g = g - (m[i] - mid);
      if (g < 0) lo = mid;
      else hi = mid;
    end
    return (lo + hi) / 2;
  endfunction

  // v_i = argmin over v of the v-update for c_i = d_i - w_i
  function automatic real vupd_ref(real c, real theta);
    real z;
    z = c - 1.0;
    if (z > theta)  return 1.0 + z - theta;
    if (z < -theta) return 1.0 + z + theta;
    return 1.0;
  endfunction

  function automatic logic close(real got, real exp_v, real rel);
    return absr(got - exp_v) <= rel * (1.0 + absr(exp_v));
  endfunction

endpackage
