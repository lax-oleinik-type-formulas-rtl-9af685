// prox1d_pipe -- streaming solver of the one-dimensional proximal problem
//
//     u* = argmin_{u in [x-a t, x+b t]}  V(x,t;u,a,b) + lam/2 (u - z)^2
//
// which is the building block of every solver in this design (one instance
// per coordinate stream).
//
// How it works. The objective F is strictly convex and piecewise cubic in u,
// so its minimiser is one of six candidates: the two stationary points u1, u2
// of the pieces with u >= 0, the two stationary points u1', u2' of the pieces
// with u < 0, and the two ends x-at and x+bt of the domain. A candidate whose
// radicand is negative is replaced by x-at. F is evaluated at all six and the
// smallest value wins (the lowest candidate index wins a tie). V is evaluated
// with the branch-reduced form
//     V = max{V3, min{V1, V2}}            for 0 <= u <= x+bt
//     V(x,t;u,a,b) = V(-x,t;-u,b,a)       for x-at <= u < 0
//     V = +inf                            otherwise,
// where V1, V2, V3 are the three cubic pieces
//     V1 = u^3/(6b) + x^3/(6a) - (1/(6a)+1/(6b)) ((a u + b x - a b t)/(a+b))^3
//     V2 = u^3/(6b) + x^3/(6a),   V3 = u^3/(6b) - x^3/(6b).
// The candidate formulas, the candidate set and the branch-reduced form of V
// are the paper's; the split into pipeline stages is this design's own.
//
// Interface. in_valid/in_d are sampled on a rising clock edge when ce is high;
// the result appears on out_valid/out_d LAT = 9 enabled cycles later. When ce
// is low every stage holds (the caller's stall). A tag of TAG_W bits travels
// with each element unchanged so callers can carry side information.
// Throughput is one element per enabled cycle (initiation interval 1).
// Reset (active low, synchronous) clears only the valid bits.
module prox1d_pipe
  import fp64_pkg::*;
  import hj_pkg::*;
#(
  parameter int unsigned TAG_W = 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             ce,
  input  logic             in_valid,
  input  prox_in_t         in_d,
  input  logic [TAG_W-1:0] in_tag,
  output logic             out_valid,
  output prox_out_t        out_d,
  output logic [TAG_W-1:0] out_tag
);

  localparam int unsigned LAT = 9;
  localparam int unsigned NC  = 6;   // number of candidates

  // ---------------------------------------------------------------- stage 1
  typedef struct packed {
    f64_t x, z, a, b, hl;
    f64_t p, q;          // domain ends x-at, x+bt
    f64_t apb, d1, d2;   // a+b, 2a+b, a+2b
    f64_t lb, la, abt;   // lam*b, lam*a, a*b*t
    f64_t lam;
  } st1_t;

  // ---------------------------------------------------------------- stage 2
  typedef struct packed {
    f64_t x, z, a, b, hl, p, q, lb, la, abt;
    f64_t lam2;          // lam (a+b)^2
    f64_t iab, ia6, ib6, id1, id2;
    f64_t dd2, dd2n;     // radicands of u2, u2'
  } st2_t;

  // ---------------------------------------------------------------- stage 3
  typedef struct packed {
    f64_t x, z, hl, p, q, abt, iab, ia6, ib6, a, b;
    f64_t a1, c1, b1, c1n, k;
    f64_t u2, u2n;
  } st3_t;

  // ---------------------------------------------------------------- stage 4
  typedef struct packed {
    f64_t x, z, hl, p, q, abt, iab, ia6, ib6, a, b, k;
    f64_t a1, b1, dd1, dd1n, u2, u2n;
  } st4_t;

  // ---------------------------------------------------------------- stage 5
  typedef struct packed {
    f64_t x, z, hl, p, q, abt, iab, ia6, ib6, a, b, k;
    f64_t [NC-1:0] c;     // candidates u1, u2, u1', u2', x-at, x+bt
  } st5_t;

  // ------------------------------------------------------ stage 6 (per cand.)
  typedef struct packed {
    f64_t c, u3, x3, w, ia6s, ib6s, dq;
    logic in_dom;
  } cand6_t;
  typedef struct packed {
    f64_t hl, k;
    cand6_t [NC-1:0] e;
  } st6_t;

  // ------------------------------------------------------ stage 7 (per cand.)
  typedef struct packed {
    f64_t c, v2, v3, w3, qd;
    logic in_dom;
  } cand7_t;
  typedef struct packed {
    f64_t k;
    cand7_t [NC-1:0] e;
  } st7_t;

  // ------------------------------------------------------ stage 8 (per cand.)
  typedef struct packed {
    f64_t c, v, f;
  } cand8_t;
  typedef struct packed {
    cand8_t [NC-1:0] e;
  } st8_t;

  st1_t r1, n1;
  st2_t r2, n2;
  st3_t r3, n3;
  st4_t r4, n4;
  st5_t r5, n5;
  st6_t r6, n6;
  st7_t r7, n7;
  st8_t r8, n8;
  prox_out_t r9, n9;

  logic [LAT-1:0]            vld;
  logic [LAT-1:0][TAG_W-1:0] tag;

  // stage 1: domain ends and coefficient sums
  always_comb begin
    n1.x   = in_d.x;
    n1.z   = in_d.z;
    n1.a   = in_d.a;
    n1.b   = in_d.b;
    n1.lam = in_d.lam;
    n1.hl  = f_mul(in_d.lam, F64_HALF);
    n1.p   = f_sub(in_d.x, f_mul(in_d.a, in_d.t));
    n1.q   = f_add(in_d.x, f_mul(in_d.b, in_d.t));
    n1.apb = f_add(in_d.a, in_d.b);
    n1.d1  = f_add(f_twice(in_d.a), in_d.b);
    n1.d2  = f_add(in_d.a, f_twice(in_d.b));
    n1.lb  = f_mul(in_d.lam, in_d.b);
    n1.la  = f_mul(in_d.lam, in_d.a);
    n1.abt = f_mul(f_mul(in_d.a, in_d.b), in_d.t);
  end

  // stage 2: reciprocals, lam (a+b)^2 and the radicands of u2, u2'
  always_comb begin
    n2.x    = r1.x;
    n2.z    = r1.z;
    n2.a    = r1.a;
    n2.b    = r1.b;
    n2.hl   = r1.hl;
    n2.p    = r1.p;
    n2.q    = r1.q;
    n2.lb   = r1.lb;
    n2.la   = r1.la;
    n2.abt  = r1.abt;
    n2.lam2 = f_mul(r1.lam, f_mul(r1.apb, r1.apb));
    n2.iab  = f_div(F64_ONE, r1.apb);
    n2.ia6  = f_div(F64_ONE, f_mul(F64_SIX, r1.a));
    n2.ib6  = f_div(F64_ONE, f_mul(F64_SIX, r1.b));
    n2.id1  = f_div(F64_ONE, r1.d1);
    n2.id2  = f_div(F64_ONE, r1.d2);
    // (lam b)^2 + 2 lam b z  and  (lam a)^2 - 2 lam a z
    n2.dd2  = f_add(f_mul(r1.lb, r1.lb), f_twice(f_mul(r1.lb, r1.z)));
    n2.dd2n = f_sub(f_mul(r1.la, r1.la), f_twice(f_mul(r1.la, r1.z)));
  end

  // stage 3: coefficients of u1, u1'; the candidates u2, u2'
  always_comb begin
    f64_t lz2;
    n3.x   = r2.x;
    n3.z   = r2.z;
    n3.hl  = r2.hl;
    n3.p   = r2.p;
    n3.q   = r2.q;
    n3.abt = r2.abt;
    n3.iab = r2.iab;
    n3.ia6 = r2.ia6;
    n3.ib6 = r2.ib6;
    n3.a   = r2.a;
    n3.b   = r2.b;
    lz2    = f_twice(f_mul(r2.lam2, r2.z));
    // A1 = (lam(a+b)^2 - a(x-at)) / (2a+b)
    n3.a1  = f_mul(f_sub(r2.lam2, f_mul(r2.a, r2.p)), r2.id1);
    // C1 = (b(x-at)^2 + 2 lam (a+b)^2 z) / (2a+b)
    n3.c1  = f_mul(f_add(f_mul(r2.b, f_mul(r2.p, r2.p)), lz2), r2.id1);
    // B1 = (lam(a+b)^2 + b(x+bt)) / (a+2b)
    n3.b1  = f_mul(f_add(r2.lam2, f_mul(r2.b, r2.q)), r2.id2);
    // C1' = (a(x+bt)^2 - 2 lam (a+b)^2 z) / (a+2b)
    n3.c1n = f_mul(f_sub(f_mul(r2.a, f_mul(r2.q, r2.q)), lz2), r2.id2);
    n3.k   = f_add(r2.ia6, r2.ib6);
    // u2 = -lam b + sqrt(dd2), u2' = lam a - sqrt(dd2n)
    n3.u2  = r2.dd2[63] ? r2.p : f_sub(f_sqrt(r2.dd2), r2.lb);
    n3.u2n = r2.dd2n[63] ? r2.p : f_sub(r2.la, f_sqrt(r2.dd2n));
  end

  // stage 4: radicands of u1, u1'
  always_comb begin
    n4.x    = r3.x;
    n4.z    = r3.z;
    n4.hl   = r3.hl;
    n4.p    = r3.p;
    n4.q    = r3.q;
    n4.abt  = r3.abt;
    n4.iab  = r3.iab;
    n4.ia6  = r3.ia6;
    n4.ib6  = r3.ib6;
    n4.a    = r3.a;
    n4.b    = r3.b;
    n4.k    = r3.k;
    n4.a1   = r3.a1;
    n4.b1   = r3.b1;
    n4.u2   = r3.u2;
    n4.u2n  = r3.u2n;
    n4.dd1  = f_add(f_mul(r3.a1, r3.a1), r3.c1);
    n4.dd1n = f_add(f_mul(r3.b1, r3.b1), r3.c1n);
  end

  // stage 5: candidates u1 = -A1 + sqrt(.), u1' = B1 - sqrt(.)
  always_comb begin
    n5.x    = r4.x;
    n5.z    = r4.z;
    n5.hl   = r4.hl;
    n5.p    = r4.p;
    n5.q    = r4.q;
    n5.abt  = r4.abt;
    n5.iab  = r4.iab;
    n5.ia6  = r4.ia6;
    n5.ib6  = r4.ib6;
    n5.a    = r4.a;
    n5.b    = r4.b;
    n5.k    = r4.k;
    n5.c[0] = r4.dd1[63]  ? r4.p : f_sub(f_sqrt(r4.dd1), r4.a1);
    n5.c[1] = r4.u2;
    n5.c[2] = r4.dd1n[63] ? r4.p : f_sub(r4.b1, f_sqrt(r4.dd1n));
    n5.c[3] = r4.u2n;
    n5.c[4] = r4.p;
    n5.c[5] = r4.q;
  end

  // stage 6: per candidate, mirror to u >= 0 and form the cubes
  always_comb begin
    n6.hl = r5.hl;
    n6.k  = r5.k;
    for (int j = 0; j < NC; j++) begin
      f64_t c, xx, uu, aa, bb;
      logic neg;
      c   = r5.c[j];
      neg = c[63] && !f_is_zero(c);
      xx  = neg ? f_neg(r5.x) : r5.x;
      uu  = neg ? f_neg(c)    : c;
      aa  = neg ? r5.b : r5.a;
      bb  = neg ? r5.a : r5.b;
      n6.e[j].c      = c;
      n6.e[j].ia6s   = neg ? r5.ib6 : r5.ia6;
      n6.e[j].ib6s   = neg ? r5.ia6 : r5.ib6;
      n6.e[j].u3     = f_mul(f_mul(uu, uu), uu);
      n6.e[j].x3     = f_mul(f_mul(xx, xx), xx);
      n6.e[j].w      = f_mul(f_sub(f_add(f_mul(aa, uu), f_mul(bb, xx)), r5.abt),
                             r5.iab);
      n6.e[j].dq     = f_sub(c, r5.z);
      n6.e[j].in_dom = f_le(r5.p, c) && f_le(c, r5.q);
    end
  end

  // stage 7: the pieces V2, V3, the cube of w and the quadratic term
  always_comb begin
    n7.k = r6.k;
    for (int j = 0; j < NC; j++) begin
      f64_t ub;
      ub               = f_mul(r6.e[j].u3, r6.e[j].ib6s);
      n7.e[j].c        = r6.e[j].c;
      n7.e[j].v2       = f_add(ub, f_mul(r6.e[j].x3, r6.e[j].ia6s));
      n7.e[j].v3       = f_sub(ub, f_mul(r6.e[j].x3, r6.e[j].ib6s));
      n7.e[j].w3       = f_mul(f_mul(r6.e[j].w, r6.e[j].w), r6.e[j].w);
      n7.e[j].qd       = f_mul(r6.hl, f_mul(r6.e[j].dq, r6.e[j].dq));
      n7.e[j].in_dom   = r6.e[j].in_dom;
    end
  end

  // stage 8: V = max{V3, min{V1, V2}} and F = V + lam/2 (u-z)^2
  always_comb begin
    for (int j = 0; j < NC; j++) begin
      f64_t v1, v;
      v1          = f_sub(r7.e[j].v2, f_mul(r7.k, r7.e[j].w3));
      v           = f_max(r7.e[j].v3, f_min(v1, r7.e[j].v2));
      n8.e[j].c   = r7.e[j].c;
      n8.e[j].v   = r7.e[j].in_dom ? v : F64_PINF;
      n8.e[j].f   = r7.e[j].in_dom ? f_add(v, r7.e[j].qd) : F64_PINF;
    end
  end

  // stage 9: argmin over the six candidates
  always_comb begin
    n9.u = r8.e[0].c;
    n9.f = r8.e[0].f;
    n9.v = r8.e[0].v;
    for (int j = 1; j < NC; j++)
      if (f_lt(r8.e[j].f, n9.f)) begin
        n9.u = r8.e[j].c;
        n9.f = r8.e[j].f;
        n9.v = r8.e[j].v;
      end
  end

  always_ff @(posedge clk) begin
    if (ce) begin
      r1  <= n1;
      r2  <= n2;
      r3  <= n3;
      r4  <= n4;
      r5  <= n5;
      r6  <= n6;
      r7  <= n7;
      r8  <= n8;
      r9  <= n9;
      tag <= {tag[LAT-2:0], in_tag};
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n)  vld <= '0;
    else if (ce) vld <= {vld[LAT-2:0], in_valid};
  end

  assign out_valid = vld[LAT-1];
  assign out_d     = r9;
  assign out_tag   = tag[LAT-1];

endmodule
