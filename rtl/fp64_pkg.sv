// fp64_pkg -- IEEE-754 binary64 arithmetic used by every datapath of the
// Hamilton-Jacobi solver.
//
// The solver works in double precision throughout. Each operation here is a
// combinational function (add, subtract, multiply, divide, square root,
// compare, min/max) that a pipeline stage calls on registered operands, so a
// stage may chain several of them and still accept a new operand set every
// cycle. All functions round to nearest, ties to even.
//
// Simplifications (this design's own choice, made because the datapath never
// produces such values for the workloads it targets):
//   * subnormal inputs are read as zero and subnormal results are flushed to
//     zero (sign kept);
//   * NaN is not produced: the square root of a negative number returns +0
//     and callers test the radicand before using it; infinities propagate
//     through add/mul/min/max/compare and are used to mark "outside the
//     domain" (F = +inf).
package fp64_pkg;

  typedef logic [63:0] f64_t;

  localparam f64_t F64_ZERO = 64'h0000_0000_0000_0000;
  localparam f64_t F64_ONE  = 64'h3FF0_0000_0000_0000;
  localparam f64_t F64_SIX  = 64'h4018_0000_0000_0000;
  localparam f64_t F64_HALF = 64'h3FE0_0000_0000_0000;
  localparam f64_t F64_PINF = 64'h7FF0_0000_0000_0000;

  function automatic logic f_is_zero(f64_t a);
    return a[62:52] == 11'd0;
  endfunction

  function automatic logic f_is_inf(f64_t a);
    return a[62:52] == 11'h7FF;
  endfunction

  function automatic f64_t f_neg(f64_t a);
    return {~a[63], a[62:0]};
  endfunction

  function automatic f64_t f_abs(f64_t a);
    return {1'b0, a[62:0]};
  endfunction

  // Pack sign, biased exponent and a 53-bit significand (leading one at bit
  // 52) with round/sticky information. Handles the carry out of rounding,
  // overflow to infinity and underflow to zero.
  function automatic f64_t f_pack(logic s, int e, logic [52:0] m,
                                  logic rnd, logic sticky);
    logic [53:0] mr;
    int          er;
    mr = {1'b0, m} + 54'((rnd && (sticky || m[0])) ? 1 : 0);
    er = e;
    if (mr[53]) begin
      mr = mr >> 1;
      er = er + 1;
    end
    if (er >= 2047) return {s, 11'h7FF, 52'd0};
    if (er <= 0)    return {s, 63'd0};
    return {s, er[10:0], mr[51:0]};
  endfunction

  function automatic f64_t f_mul(f64_t a, f64_t b);
    logic         s;
    logic [52:0]  ma, mb;
    logic [105:0] p;
    int           e;
    s = a[63] ^ b[63];
    if (f_is_inf(a) || f_is_inf(b)) return {s, 11'h7FF, 52'd0};
    if (f_is_zero(a) || f_is_zero(b)) return {s, 63'd0};
    ma = {1'b1, a[51:0]};
    mb = {1'b1, b[51:0]};
    p  = ma * mb;
    e  = int'(a[62:52]) + int'(b[62:52]) - 1023;
    if (p[105]) e = e + 1;
    else        p = p << 1;
    return f_pack(s, e, p[105:53], p[52], |p[51:0]);
  endfunction

  function automatic f64_t f_add(f64_t a, f64_t b);
    f64_t        x, y;
    logic [56:0] mx, my, sum;
    int          d, e, k;
    logic        sticky;
    if (f_is_inf(a)) return a;
    if (f_is_inf(b)) return b;
    if (f_is_zero(a)) return f_is_zero(b) ? F64_ZERO : b;
    if (f_is_zero(b)) return a;
    // x gets the larger magnitude
    if (a[62:0] >= b[62:0]) begin x = a; y = b; end
    else                    begin x = b; y = a; end
    e  = int'(x[62:52]);
    d  = e - int'(y[62:52]);
    // significand with three extra low bits (guard, round, sticky)
    mx = {1'b0, 1'b1, x[51:0], 3'b000};
    my = {1'b0, 1'b1, y[51:0], 3'b000};
    if (d > 56) begin
      my = 57'd1;
    end else if (d > 0) begin
      sticky = 1'b0;
      for (int i = 0; i < 57; i++)
        if (i < d && my[i]) sticky = 1'b1;
      my = (my >> d) | {56'd0, sticky};
    end
    if (x[63] == y[63]) sum = mx + my;
    else                sum = mx - my;
    if (sum == 57'd0) return F64_ZERO;
    if (sum[56]) begin
      sum = (sum >> 1) | {56'd0, sum[0]};
      e = e + 1;
    end else begin
      k = 0;
      for (int i = 55; i >= 0; i--)
        if (sum[55] == 1'b0 && k < 56) begin
          sum = sum << 1;
          k   = k + 1;
        end
      e = e - k;
    end
    // leading one at bit 55: significand [55:3], guard [2], sticky [1:0]
    return f_pack(x[63], e, sum[55:3], sum[2], |sum[1:0]);
  endfunction

  function automatic f64_t f_sub(f64_t a, f64_t b);
    return f_add(a, f_neg(b));
  endfunction

  function automatic f64_t f_div(f64_t a, f64_t b);
    logic         s;
    logic [108:0] num;
    logic [108:0] q, r;
    int           e;
    s = a[63] ^ b[63];
    if (f_is_inf(a) || f_is_zero(b)) return {s, 11'h7FF, 52'd0};
    if (f_is_zero(a) || f_is_inf(b)) return {s, 63'd0};
    num = {1'b1, a[51:0], 56'd0};
    q   = num / {56'd0, 1'b1, b[51:0]};
    r   = num % {56'd0, 1'b1, b[51:0]};
    e   = int'(a[62:52]) - int'(b[62:52]) + 1023;
    // q lies in [2^55, 2^57)
    if (q[56])
      return f_pack(s, e, q[56:4], q[3], (|q[2:0]) || (r != 0));
    return f_pack(s, e - 1, q[55:3], q[2], (|q[1:0]) || (r != 0));
  endfunction

  // Square root by the restoring digit-by-digit method on a 110-bit radicand.
  function automatic f64_t f_sqrt(f64_t a);
    logic [109:0] m, rem, trial;
    logic [54:0]  root;
    int           ex;
    if (a[63] || f_is_zero(a)) return F64_ZERO;
    if (f_is_inf(a)) return a;
    ex = int'(a[62:52]) - 1023;
    m  = {57'd0, 1'b1, a[51:0]};
    if (ex % 2 != 0) begin
      m  = m << 1;
      ex = ex - 1;
    end
    m    = m << 56;             // m in [2^108, 2^110): root in [2^54, 2^55)
    rem  = '0;
    root = '0;
    for (int i = 54; i >= 0; i--) begin
      rem   = (rem << 2) | 110'(m[2*i +: 2]);
      trial = {53'd0, root, 2'b01};
      if (rem >= trial) begin
        rem  = rem - trial;
        root = {root[53:0], 1'b1};
      end else begin
        root = {root[53:0], 1'b0};
      end
    end
    return f_pack(1'b0, (ex >>> 1) + 1023, root[54:2], root[1],
                  root[0] || (rem != 0));
  endfunction

  // Total-order key: -0 and +0 compare equal.
  function automatic logic [63:0] f_key(f64_t a);
    if (f_is_zero(a)) return 64'h8000_0000_0000_0000;
    return a[63] ? ~a : {1'b1, a[62:0]};
  endfunction

  function automatic logic f_lt(f64_t a, f64_t b);
    return f_key(a) < f_key(b);
  endfunction

  function automatic logic f_le(f64_t a, f64_t b);
    return f_key(a) <= f_key(b);
  endfunction

  function automatic f64_t f_min(f64_t a, f64_t b);
    return f_lt(b, a) ? b : a;
  endfunction

  function automatic f64_t f_max(f64_t a, f64_t b);
    return f_lt(a, b) ? b : a;
  endfunction

  // Conversion of a small unsigned count to double (exact for k < 2^32).
  function automatic f64_t f_from_uint(int unsigned k);
    int msb;
    logic [63:0] m;
    if (k == 0) return F64_ZERO;
    msb = 0;
    for (int i = 0; i < 32; i++) if (k[i]) msb = i;
    m = 64'(k) << (52 - msb);
    return {1'b0, 11'(1023 + msb), m[51:0]};
  endfunction

  // exact scaling by 2 (used for the many 2*lambda*... terms)
  function automatic f64_t f_twice(f64_t a);
    if (f_is_zero(a) || f_is_inf(a)) return a;
    if (a[62:52] == 11'h7FE) return {a[63], 11'h7FF, 52'd0};
    return {a[63], a[62:52] + 11'd1, a[51:0]};
  endfunction

endpackage
