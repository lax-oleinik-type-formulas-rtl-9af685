// hj_accum -- per-point reduction S(x,t) = sum_i F_i + alpha.
//
// The element solvers return, for each coordinate i of a point,
// F_i = V(x_i,t;u_i*,a_i,b_i) + lam/2 (u_i* - y_i)^2. For a quadratic initial
// cost J(u) = lam/2 ||u - y||^2 + alpha the value of the HJ solution is the
// sum of these over the coordinates plus alpha (paper, Sec. 3.1). This block
// adds the elements of one point as they stream past, one per cycle, and on
// the element flagged last emits the total with alpha added and restarts.
// The running sum is a single double-precision add per cycle; the order of
// summation is the coordinate order (this design's choice).
//
// Interface. in_valid/in_f/in_last are sampled on a rising edge with ce high;
// out_valid pulses (for one enabled cycle) with out_s one enabled cycle after
// the last element. ce low holds everything. Synchronous active-low reset
// clears the running sum and out_valid.
module hj_accum
  import fp64_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic ce,
  input  f64_t alpha,
  input  logic in_valid,
  input  f64_t in_f,
  input  logic in_last,
  output logic out_valid,
  output f64_t out_s
);

  f64_t acc;
  f64_t acc_n;

  assign acc_n = f_add(acc, in_f);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      acc       <= F64_ZERO;
      out_valid <= 1'b0;
      out_s     <= F64_ZERO;
    end else if (ce) begin
      out_valid <= in_valid && in_last;
      if (in_valid) begin
        acc <= in_last ? F64_ZERO : acc_n;
        if (in_last) out_s <= f_add(acc_n, alpha);
      end
    end
  end

endmodule
