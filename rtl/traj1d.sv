// traj1d -- one component of the optimal trajectory gamma(s; x, t, u, a, b).
//
// Given the terminal position x, horizon t, the initial position u chosen by
// the proximal solver (u in [x-at, x+bt]) and a running time s in [0, t], it
// returns where the optimal path is at time s. The path is piecewise linear
// with slopes -b, 0 and a; the block uses the branch-reduced form
//     x >= 0, u >= 0 : max{u - b s, a(s-t) + x, 0}
//     x <  0, u >= 0 : max{u - b s, 0} + min{-b(s-t) + x, 0}
//     x <  0, u <  0 : min{u + a s, -b(s-t) + x, 0}
//     x >= 0, u <  0 : min{u + a s, 0} + max{a(s-t) + x, 0}
// which is the paper's. The whole evaluation is one pipeline stage.
//
// Interface. in_valid/in_* are sampled on a rising edge with ce high; out_g
// and out_valid follow after LAT = 1 enabled cycle, with the TAG_W-bit tag.
// ce low holds the stage. Reset (synchronous, active low) clears out_valid.
module traj1d
  import fp64_pkg::*;
#(
  parameter int unsigned TAG_W = 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             ce,
  input  logic             in_valid,
  input  f64_t             in_x,
  input  f64_t             in_t,
  input  f64_t             in_u,
  input  f64_t             in_a,
  input  f64_t             in_b,
  input  f64_t             in_s,
  input  logic [TAG_W-1:0] in_tag,
  output logic             out_valid,
  output f64_t             out_g,
  output logic [TAG_W-1:0] out_tag
);

  f64_t g_n;

  always_comb begin
    f64_t ubs, uas, rise, fall, st;
    logic xneg, uneg;
    st   = f_sub(in_s, in_t);
    ubs  = f_sub(in_u, f_mul(in_b, in_s));          // u - b s
    uas  = f_add(in_u, f_mul(in_a, in_s));          // u + a s
    rise = f_add(f_mul(in_a, st), in_x);            // a(s-t) + x
    fall = f_sub(in_x, f_mul(in_b, st));            // -b(s-t) + x
    xneg = in_x[63] && !f_is_zero(in_x);
    uneg = in_u[63] && !f_is_zero(in_u);
    case ({xneg, uneg})
      2'b00:   g_n = f_max(f_max(ubs, rise), F64_ZERO);
      2'b10:   g_n = f_add(f_max(ubs, F64_ZERO), f_min(fall, F64_ZERO));
      2'b11:   g_n = f_min(f_min(uas, fall), F64_ZERO);
      default: g_n = f_add(f_min(uas, F64_ZERO), f_max(rise, F64_ZERO));
    endcase
  end

  always_ff @(posedge clk) begin
    if (ce) begin
      out_g   <= g_n;
      out_tag <= in_tag;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n)  out_valid <= 1'b0;
    else if (ce) out_valid <= in_valid;
  end

endmodule
