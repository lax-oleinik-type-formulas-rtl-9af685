// minplus_combine -- min-plus selection over the M parallel subproblem
// solvers.
//
// With a nonconvex initial cost J = min_j J_j, the HJ value is the minimum of
// the values S_j of the M convex subproblems, and an optimal trajectory is
// that of a minimising subproblem r (paper, Algorithm 2). The M kernels run
// in lockstep on the same coordinate stream, so their element outputs arrive
// together. This block stores each kernel's u_i* and gamma_i(s) per
// coordinate, and on the last element of a point picks r = argmin_j S_j (the
// lowest j on a tie) and presents S = S_r, r, the point's dimension n and
// the whole minimiser and trajectory vectors of subproblem r in one output
// word. The selection rule is the paper's; buffering whole vectors and the
// tie rule are this design's own.
//
// Interface. in_valid with in_res[j] and in_s[j] (valid with the last
// element) are sampled on a rising edge with ce high. The result register
// loads one enabled cycle after the last element and is held while ce is low.
// The caller stalls (ce low) while a result is presented and not taken.
// Synchronous active-low reset.
module minplus_combine
  import fp64_pkg::*;
  import hj_pkg::*;
#(
  parameter int unsigned NMAX = 16,
  parameter int unsigned M    = 3
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    ce,
  input  logic                    in_valid,
  input  quad_res_t [M-1:0]       in_res,
  input  f64_t [M-1:0]            in_s,
  output logic                    out_valid,
  output f64_t                    out_s,
  output logic [$clog2(M+1)-1:0]  out_r,
  output logic [$clog2(NMAX+1)-1:0] out_n,
  output f64_t [NMAX-1:0]         out_u,
  output f64_t [NMAX-1:0]         out_g
);

  f64_t [M-1:0][NMAX-1:0] u_buf, g_buf;
  logic [$clog2(NMAX)-1:0] idx;

  // argmin over the subproblem values
  logic [$clog2(M+1)-1:0] r_sel;
  f64_t                   s_sel;
  always_comb begin
    r_sel = '0;
    s_sel = in_s[0];
    for (int j = 1; j < M; j++)
      if (f_lt(in_s[j], s_sel)) begin
        r_sel = ($clog2(M+1))'(j);
        s_sel = in_s[j];
      end
  end

  always_ff @(posedge clk) begin
    if (ce && in_valid)
      for (int j = 0; j < M; j++) begin
        u_buf[j][idx] <= in_res[j].u;
        g_buf[j][idx] <= in_res[j].g;
      end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      idx       <= '0;
      out_valid <= 1'b0;
      out_s     <= F64_ZERO;
      out_r     <= '0;
      out_n     <= '0;
      out_u     <= '0;
      out_g     <= '0;
    end else if (ce) begin
      out_valid <= in_valid && in_res[0].last;
      if (in_valid) begin
        idx <= in_res[0].last ? '0 : idx + 1'b1;
        if (in_res[0].last) begin
          out_s <= s_sel;
          out_r <= r_sel;
          out_n <= ($clog2(NMAX+1))'(idx) + 1'b1;
          for (int i = 0; i < NMAX; i++) begin
            if (i == int'(idx)) begin
              out_u[i] <= in_res[r_sel].u;
              out_g[i] <= in_res[r_sel].g;
            end else if (i < int'(idx)) begin
              out_u[i] <= u_buf[r_sel][i];
              out_g[i] <= g_buf[r_sel][i];
            end else begin
              out_u[i] <= F64_ZERO;
              out_g[i] <= F64_ZERO;
            end
          end
        end
      end
    end
  end

  // The M solvers are fed the same stream, so they stay in lockstep.
  for (genvar j = 1; j < M; j++) begin : g_lock
    a_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
      in_valid |-> (in_res[j].last == in_res[0].last));
  end

endmodule
