// coef_store -- per-dimension and per-subproblem constants of the solver.
//
// The min-plus kernel streams only (x_i, t) for each coordinate; the problem
// constants are held here and attached to each element as it passes:
//   a_i, b_i     velocity bounds of coordinate i (dx_i/ds in [-b_i, a_i])
//   y_j[i]       centre of the j-th quadratic piece of the initial cost
//   alpha_j      offset of the j-th piece
//   lam          curvature of the quadratic pieces (lambda)
// J(u) = min_j { lam/2 ||u - y_j||^2 + alpha_j }. An element counter tracks
// the coordinate index i of the incoming stream (reset by the element flagged
// last), and the outputs are combinational reads of the tables at that index.
// The paper gives the constants and says the kernel stores them; the table
// layout and the write port are this design's own.
//
// Interface. Write port: cfg_we with cfg_sel selecting the table, cfg_j the
// subproblem, cfg_i the coordinate and cfg_data the value, one write per cycle.
// Stream side: adv (an element is accepted this cycle) and adv_last (it is the
// last of its point) move the counter; idx, a, b, y[j] are valid in the same
// cycle as the element. Synchronous active-low reset clears the counter and
// the tables (lam resets to 1.0).
module coef_store
  import fp64_pkg::*;
#(
  parameter int unsigned NMAX = 16,
  parameter int unsigned M    = 3
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    cfg_we,
  input  logic [2:0]              cfg_sel,
  input  logic [$clog2(M+1)-1:0]  cfg_j,
  input  logic [$clog2(NMAX)-1:0] cfg_i,
  input  f64_t                    cfg_data,
  input  logic                    adv,
  input  logic                    adv_last,
  output logic [$clog2(NMAX)-1:0] idx,
  output f64_t                    a,
  output f64_t                    b,
  output f64_t [M-1:0]            y,
  output f64_t [M-1:0]            alpha,
  output f64_t                    lam
);

  localparam logic [2:0] SEL_A = 3'd0, SEL_B = 3'd1, SEL_Y = 3'd2,
                         SEL_ALPHA = 3'd3, SEL_LAM = 3'd4;

  f64_t [NMAX-1:0]        a_tab, b_tab;
  f64_t [M-1:0][NMAX-1:0] y_tab;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      a_tab <= '0;
      b_tab <= '0;
      y_tab <= '0;
      alpha <= '0;
      lam   <= F64_ONE;
    end else if (cfg_we) begin
      case (cfg_sel)
        SEL_A:     a_tab[cfg_i] <= cfg_data;
        SEL_B:     b_tab[cfg_i] <= cfg_data;
        SEL_Y:     if (int'(cfg_j) < M) y_tab[cfg_j][cfg_i] <= cfg_data;
        SEL_ALPHA: if (int'(cfg_j) < M) alpha[cfg_j] <= cfg_data;
        SEL_LAM:   lam <= cfg_data;
        default: ;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n)   idx <= '0;
    else if (adv) idx <= adv_last ? '0 : idx + 1'b1;
  end

  assign a = a_tab[idx];
  assign b = b_tab[idx];
  always_comb
    for (int j = 0; j < M; j++) y[j] = y_tab[j][idx];

  // A point may not have more coordinates than the tables hold.
  a_dim: assert property (@(posedge clk) disable iff (!rst_n)
    (adv && !adv_last) |-> (int'(idx) < NMAX - 1));

endmodule
