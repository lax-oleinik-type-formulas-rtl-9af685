// admm_iter -- one unrolled ADMM iteration for the initial cost
// J(u) = 1/2 ||u - 1||_1^2 (paper, Algorithm 1 and Sec. 3.2).
//
// One iteration maps the iterates (d^k, w^k) of a point to
//   v^{k+1} = argmin_v J(v) + lam/2 ||v - d^k + w^k||^2          (v-update)
//   d_i^{k+1} = argmin_d V(x_i,t;d,a_i,b_i) + lam/2 (v_i^{k+1} - d + w_i^k)^2
//   w^{k+1} = w^k + v^{k+1} - d^{k+1}.
// The d-update is the one-dimensional proximal problem of the building block
// (prox1d_pipe, with z = v_i + w_i). The v-update couples the coordinates:
// with c = d - w and z = c - 1, its solution is the soft threshold
//   v_i = 1 + sign(z_i) max(|z_i| - theta, 0),
//   theta = max_k S_k / (lam + k),
// where S_k is the sum of the k largest |z_i|. The paper only states that
// this proximal point is computable; the threshold formula and the way it is
// computed here are this design's own.
//
// How it works. The block is a three-phase machine per point:
//   COLLECT  accept the n elements of a point (one per cycle) into a buffer
//            and form z_i, |z_i|;
//   THETA    one cycle per coordinate j: S_j = sum of |z_i| over the
//            coordinates ranked at or above j (ties broken by index), k_j their
//            count, theta = max(theta, S_j / (lam + k_j));
//   EMIT     send the elements, one per cycle, with v_i, through prox1d_pipe;
//            w^{k+1} is formed on the pipeline output.
// A point of n coordinates leaves this block 2n + 9 cycles after its last
// element entered (3n + 8 after its first when it arrives at one element per
// cycle). In a chain of iterations one stage collects while the previous one
// drains its pipeline, so a stream of n-coordinate points moves at one point
// per 3n + 9 cycles.
// The paper's kernels also pass the whole iterate vector between unrolled
// iterations and cannot start a point every cycle (its II is at least 4n+1).
//
// Interface. Valid/ready element streams of admm_elem_t in and out. in_ready
// is high only in COLLECT. The output side advances when out_ready is high
// (global stall of the proximal pipeline). out_d.fv carries
// V(x_i,t;d_i^{k+1},a_i,b_i). Synchronous active-low reset.
// The objective value F of the proximal pipeline is not needed here and is
// left unused (a lint warning on those bits of p_out is expected).
module admm_iter
  import fp64_pkg::*;
  import hj_pkg::*;
#(
  parameter int unsigned NMAX = 16
) (
  input  logic       clk,
  input  logic       rst_n,
  input  f64_t       lam,
  input  logic       in_valid,
  output logic       in_ready,
  input  admm_elem_t in_d,
  output logic       out_valid,
  input  logic       out_ready,
  output admm_elem_t out_d
);

  typedef enum logic [1:0] {COLLECT, THETA, EMIT} state_e;

  localparam int unsigned CW = $clog2(NMAX + 1);

  state_e                 state;
  admm_elem_t [NMAX-1:0]  buf_el;
  f64_t [NMAX-1:0]        buf_z, buf_m;
  logic [CW-1:0]          cnt, n_el, j;
  f64_t                   theta;

  // ------------------------------------------------------------ THETA step
  f64_t        s_j, f_j;
  int unsigned k_j;
  always_comb begin
    s_j = F64_ZERO;
    k_j = 0;
    for (int i = 0; i < NMAX; i++)
      if (i < int'(n_el) &&
          (f_lt(buf_m[j], buf_m[i]) || (buf_m[i] == buf_m[j] && i <= int'(j)))) begin
        s_j = f_add(s_j, buf_m[i]);
        k_j = k_j + 1;
      end
    f_j = f_div(s_j, f_add(lam, f_from_uint(k_j)));
  end

  // ------------------------------------------------------------ EMIT step
  typedef struct packed {
    admm_elem_t el;
    f64_t       v;
  } side_t;

  logic      ce;
  logic      p_in_valid;
  prox_in_t  p_in;
  side_t     p_side_in, p_side_out;
  logic      p_out_valid;
  prox_out_t p_out;
  f64_t      v_e;

  assign ce = out_ready;

  always_comb begin
    f64_t sh;
    // v_i = 1 + sign(z_i) max(|z_i| - theta, 0)
    sh  = f_max(f_sub(buf_m[j], theta), F64_ZERO);
    v_e = f_add(F64_ONE, buf_z[j][63] ? f_neg(sh) : sh);
  end

  assign p_in_valid  = (state == EMIT);
  assign p_in.x      = buf_el[j].x;
  assign p_in.t      = buf_el[j].t;
  assign p_in.z      = f_add(v_e, buf_el[j].w);
  assign p_in.a      = buf_el[j].a;
  assign p_in.b      = buf_el[j].b;
  assign p_in.lam    = lam;
  assign p_side_in.el = buf_el[j];
  assign p_side_in.v  = v_e;

  prox1d_pipe #(.TAG_W($bits(side_t))) u_prox (
    .clk,
    .rst_n,
    .ce,
    .in_valid (p_in_valid),
    .in_d     (p_in),
    .in_tag   (p_side_in),
    .out_valid(p_out_valid),
    .out_d    (p_out),
    .out_tag  (p_side_out)
  );

  always_comb begin
    out_d    = p_side_out.el;
    out_d.v  = p_side_out.v;
    out_d.d  = p_out.u;
    out_d.fv = p_out.v;
    out_d.w  = f_sub(f_add(p_side_out.el.w, p_side_out.v), p_out.u);
  end
  assign out_valid = p_out_valid;

  assign in_ready = (state == COLLECT);

  // ------------------------------------------------------------ control
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= COLLECT;
      cnt   <= '0;
      n_el  <= '0;
      j     <= '0;
      theta <= F64_ZERO;
    end else begin
      case (state)
        COLLECT:
          if (in_valid) begin
            cnt <= cnt + 1'b1;
            if (in_d.last) begin
              n_el  <= cnt + 1'b1;
              cnt   <= '0;
              j     <= '0;
              theta <= F64_ZERO;
              state <= THETA;
            end
          end
        THETA: begin
          theta <= f_max(theta, f_j);
          if (j == n_el - 1'b1) begin
            j     <= '0;
            state <= EMIT;
          end else begin
            j <= j + 1'b1;
          end
        end
        default:    // EMIT
          if (ce) begin
            if (j == n_el - 1'b1) begin
              j     <= '0;
              state <= COLLECT;
            end else begin
              j <= j + 1'b1;
            end
          end
      endcase
    end
  end

  // element buffer: z = d - w - 1 is the shifted v-update argument
  always_ff @(posedge clk) begin
    if (state == COLLECT && in_valid) begin
      f64_t z;
      z = f_sub(f_sub(in_d.d, in_d.w), F64_ONE);
      buf_el[cnt[$clog2(NMAX)-1:0]] <= in_d;
      buf_z[cnt[$clog2(NMAX)-1:0]]  <= z;
      buf_m[cnt[$clog2(NMAX)-1:0]]  <= f_abs(z);
    end
  end

  a_dim: assert property (@(posedge clk) disable iff (!rst_n)
    (state == COLLECT && in_valid) |-> (int'(cnt) < NMAX));

  a_last_flag: assert property (@(posedge clk) disable iff (!rst_n)
    (state == EMIT) |-> (buf_el[j].last == (j == n_el - 1'b1)));

endmodule
