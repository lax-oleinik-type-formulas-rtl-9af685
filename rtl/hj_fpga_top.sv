// hj_fpga_top -- top level: the two solver kernels of the design side by side.
//
// What it does. The paper builds two kinds of FPGA kernels on the
// one-dimensional proximal building block:
//   * the min-plus kernel (Sec. 3.3): quadratic pieces
//     J(u) = min_j { lam/2 ||u - y_j||^2 + alpha_j }, each piece solved by its
//     own quadratic kernel (Sec. 3.1) and the results combined by a minimum;
//     with M = 1 and alpha = 0 it is the plain quadratic-cost solver;
//   * the ADMM kernel (Sec. 3.2): J(u) = 1/2 ||u - 1||_1^2 solved by a fixed
//     number of unrolled ADMM iterations.
// This top instantiates one of each (minplus_kernel, admm_kernel) with
// independent configuration ports and point streams, sharing clock and reset.
//
// Paper versus this design. The paper builds and measures each kernel as a
// separate FPGA image on an Alveo U280 at 300 MHz; putting both behind one
// top is this design's choice so that a single module carries every mechanism.
// The PCIe/host shell and the HBM data movers of the board are not modelled:
// points enter and results leave on valid/ready streams.
//
// Interface and timing.
//   mp_* : min-plus kernel. Config (cfg_sel 0 = a, 1 = b, 2 = y_j, 3 = alpha_j,
//          4 = lam); input stream pt_elem_t (x_i, t, s, last), one coordinate
//          per cycle; output one record per point (S, argmin index r, n,
//          u*[NMAX], gamma(s)[NMAX]) 11 cycles after the point's last element.
//   ad_* : ADMM kernel. Config (cfg_sel 0 = a, 1 = b, 4 = lam); input stream
//          pt_elem_t; output element stream quad_res_t (u_i*, V_i, gamma_i)
//          with S on the last element; n + N_ITER (2n + 9) cycles per isolated
//          point, one point per 3n + 9 cycles in a stream.
// Synchronous active-low reset.
module hj_fpga_top
  import fp64_pkg::*;
  import hj_pkg::*;
#(
  parameter int unsigned NMAX   = 16,
  parameter int unsigned M      = 3,
  parameter int unsigned N_ITER = 4
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // min-plus kernel
  input  logic                      mp_cfg_we,
  input  logic [2:0]                mp_cfg_sel,
  input  logic [$clog2(M+1)-1:0]    mp_cfg_j,
  input  logic [$clog2(NMAX)-1:0]   mp_cfg_i,
  input  f64_t                      mp_cfg_data,
  input  logic                      mp_in_valid,
  output logic                      mp_in_ready,
  input  pt_elem_t                  mp_in_d,
  output logic                      mp_out_valid,
  input  logic                      mp_out_ready,
  output f64_t                      mp_out_s,
  output logic [$clog2(M+1)-1:0]    mp_out_r,
  output logic [$clog2(NMAX+1)-1:0] mp_out_n,
  output f64_t [NMAX-1:0]           mp_out_u,
  output f64_t [NMAX-1:0]           mp_out_g,
  // ADMM kernel
  input  logic                      ad_cfg_we,
  input  logic [2:0]                ad_cfg_sel,
  input  logic [$clog2(NMAX)-1:0]   ad_cfg_i,
  input  f64_t                      ad_cfg_data,
  input  logic                      ad_in_valid,
  output logic                      ad_in_ready,
  input  pt_elem_t                  ad_in_d,
  output logic                      ad_out_valid,
  input  logic                      ad_out_ready,
  output quad_res_t                 ad_out_d,
  output f64_t                      ad_out_s
);

  minplus_kernel #(.NMAX(NMAX), .M(M)) u_minplus (
    .clk,
    .rst_n,
    .cfg_we   (mp_cfg_we),
    .cfg_sel  (mp_cfg_sel),
    .cfg_j    (mp_cfg_j),
    .cfg_i    (mp_cfg_i),
    .cfg_data (mp_cfg_data),
    .in_valid (mp_in_valid),
    .in_ready (mp_in_ready),
    .in_d     (mp_in_d),
    .out_valid(mp_out_valid),
    .out_ready(mp_out_ready),
    .out_s    (mp_out_s),
    .out_r    (mp_out_r),
    .out_n    (mp_out_n),
    .out_u    (mp_out_u),
    .out_g    (mp_out_g)
  );

  admm_kernel #(.NMAX(NMAX), .N_ITER(N_ITER)) u_admm (
    .clk,
    .rst_n,
    .cfg_we   (ad_cfg_we),
    .cfg_sel  (ad_cfg_sel),
    .cfg_i    (ad_cfg_i),
    .cfg_data (ad_cfg_data),
    .in_valid (ad_in_valid),
    .in_ready (ad_in_ready),
    .in_d     (ad_in_d),
    .out_valid(ad_out_valid),
    .out_ready(ad_out_ready),
    .out_d    (ad_out_d),
    .out_s    (ad_out_s)
  );

endmodule
