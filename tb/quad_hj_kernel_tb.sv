// quad_hj_kernel_tb -- self-checking test of the quadratic-cost building block.
//
// Phase 1 runs the paper's Sec. 3.1 example: J(u) = 1/2 ||u - 1||^2,
// a = (4,6,5,...,5), b = (3,9,6,...,6), x in [-4,4]^n, t in [0,0.5], n = 16,
// streamed back to back with out_ready held high; it checks that a new
// element is accepted every cycle (II = 1) and that the last result leaves
// 10 cycles after the last element entered. Phase 2 uses random centres y,
// random lambda and alpha and random dimensions 1..16, with random output
// stalls. Every element's u*, gamma(s) and every point's S(x,t) are compared
// with the reference model (ternary search per coordinate, region-by-region V
// and trajectory).
module quad_hj_kernel_tb;
  import fp64_pkg::*;
  import hj_pkg::*;
  import hj_ref_pkg::*;

  localparam int NPT1 = 40;
  localparam int NPT2 = 150;
  localparam int NDIM = 16;
  localparam int MAXEL = (NPT1 + NPT2) * NDIM;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n, in_valid, in_ready, out_valid, out_ready;
  f64_t lam, alpha, out_s;
  quad_elem_t in_d;
  quad_res_t out_d;

  quad_hj_kernel dut (.*);

  int checks = 0;
  int failures = 0;
  // per-element expected values, filled by the driver
  real e_u[MAXEL], e_g[MAXEL], e_f[MAXEL];
  real e_s[$];
  logic e_last[MAXEL];
  int n_in = 0, n_out = 0;
  longint cyc = 0, last_in_cyc = 0, last_out_cyc = 0;
  real cur_lam, cur_alpha;

  task automatic fail(string msg);
    failures++;
    if (failures < 20) $display("FAIL %s", msg);
  endtask

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && in_valid && in_ready) last_in_cyc <= cyc;
    if (rst_n && out_valid && out_ready) begin
      real u, g;
      u = $bitstoreal(out_d.u);
      g = $bitstoreal(out_d.g);
      checks += 3;
      if (!close(u, e_u[n_out], 1e-5))
        fail($sformatf("u el %0d got %g ref %g", n_out, u, e_u[n_out]));
      if (absr(g - e_g[n_out]) > 1e-4 * (1 + absr(e_g[n_out])))
        fail($sformatf("gamma el %0d got %g ref %g", n_out, g, e_g[n_out]));
      if (out_d.last != e_last[n_out]) fail("last flag");
      if (out_d.last) begin
        real s, es;
        s = $bitstoreal(out_s);
        es = e_s.pop_front();
        checks++;
        if (!close(s, es, 1e-8)) fail($sformatf("S got %.12g ref %.12g", s, es));
      end
      last_out_cyc <= cyc;
      n_out++;
    end
  end

  logic took;

  task automatic send_point(int n, real y[NDIM], int stall_pct);
    real t, s, sum;
    t = ($urandom_range(7) == 0) ? 0.0 : $urandom_range(50000) / 100000.0;
    s = t * ($urandom_range(1000) / 1000.0);
    sum = 0.0;
    for (int i = 0; i < n; i++) begin
      real x, a, b, u;
      x = $urandom_range(80000) / 10000.0 - 4.0;
      a = (i == 0) ? 4.0 : (i == 1) ? 6.0 : 5.0;
      b = (i == 0) ? 3.0 : (i == 1) ? 9.0 : 6.0;
      u = prox_ref(x, t, y[i], a, b, cur_lam);
      e_u[n_in] = u;
      e_g[n_in] = g_ref(s, x, t, u, a, b);
      e_last[n_in] = (i == n - 1);
      sum += f_ref(x, t, u, a, b, cur_lam, y[i]);
      in_valid = 1;
      in_d.x = $realtobits(x); in_d.t = $realtobits(t); in_d.y = $realtobits(y[i]);
      in_d.a = $realtobits(a); in_d.b = $realtobits(b); in_d.s = $realtobits(s);
      in_d.last = (i == n - 1);
      // in_ready is sampled just before the rising edge that uses it
      do begin
        out_ready = ($urandom_range(99) >= stall_pct);
        #4 took = in_ready;
        @(negedge clk);
      end while (!took);
      n_in++;
    end
    e_s.push_back(sum + cur_alpha);
  endtask

  initial begin
    real y[NDIM];
    longint c0;
    rst_n = 0; in_valid = 0; out_ready = 1; in_d = '0;
    cur_lam = 1.0; cur_alpha = 0.0;
    lam = $realtobits(cur_lam); alpha = $realtobits(cur_alpha);
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1;
    // phase 1: paper example, no stalls, back to back
    foreach (y[i]) y[i] = 1.0;
    c0 = cyc;
    for (int p = 0; p < NPT1; p++) send_point(NDIM, y, 0);
    checks++;
    if (cyc - c0 != NPT1 * NDIM) fail($sformatf("II: %0d cycles for %0d elements", cyc - c0, NPT1 * NDIM));
    in_valid = 0;
    repeat (12) @(negedge clk);
    checks++;
    if (last_out_cyc - last_in_cyc != 10)
      fail($sformatf("latency %0d", last_out_cyc - last_in_cyc));
    checks++;
    if (n_out != n_in) fail("phase 1 outputs missing");
    // phase 2: random problems and stalls
    cur_lam = 0.5 + $urandom_range(1500) / 1000.0;
    cur_alpha = $urandom_range(2000) / 1000.0 - 1.0;
    lam = $realtobits(cur_lam); alpha = $realtobits(cur_alpha);
    for (int p = 0; p < NPT2; p++) begin
      foreach (y[i]) y[i] = $urandom_range(80000) / 10000.0 - 4.0;
      send_point(1 + $urandom_range(NDIM - 1), y, 30);
      if ($urandom_range(4) == 0) begin
        in_valid = 0;
        @(negedge clk);
      end
    end
    in_valid = 0;
    out_ready = 1;
    repeat (15) @(negedge clk);
    checks++;
    if (n_out != n_in || e_s.size() != 0) fail($sformatf("outputs %0d of %0d", n_out, n_in));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
