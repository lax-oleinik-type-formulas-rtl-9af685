// minplus_kernel_tb -- end-to-end test of the min-plus solver at its default
// size (NMAX = 16 coordinates, M = 3 quadratic pieces).
//
// Workload: the nonconvex initial cost
//   J(x) = min_j { 1/2 ||x - y_j||^2 + alpha_j },
//   y_1 = (-2,0,...,0), y_2 = (2,-2,-1,0,...,0), y_3 = (0,2,0,...,0),
//   alpha = (-0.5, 0, -1), a = (4,6,5,...,5), b = (3,9,6,...,6), lambda = 1,
// loaded through the configuration port, then query points (x, t) with x in
// [-4,4]^n, t in [0,0.5], n in {4, 8, 12, 16}, and a trajectory time s in
// [0,t]. Phase 1 streams 16-dimensional points back to back with the output
// always ready and checks the initiation interval (one coordinate per cycle)
// and the latency (11 cycles from the last coordinate to the result). Phase 2
// mixes dimensions, idle cycles and output back-pressure. Each result is
// compared with the reference: S = min_j S_j, r, u* and gamma(s) of r.
// The test counts how often each mechanism happened (output stall, every
// subproblem selected, each dimension, t = 0, minimiser at a domain end,
// minimiser in the interior, u* < 0 and u* >= 0) and fails if one never did.
module minplus_kernel_tb;
  import fp64_pkg::*;
  import hj_pkg::*;
  import hj_ref_pkg::*;

  localparam int NMAX = 16;
  localparam int M = 3;
  localparam int NPT1 = 30;
  localparam int NPT2 = 120;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n, cfg_we, in_valid, in_ready, out_valid, out_ready;
  logic [2:0] cfg_sel;
  logic [1:0] cfg_j, out_r;
  logic [3:0] cfg_i;
  f64_t cfg_data, out_s;
  pt_elem_t in_d;
  logic [4:0] out_n;
  f64_t [NMAX-1:0] out_u, out_g;

  minplus_kernel dut (.*);

  int checks = 0;
  int failures = 0;
  real ya[M][NMAX], al[M], av[NMAX], bv[NMAX];

  typedef struct {
    real s;
    real s2;          // second-best value (to know whether r is decidable)
    int  r, n;
    real u[NMAX];
    real g[NMAX];
  } exp_t;
  exp_t q[$];

  // mechanism counters
  int c_stall = 0, c_r[M], c_dim[4], c_t0 = 0, c_bnd = 0, c_int = 0, c_neg = 0, c_pos = 0;
  longint cyc = 0, last_in_cyc = 0, last_out_cyc = 0;
  int n_res = 0;

  task automatic fail(string msg);
    failures++;
    if (failures < 20) $display("FAIL %s", msg);
  endtask

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && in_valid && in_ready) last_in_cyc <= cyc;
    if (rst_n && out_valid && !out_ready) c_stall++;
    if (rst_n && out_valid && out_ready) begin
      exp_t e;
      real s;
      e = q.pop_front();
      s = $bitstoreal(out_s);
      checks += 2;
      if (!close(s, e.s, 1e-8)) fail($sformatf("S got %.12g ref %.12g", s, e.s));
      if (int'(out_n) != e.n) fail("n");
      if (e.s2 - e.s > 1e-6) begin
        checks++;
        if (int'(out_r) != e.r) fail($sformatf("r got %0d ref %0d", out_r, e.r));
        for (int i = 0; i < NMAX; i++) begin
          real u, g;
          u = $bitstoreal(out_u[i]);
          g = $bitstoreal(out_g[i]);
          checks += 2;
          if (i < e.n) begin
            if (!close(u, e.u[i], 1e-5)) fail($sformatf("u[%0d] got %g ref %g", i, u, e.u[i]));
            if (absr(g - e.g[i]) > 1e-4 * (1 + absr(e.g[i]))) fail($sformatf("g[%0d] got %g ref %g", i, g, e.g[i]));
          end else begin
            if (out_u[i] != F64_ZERO || out_g[i] != F64_ZERO) fail("padding");
          end
        end
      end
      c_r[out_r]++;
      last_out_cyc <= cyc;
      n_res++;
    end
  end

  task automatic wr(int sel, int j, int i, real d);
    cfg_we = 1; cfg_sel = 3'(sel); cfg_j = 2'(j); cfg_i = 4'(i); cfg_data = $realtobits(d);
    @(negedge clk);
    cfg_we = 0;
  endtask

  logic took;

  task automatic send_point(int n, int stall_pct);
    real x[NMAX], t, s;
    real sj[M], uj[M][NMAX];
    exp_t e;
    t = ($urandom_range(9) == 0) ? 0.0 : $urandom_range(50000) / 100000.0;
    if (t == 0.0) c_t0++;
    s = t * ($urandom_range(1000) / 1000.0);
    for (int i = 0; i < n; i++) x[i] = $urandom_range(80000) / 10000.0 - 4.0;
    for (int j = 0; j < M; j++) begin
      sj[j] = al[j];
      for (int i = 0; i < n; i++) begin
        uj[j][i] = prox_ref(x[i], t, ya[j][i], av[i], bv[i], 1.0);
        sj[j] += f_ref(x[i], t, uj[j][i], av[i], bv[i], 1.0, ya[j][i]);
      end
    end
    e.r = 0;
    for (int j = 1; j < M; j++) if (sj[j] < sj[e.r]) e.r = j;
    e.s = sj[e.r];
    e.s2 = 1.0e300;
    for (int j = 0; j < M; j++) if (j != e.r && sj[j] < e.s2) e.s2 = sj[j];
    e.n = n;
    for (int i = 0; i < n; i++) begin
      real u, lo, hi;
      u = uj[e.r][i];
      e.u[i] = u;
      e.g[i] = g_ref(s, x[i], t, u, av[i], bv[i]);
      lo = x[i] - av[i] * t;
      hi = x[i] + bv[i] * t;
      if (absr(u - lo) < 1e-7 || absr(u - hi) < 1e-7) c_bnd++; else c_int++;
      if (u < 0) c_neg++; else c_pos++;
    end
    q.push_back(e);
    for (int i = 0; i < n; i++) begin
      in_valid = 1;
      in_d.x = $realtobits(x[i]);
      in_d.t = $realtobits(t);
      in_d.s = $realtobits(s);
      in_d.last = (i == n - 1);
      // in_ready is sampled just before the rising edge that uses it
      do begin
        out_ready = ($urandom_range(99) >= stall_pct);
        #4 took = in_ready;
        @(negedge clk);
      end while (!took);
    end
    c_dim[n / 4 - 1]++;
  endtask

  initial begin
    longint c0;
    rst_n = 0; cfg_we = 0; in_valid = 0; out_ready = 1;
    cfg_sel = 0; cfg_j = 0; cfg_i = 0; cfg_data = '0; in_d = '0;
    for (int i = 0; i < NMAX; i++) begin
      av[i] = (i == 0) ? 4.0 : (i == 1) ? 6.0 : 5.0;
      bv[i] = (i == 0) ? 3.0 : (i == 1) ? 9.0 : 6.0;
      for (int j = 0; j < M; j++) ya[j][i] = 0.0;
    end
    ya[0][0] = -2.0;
    ya[1][0] = 2.0; ya[1][1] = -2.0; ya[1][2] = -1.0;
    ya[2][1] = 2.0;
    al[0] = -0.5; al[1] = 0.0; al[2] = -1.0;
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < NMAX; i++) begin
      wr(0, 0, i, av[i]);
      wr(1, 0, i, bv[i]);
      for (int j = 0; j < M; j++) wr(2, j, i, ya[j][i]);
    end
    for (int j = 0; j < M; j++) wr(3, j, 0, al[j]);
    wr(4, 0, 0, 1.0);
    // phase 1: full-dimension points back to back, output always ready
    c0 = cyc;
    for (int p = 0; p < NPT1; p++) send_point(NMAX, 0);
    checks++;
    if (cyc - c0 != NPT1 * NMAX) fail($sformatf("II: %0d cycles for %0d coordinates", cyc - c0, NPT1 * NMAX));
    in_valid = 0;
    repeat (14) @(negedge clk);
    checks += 2;
    if (last_out_cyc - last_in_cyc != 11) fail($sformatf("latency %0d", last_out_cyc - last_in_cyc));
    if (n_res != NPT1) fail("phase 1 results missing");
    // phase 2: mixed dimensions, gaps and back-pressure
    for (int p = 0; p < NPT2; p++) begin
      send_point(4 * (1 + (p % 4)), 40);
      if ($urandom_range(3) == 0) begin
        in_valid = 0;
        @(negedge clk);
      end
    end
    in_valid = 0;
    out_ready = 1;
    repeat (20) @(negedge clk);
    checks++;
    if (q.size() != 0) fail($sformatf("%0d results missing", q.size()));
    $display("mechanisms: stall=%0d r=%0d/%0d/%0d dims=%0d/%0d/%0d/%0d t0=%0d bound=%0d interior=%0d u<0=%0d u>=0=%0d",
             c_stall, c_r[0], c_r[1], c_r[2], c_dim[0], c_dim[1], c_dim[2], c_dim[3],
             c_t0, c_bnd, c_int, c_neg, c_pos);
    checks += 12;
    if (c_stall == 0) fail("no output stall");
    for (int j = 0; j < M; j++) if (c_r[j] == 0) fail($sformatf("subproblem %0d never won", j));
    for (int d = 0; d < 4; d++) if (c_dim[d] == 0) fail("dimension not run");
    if (c_t0 == 0) fail("t = 0 never run");
    if (c_bnd == 0) fail("no boundary minimiser");
    if (c_int == 0) fail("no interior minimiser");
    if (c_neg == 0 || c_pos == 0) fail("sign of u* not covered");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
