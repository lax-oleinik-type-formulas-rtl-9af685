// hj_fpga_top_tb -- full-size end-to-end test of the top level with its
// default parameters (NMAX = 16, M = 3, N_ITER = 4), both kernels running at
// the same time.
//
// Min-plus side (Sec. 3.3 example): J(x) = min_j { 1/2 ||x - y_j||^2 + alpha_j }
// with y_1 = (-2,0,...), y_2 = (2,-2,-1,0,...), y_3 = (0,2,0,...),
// alpha = (-0.5, 0, -1), a = (4,6,5,...,5), b = (3,9,6,...,6), lambda = 1;
// points x in [-4,4]^n, t in [0,0.5], n in {4,8,12,16}. Checked: S, the
// selected piece r, u*, gamma(s), the initiation interval (one coordinate per
// cycle) and the 11-cycle latency.
// ADMM side (Sec. 3.2 example): J(x) = 1/2 ||x - 1||_1^2, same a, b,
// lambda = 1, d^0 = x, w^0 = 0, four iterations. Checked against a real
// arithmetic run of the same iterations: u = d^N, V_i, gamma_i(s), S, the
// isolated-point latency n + 4 (2n + 9) and the stream interval 3n + 9.
// Mechanism counters (each must be non-zero, or the test fails): output
// stalls on both kernels, every piece selected, every dimension, t = 0, a
// minimiser at a domain end and one inside, u* < 0 and u* >= 0, and in the
// ADMM v-update both a shrunk coordinate (|z_i| > theta) and one set to 1.
module hj_fpga_top_tb;
  import fp64_pkg::*;
  import hj_pkg::*;
  import hj_ref_pkg::*;

  localparam int NMAX = 16;
  localparam int M = 3;
  localparam int NPT1 = 20;
  localparam int NPT2 = 60;

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

  // ADMM side signals
  logic       ad_cfg_we = 1'b0;
  logic [2:0] ad_cfg_sel = '0;
  logic [3:0] ad_cfg_i = '0;
  f64_t       ad_cfg_data = '0;
  logic       ad_in_valid = 1'b0, ad_in_ready;
  pt_elem_t   ad_in_d = '0;
  logic       ad_out_valid, ad_out_ready = 1'b1;
  quad_res_t  ad_out_d;
  f64_t       ad_out_s;

  hj_fpga_top dut (
    .clk, .rst_n,
    .mp_cfg_we(cfg_we), .mp_cfg_sel(cfg_sel), .mp_cfg_j(cfg_j), .mp_cfg_i(cfg_i),
    .mp_cfg_data(cfg_data), .mp_in_valid(in_valid), .mp_in_ready(in_ready),
    .mp_in_d(in_d), .mp_out_valid(out_valid), .mp_out_ready(out_ready),
    .mp_out_s(out_s), .mp_out_r(out_r), .mp_out_n(out_n), .mp_out_u(out_u),
    .mp_out_g(out_g),
    .ad_cfg_we, .ad_cfg_sel, .ad_cfg_i, .ad_cfg_data, .ad_in_valid,
    .ad_in_ready, .ad_in_d, .ad_out_valid, .ad_out_ready, .ad_out_d, .ad_out_s
  );

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

  // ---------------------------------------------------------------- ADMM side
  localparam int N_ITER = 4;

  typedef struct {
    real u, g, x, t, s_pt;
    int  i;
    logic last;
  } ad_exp_t;
  ad_exp_t ad_q[$];
  int  ad_first_in[$], ad_n_q[$], ad_last_out[$];
  bit  ad_check_lat = 1'b0;
  int  ad_stall_pct = 0;
  int  c_ad_stall = 0, c_shrink = 0, c_one = 0, ad_res = 0;

  always @(posedge clk) begin
    if (rst_n && ad_out_valid && !ad_out_ready) c_ad_stall++;
    if (rst_n && ad_out_valid && ad_out_ready) begin
      ad_exp_t e;
      real u, f, g, sp;
      if (ad_q.size() == 0) begin
        checks++;
        fail("unexpected ADMM output");
      end else begin
        e = ad_q.pop_front();
        u = $bitstoreal(ad_out_d.u);
        f = $bitstoreal(ad_out_d.f);
        g = $bitstoreal(ad_out_d.g);
        checks += 4;
        if (!close(u, e.u, 1e-5)) fail($sformatf("ADMM u got %g ref %g", u, e.u));
        if (!close(f, v_ref(e.x, e.t, u, av[e.i], bv[e.i]), 1e-9)) fail("ADMM V");
        if (!close(g, e.g, 1e-4)) fail($sformatf("ADMM g got %g ref %g", g, e.g));
        if (ad_out_d.last != e.last) fail("ADMM last flag");
        if (e.last) begin
          int n0, c0;
          sp = $bitstoreal(ad_out_s);
          checks++;
          if (!close(sp, e.s_pt, 1e-5)) fail($sformatf("ADMM S got %g ref %g", sp, e.s_pt));
          n0 = ad_n_q.pop_front();
          c0 = ad_first_in.pop_front();
          ad_last_out.push_back(int'(cyc));
          ad_res++;
          if (ad_check_lat) begin
            checks++;
            if (int'(cyc) - c0 != n0 + N_ITER * (2 * n0 + 9))
              fail($sformatf("ADMM latency %0d for n=%0d", int'(cyc) - c0, n0));
          end
        end
      end
    end
  end

  task automatic ad_wr(int sel, int i, real d);
    ad_cfg_we = 1; ad_cfg_sel = 3'(sel); ad_cfg_i = 4'(i); ad_cfg_data = $realtobits(d);
    @(negedge clk);
    ad_cfg_we = 0;
  endtask

  task automatic ad_send_point(int n, bit gaps);
    real x[16], d[16], w[16], m[16], v[16];
    real t, s, th, sv, sl;
    logic ad_took;
    t = $urandom_range(0, 1000) / 2000.0;
    s = t * $urandom_range(0, 1000) / 1000.0;
    for (int i = 0; i < n; i++) begin
      x[i] = ($urandom_range(0, 8000) - 4000.0) / 1000.0;
      d[i] = x[i];
      w[i] = 0.0;
    end
    for (int k = 0; k < N_ITER; k++) begin
      for (int i = 0; i < 16; i++) m[i] = (i < n) ? absr(d[i] - w[i] - 1.0) : 0.0;
      th = theta_ref(m, n, 1.0);
      for (int i = 0; i < n; i++) begin
        v[i] = vupd_ref(d[i] - w[i], th);
        if (m[i] > th + 1e-9) c_shrink++;
        else if (m[i] < th - 1e-9) c_one++;
        d[i] = prox_ref(x[i], t, v[i] + w[i], av[i], bv[i], 1.0);
        w[i] = w[i] + v[i] - d[i];
      end
    end
    sv = 0.0;
    sl = 0.0;
    for (int i = 0; i < n; i++) begin
      sv = sv + v_ref(x[i], t, d[i], av[i], bv[i]);
      sl = sl + absr(d[i] - 1.0);
    end
    for (int i = 0; i < n; i++) begin
      ad_exp_t e;
      e.u = d[i];
      e.g = g_ref(s, x[i], t, d[i], av[i], bv[i]);
      e.x = x[i]; e.t = t; e.i = i;
      e.s_pt = sv + 0.5 * sl * sl;
      e.last = (i == n - 1);
      ad_q.push_back(e);
    end
    ad_n_q.push_back(n);
    for (int i = 0; i < n; i++) begin
      if (gaps) while ($urandom_range(0, 3) == 0) @(negedge clk);
      ad_in_valid  = 1'b1;
      ad_in_d.x    = $realtobits(x[i]);
      ad_in_d.t    = $realtobits(t);
      ad_in_d.s    = $realtobits(s);
      ad_in_d.last = (i == n - 1);
      do begin
        ad_out_ready = ($urandom_range(99) >= ad_stall_pct);
        #4 ad_took = ad_in_ready;
        if (ad_took && i == 0) ad_first_in.push_back(int'(cyc));
        @(negedge clk);
      end while (!ad_took);
      ad_in_valid = 1'b0;
    end
  endtask

  bit ad_done = 1'b0;

  task automatic ad_run();
    // isolated points: exact latency
    ad_check_lat = 1'b1;
    for (int n = 4; n <= 16; n += 4) begin
      ad_send_point(n, 1'b0);
      while (ad_q.size() != 0) @(negedge clk);
      @(negedge clk);
    end
    ad_check_lat = 1'b0;
    // a burst of 16-dimensional points: steady interval 3n + 9
    ad_last_out.delete();
    for (int p = 0; p < 8; p++) ad_send_point(16, 1'b0);
    while (ad_q.size() != 0) @(negedge clk);
    @(negedge clk);
    for (int p = 4; p < 8; p++) begin
      checks++;
      if (ad_last_out[p] - ad_last_out[p-1] != 57)
        fail($sformatf("ADMM interval %0d", ad_last_out[p] - ad_last_out[p-1]));
    end
    // random dimensions with gaps and output back-pressure
    ad_stall_pct = 30;
    for (int p = 0; p < 40; p++) ad_send_point(4 * (1 + (p % 4)), 1'b1);
    ad_stall_pct = 0;
    ad_out_ready = 1'b1;
    while (ad_q.size() != 0) @(negedge clk);
    ad_done = 1'b1;
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
    for (int i = 0; i < NMAX; i++) begin
      ad_wr(0, i, av[i]);
      ad_wr(1, i, bv[i]);
    end
    ad_wr(4, 0, 1.0);
    fork
      ad_run();
    join_none
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
    while (!ad_done) @(negedge clk);
    repeat (5) @(negedge clk);
    checks += 2;
    if (ad_q.size() != 0) fail("ADMM results missing");
    if (ad_res != 52) fail($sformatf("ADMM results %0d", ad_res));
    checks++;
    if (q.size() != 0) fail($sformatf("%0d results missing", q.size()));
    $display("mechanisms: stall=%0d r=%0d/%0d/%0d dims=%0d/%0d/%0d/%0d t0=%0d bound=%0d interior=%0d u<0=%0d u>=0=%0d",
             c_stall, c_r[0], c_r[1], c_r[2], c_dim[0], c_dim[1], c_dim[2], c_dim[3],
             c_t0, c_bnd, c_int, c_neg, c_pos);
    $display("ADMM mechanisms: stall=%0d shrunk=%0d set_to_one=%0d",
             c_ad_stall, c_shrink, c_one);
    checks += 15;
    if (c_ad_stall == 0) fail("no ADMM output stall");
    if (c_shrink == 0) fail("no shrunk coordinate in the v-update");
    if (c_one == 0) fail("no coordinate set to 1 in the v-update");
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
    repeat (200000) @(posedge clk);
    $display("FAIL watchdog");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
