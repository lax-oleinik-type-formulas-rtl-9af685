// admm_kernel_tb -- self-checking testbench for the ADMM solver kernel with
// the example of Sec. 3.2: J(x) = 1/2 ||x - 1||_1^2, a = (4, 6, 5, ..., 5),
// b = (3, 9, 6, ..., 6), lam = 1, d^0 = x, w^0 = 0, x in [-4,4]^n,
// t in [0, 0.5], s in [0, t], default parameters (NMAX = 16, N_ITER = 4).
//
// The reference runs the same number of ADMM iterations in real arithmetic
// (bisection for the v-update threshold, ternary search for the d-update)
// and the testbench compares u = d^N, F_i = V_i(d_i), gamma_i(s) and S.
// Timing checks: an isolated point of n coordinates leaves after exactly
// n + N_ITER (2n + 9) cycles, and a burst of equal-size points settles to
// one point per 3n + 9 cycles (a stage collects a point while the previous
// stage drains it from its 9-cycle proximal pipeline, then spends n cycles on
// the threshold and n on emitting). A
// final phase adds random input gaps and output stalls. Watchdog included.
module admm_kernel_tb;
  import fp64_pkg::*;
  import hj_pkg::*;
  import hj_ref_pkg::*;

  localparam int NMAX   = 16;
  localparam int N_ITER = 4;

  logic       clk = 1'b0;
  logic       rst_n = 1'b0;
  logic       cfg_we = 1'b0;
  logic [2:0] cfg_sel = '0;
  logic [3:0] cfg_i = '0;
  f64_t       cfg_data = '0;
  logic       in_valid = 1'b0, in_ready;
  pt_elem_t   in_d = '0;
  logic       out_valid, out_ready = 1'b1;
  quad_res_t  out_d;
  f64_t       out_s;

  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  admm_kernel dut (.*);

  real pa[16], pb[16];

  typedef struct {
    real u, g, x, t;
    int  i;
    real s_pt;
    logic last;
  } exp_t;
  exp_t exp_q[$];

  int   cyc = 0;
  int   first_in_cyc[$];
  int   pt_n[$];
  int   last_out_cyc[$];
  bit   check_lat = 1'b0;
  logic stall_en = 1'b0;

  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  task automatic wr(input int sel, input int i, input real v);
    @(negedge clk);
    cfg_we = 1'b1; cfg_sel = 3'(sel); cfg_i = 4'(i); cfg_data = $realtobits(v);
    @(negedge clk);
    cfg_we = 1'b0;
  endtask

  task automatic send_point(input int n, input bit gaps);
    real x[16], d[16], w[16], m[16], v[16];
    real t, s, th, sv, sl;
    logic took;
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
        d[i] = prox_ref(x[i], t, v[i] + w[i], pa[i], pb[i], 1.0);
        w[i] = w[i] + v[i] - d[i];
      end
    end
    sv = 0.0;
    sl = 0.0;
    for (int i = 0; i < n; i++) begin
      sv = sv + v_ref(x[i], t, d[i], pa[i], pb[i]);
      sl = sl + absr(d[i] - 1.0);
    end
    for (int i = 0; i < n; i++) begin
      exp_t e;
      e.u = d[i];
      e.g = g_ref(s, x[i], t, d[i], pa[i], pb[i]);
      e.x = x[i]; e.t = t; e.i = i;
      e.s_pt = sv + 0.5 * sl * sl;
      e.last = (i == n - 1);
      exp_q.push_back(e);
    end
    pt_n.push_back(n);
    for (int i = 0; i < n; i++) begin
      if (gaps) while ($urandom_range(0, 3) == 0) @(negedge clk);
      in_valid  = 1'b1;
      in_d.x    = $realtobits(x[i]);
      in_d.t    = $realtobits(t);
      in_d.s    = $realtobits(s);
      in_d.last = (i == n - 1);
      do begin
        #1 took = in_ready;
        if (took && i == 0) first_in_cyc.push_back(cyc);
        @(negedge clk);
      end while (!took);
      in_valid = 1'b0;
    end
  endtask

  always @(negedge clk) if (stall_en) out_ready <= ($urandom_range(0, 3) != 0);
                        else out_ready <= 1'b1;

  always @(posedge clk) begin
    if (rst_n && out_valid && out_ready) begin
      exp_t e;
      real  u, f, g, sp;
      if (exp_q.size() == 0) begin
        check(0, "unexpected output");
      end else begin
        e  = exp_q.pop_front();
        u  = $bitstoreal(out_d.u);
        f  = $bitstoreal(out_d.f);
        g  = $bitstoreal(out_d.g);
        check(close(u, e.u, 1e-5), $sformatf("u got %g exp %g", u, e.u));
        check(close(f, v_ref(e.x, e.t, u, pa[e.i], pb[e.i]), 1e-9),
              $sformatf("f got %g", f));
        check(close(g, e.g, 1e-4), $sformatf("g got %g exp %g", g, e.g));
        check(out_d.last == e.last, "last flag");
        if (e.last) begin
          int n0, c0;
          sp = $bitstoreal(out_s);
          check(close(sp, e.s_pt, 1e-5), $sformatf("S got %g exp %g", sp, e.s_pt));
          n0 = pt_n.pop_front();
          c0 = first_in_cyc.pop_front();
          last_out_cyc.push_back(cyc);
          if (check_lat)
            check(cyc - c0 == n0 + N_ITER * (2 * n0 + 9),
                  $sformatf("latency %0d for n=%0d", cyc - c0, n0));
        end
      end
    end
  end

  initial begin
    #5000000;
    $display("FAIL watchdog");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 16; i++) begin
      pa[i] = (i == 0) ? 4.0 : (i == 1) ? 6.0 : 5.0;
      pb[i] = (i == 0) ? 3.0 : (i == 1) ? 9.0 : 6.0;
    end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 16; i++) begin
      wr(0, i, pa[i]);
      wr(1, i, pb[i]);
    end
    // phase 1: isolated points, exact latency
    check_lat = 1'b1;
    for (int p = 0; p < 32; p++) begin
      send_point(p < 16 ? p + 1 : $urandom_range(1, 16), 1'b0);
      wait (exp_q.size() == 0);
      @(negedge clk);
    end
    check_lat = 1'b0;
    // phase 2: bursts of equal-size points, steady-state interval 3n + 9
    for (int n = 4; n <= 16; n += 4) begin
      last_out_cyc.delete();
      for (int p = 0; p < 12; p++) send_point(n, 1'b0);
      wait (exp_q.size() == 0);
      @(negedge clk);
      check(last_out_cyc.size() == 12, "burst size");
      for (int p = 6; p < 12; p++)
        check(last_out_cyc[p] - last_out_cyc[p-1] == 3 * n + 9,
              $sformatf("interval %0d for n=%0d", last_out_cyc[p] - last_out_cyc[p-1], n));
    end
    // phase 3: random sizes, input gaps and output stalls
    stall_en = 1'b1;
    for (int p = 0; p < 150; p++) send_point($urandom_range(1, 16), 1'b1);
    wait (exp_q.size() == 0);
    repeat (5) @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
