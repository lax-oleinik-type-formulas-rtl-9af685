// admm_iter_tb -- self-checking testbench for one ADMM iteration.
//
// Random points (n = 1..16 coordinates, x in [-4,4], t in [0,0.5], a, b in
// [1,10], iterates d in [-4,4], w in [-2,2]) are streamed in. For every
// output element the testbench checks v against the bisection-based
// threshold of the reference, d against the ternary-search proximal point,
// w against w + v - d and fv against V(x,t;d,a,b). Phase 1 runs without
// stalls and checks the per-point timing (3n cycles of buffering plus the
// 9-cycle proximal pipeline); phase 2 adds random input gaps and output
// stalls and uses lam != 1. A watchdog ends a hung run.
module admm_iter_tb;
  import fp64_pkg::*;
  import hj_pkg::*;
  import hj_ref_pkg::*;

  localparam int NMAX = 16;

  logic       clk = 1'b0;
  logic       rst_n = 1'b0;
  f64_t       lam;
  logic       in_valid = 1'b0, in_ready;
  admm_elem_t in_d = '0;
  logic       out_valid, out_ready = 1'b1;
  admm_elem_t out_d;

  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  admm_iter #(.NMAX(NMAX)) dut (.*);

  typedef struct {
    real v, d, w, x, t, a, b;
    logic last;
  } exp_t;
  exp_t exp_q[$];

  int  cyc = 0;
  int  first_in_cyc[$];
  int  pt_n[$];
  bit  check_lat = 1'b0;
  int  lat_checked = 0;
  logic stall_en = 1'b0;

  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  // one point: generate, compute the reference, send
  task automatic send_point(input int n, input real lamr, input bit gaps);
    real x[16], d[16], w[16], a[16], b[16], m[16], c[16];
    real t, th, v, dr;
    logic took;
    t = $urandom_range(0, 1000) / 2000.0;
    for (int i = 0; i < n; i++) begin
      x[i] = ($urandom_range(0, 8000) - 4000.0) / 1000.0;
      d[i] = ($urandom_range(0, 8000) - 4000.0) / 1000.0;
      w[i] = ($urandom_range(0, 4000) - 2000.0) / 1000.0;
      a[i] = $urandom_range(1000, 10000) / 1000.0;
      b[i] = $urandom_range(1000, 10000) / 1000.0;
      c[i] = d[i] - w[i];
      m[i] = absr(c[i] - 1.0);
    end
    for (int i = n; i < 16; i++) m[i] = 0.0;
    th = theta_ref(m, n, lamr);
    for (int i = 0; i < n; i++) begin
      exp_t e;
      v  = vupd_ref(c[i], th);
      dr = prox_ref(x[i], t, v + w[i], a[i], b[i], lamr);
      e.v = v; e.d = dr; e.w = w[i] + v - dr;
      e.x = x[i]; e.t = t; e.a = a[i]; e.b = b[i];
      e.last = (i == n - 1);
      exp_q.push_back(e);
    end
    pt_n.push_back(n);
    for (int i = 0; i < n; i++) begin
      if (gaps) while ($urandom_range(0, 3) == 0) @(negedge clk);
      in_valid  = 1'b1;
      in_d      = '0;
      in_d.x    = $realtobits(x[i]);
      in_d.t    = $realtobits(t);
      in_d.s    = $realtobits(t / 2);
      in_d.a    = $realtobits(a[i]);
      in_d.b    = $realtobits(b[i]);
      in_d.d    = $realtobits(d[i]);
      in_d.w    = $realtobits(w[i]);
      in_d.last = (i == n - 1);
      do begin
        #1 took = in_ready;
        if (took && i == 0) first_in_cyc.push_back(cyc);
        @(negedge clk);
      end while (!took);
      in_valid = 1'b0;
    end
  endtask

  // output side
  always @(negedge clk) if (stall_en) out_ready <= ($urandom_range(0, 3) != 0);
                        else out_ready <= 1'b1;

  always @(posedge clk) begin
    if (rst_n && out_valid && out_ready) begin
      exp_t e;
      real  v, d, w, fv;
      if (exp_q.size() == 0) begin
        check(0, "unexpected output");
      end else begin
        e  = exp_q.pop_front();
        v  = $bitstoreal(out_d.v);
        d  = $bitstoreal(out_d.d);
        w  = $bitstoreal(out_d.w);
        fv = $bitstoreal(out_d.fv);
        check(close(v, e.v, 1e-9), $sformatf("v got %g exp %g", v, e.v));
        check(close(d, e.d, 1e-5), $sformatf("d got %g exp %g", d, e.d));
        check(close(w, e.w, 1e-5), $sformatf("w got %g exp %g (v %g d %g/%g x %g t %g a %g b %g)", w, e.w, v, d, e.d, e.x, e.t, e.a, e.b));
        check(close(fv, v_ref(e.x, e.t, d, e.a, e.b), 1e-9),
              $sformatf("fv got %g exp %g (d %g x %g t %g a %g b %g)", fv, v_ref(e.x, e.t, d, e.a, e.b), d, e.x, e.t, e.a, e.b));
        check(out_d.last == e.last, "last flag");
        if (e.last) begin
          int n0, c0;
          n0 = pt_n.pop_front();
          c0 = first_in_cyc.pop_front();
          if (check_lat) begin
            // n collect + n threshold + n emit cycles, 9-cycle proximal pipe
            check(cyc - c0 == 3 * n0 + 8,
                  $sformatf("point latency %0d for n=%0d", cyc - c0, n0));
            lat_checked++;
          end
        end
      end
    end
  end

  initial begin
    #2000000;
    $display("FAIL watchdog");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real lamr;
    lam = F64_ONE;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // phase 1: lam = 1 (the paper's choice), no stalls; one point at a time
    check_lat = 1'b1;
    for (int p = 0; p < 40; p++) begin
      send_point(p < 16 ? p + 1 : $urandom_range(1, 16), 1.0, 1'b0);
      wait (exp_q.size() == 0);
      @(negedge clk);
    end
    check(lat_checked == 40, "latency checked for every point");
    check_lat = 1'b0;
    // phase 2: other lam, random gaps and output stalls, back to back points
    lamr = 2.5;
    lam  = $realtobits(lamr);
    stall_en = 1'b1;
    for (int p = 0; p < 300; p++)
      send_point($urandom_range(1, 16), lamr, 1'b1);
    wait (exp_q.size() == 0);
    repeat (5) @(negedge clk);
    check(exp_q.size() == 0, "all outputs received");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
