// minplus_combine_tb -- self-checking test of the min-plus selection.
//
// Drives M = 3 lockstep element streams with random u and gamma values and
// random per-point values S_j (ties between subproblems included), with
// random stalls and gaps. For each point it checks S = min_j S_j, r = the
// lowest index attaining it, the dimension n, the vectors u and gamma of
// subproblem r (zero beyond n), and that the result appears one enabled
// cycle after the last element and is held while ce is low.
module minplus_combine_tb;
  import fp64_pkg::*;
  import hj_pkg::*;

  localparam int NMAX = 16;
  localparam int M = 3;
  localparam int NPT = 400;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n, ce, in_valid, out_valid;
  quad_res_t [M-1:0] in_res;
  f64_t [M-1:0] in_s;
  f64_t out_s;
  logic [1:0] out_r;
  logic [4:0] out_n;
  f64_t [NMAX-1:0] out_u, out_g;

  minplus_combine #(.NMAX(NMAX), .M(M)) dut (.*);

  int checks = 0;
  int failures = 0;
  int r_seen[M];

  typedef struct {
    f64_t s;
    int r, n;
    f64_t u[NMAX];
    f64_t g[NMAX];
  } exp_t;
  exp_t q[$];
  logic expect_out = 0;

  task automatic fail(string msg);
    failures++;
    if (failures < 20) $display("FAIL %s", msg);
  endtask

  always @(posedge clk) begin
    if (rst_n && ce) begin
      checks++;
      if (out_valid != expect_out) fail("out_valid timing");
      if (out_valid) begin
        exp_t e;
        e = q.pop_front();
        checks += 3 + 2 * NMAX;
        if (out_s !== e.s) fail("S");
        if (int'(out_r) != e.r) fail($sformatf("r got %0d exp %0d", out_r, e.r));
        if (int'(out_n) != e.n) fail("n");
        r_seen[e.r]++;
        for (int i = 0; i < NMAX; i++) begin
          if (out_u[i] !== ((i < e.n) ? e.u[i] : F64_ZERO)) fail($sformatf("u[%0d]", i));
          if (out_g[i] !== ((i < e.n) ? e.g[i] : F64_ZERO)) fail($sformatf("g[%0d]", i));
        end
      end
      expect_out <= in_valid && in_res[0].last;
    end
  end

  always @(posedge clk)
    if (rst_n && !ce && out_valid) begin
      checks++;
      if (!expect_out) fail("result dropped during stall");
    end

  initial begin
    f64_t uu[M][NMAX], gg[M][NMAX];
    real sv[M];
    exp_t e;
    int n;
    rst_n = 0; ce = 1; in_valid = 0; in_res = '0; in_s = '0;
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1;
    for (int p = 0; p < NPT; p++) begin
      n = 1 + $urandom_range(NMAX - 1);
      for (int j = 0; j < M; j++) begin
        sv[j] = ($urandom_range(200) - 100) / 8.0;
        for (int i = 0; i < n; i++) begin
          uu[j][i] = $realtobits(($urandom_range(100000) - 50000) / 777.0);
          gg[j][i] = $realtobits(($urandom_range(100000) - 50000) / 555.0);
        end
      end
      if (p % 5 == 0) sv[2] = sv[1];
      if (p % 7 == 0) sv[1] = sv[0];
      e.r = 0;
      for (int j = 1; j < M; j++) if (sv[j] < sv[e.r]) e.r = j;
      e.s = $realtobits(sv[e.r]);
      e.n = n;
      for (int i = 0; i < NMAX; i++) begin
        e.u[i] = (i < n) ? uu[e.r][i] : F64_ZERO;
        e.g[i] = (i < n) ? gg[e.r][i] : F64_ZERO;
      end
      q.push_back(e);
      for (int i = 0; i < n; i++) begin
        in_valid = 1;
        for (int j = 0; j < M; j++) begin
          in_res[j].u = uu[j][i];
          in_res[j].g = gg[j][i];
          in_res[j].f = '0;
          in_res[j].last = (i == n - 1);
          in_s[j] = (i == n - 1) ? $realtobits(sv[j]) : {$urandom(), $urandom()};
        end
        ce = ($urandom_range(4) != 0);
        @(negedge clk);
        while (!ce) begin
          ce = ($urandom_range(4) != 0);
          @(negedge clk);
        end
        if ($urandom_range(9) == 0) begin
          in_valid = 0;
          @(negedge clk);
        end
      end
    end
    in_valid = 0;
    ce = 1;
    repeat (4) @(negedge clk);
    checks++;
    if (q.size() != 0) fail("results missing");
    for (int j = 0; j < M; j++) begin
      checks++;
      if (r_seen[j] == 0) fail($sformatf("subproblem %0d never selected", j));
    end
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
