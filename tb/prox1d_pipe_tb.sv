// prox1d_pipe_tb -- self-checking test of the one-dimensional proximal solver.
//
// Random elements (x in [-4,4], t in [0,0.5], z in [-5,5], a in {4,5,6},
// b in {3,6,9}, lambda in [0.25,4]) are streamed with random stalls (ce low).
// Each result is checked against the reference model: the minimiser against
// a ternary search of F over [x-at, x+bt], the objective and the value part
// against F and V re-evaluated from the region-by-region definition, and the
// latency against 9 enabled cycles. Corner cases t = 0 and z far outside the
// domain are included.
module prox1d_pipe_tb;
  import fp64_pkg::*;
  import hj_pkg::*;
  import hj_ref_pkg::*;

  localparam int LAT = 9;
  localparam int NEL = 3000;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n;
  logic ce;
  logic in_valid;
  prox_in_t in_d;
  logic [31:0] in_tag;
  logic out_valid;
  prox_out_t out_d;
  logic [31:0] out_tag;

  int checks = 0;
  int failures = 0;

  prox1d_pipe #(.TAG_W(32)) dut (
    .clk, .rst_n, .ce, .in_valid, .in_d, .in_tag, .out_valid, .out_d, .out_tag
  );

  real px[NEL], pt[NEL], pz[NEL], pa[NEL], pb[NEL], pl[NEL];
  longint issued_at[NEL];
  longint en_cnt = 0;
  int n_out = 0;

  task automatic fail(string msg);
    failures++;
    if (failures < 20) $display("FAIL %s", msg);
  endtask

  // monitor: consume results on enabled edges
  always @(posedge clk) begin
    if (rst_n && ce) begin
      en_cnt <= en_cnt + 1;
      if (out_valid) begin
        int k;
        real u_ref, f_at, v_at, f_min, u, f, v;
        k = int'(out_tag);
        u = $bitstoreal(out_d.u);
        f = $bitstoreal(out_d.f);
        v = $bitstoreal(out_d.v);
        u_ref = prox_ref(px[k], pt[k], pz[k], pa[k], pb[k], pl[k]);
        f_min = f_ref(px[k], pt[k], u_ref, pa[k], pb[k], pl[k], pz[k]);
        f_at  = f_ref(px[k], pt[k], u, pa[k], pb[k], pl[k], pz[k]);
        v_at  = v_ref(px[k], pt[k], u, pa[k], pb[k]);
        checks += 5;
        if (k != n_out) fail($sformatf("order: got %0d expected %0d", k, n_out));
        if (!close(u, u_ref, 1e-5))
          fail($sformatf("u el %0d: got %g ref %g (x=%g t=%g z=%g a=%g b=%g l=%g)",
                         k, u, u_ref, px[k], pt[k], pz[k], pa[k], pb[k], pl[k]));
        if (!close(f, f_min, 1e-9) && !(f < f_min))
          fail($sformatf("F el %0d: got %g ref %g", k, f, f_min));
        if (!close(f, f_at, 1e-9))
          fail($sformatf("F(u) el %0d: got %g re-evaluated %g", k, f, f_at));
        if (!close(v, v_at, 1e-9))
          fail($sformatf("V(u) el %0d: got %g re-evaluated %g", k, v, v_at));
        if (en_cnt - issued_at[k] != LAT)
          fail($sformatf("latency el %0d: %0d", k, en_cnt - issued_at[k]));
        n_out++;
      end
    end
  end

  initial begin
    rst_n = 1'b0;
    ce = 1'b1;
    in_valid = 1'b0;
    in_d = '0;
    in_tag = '0;
    for (int k = 0; k < NEL; k++) begin
      px[k] = ($urandom_range(80000) / 10000.0) - 4.0;
      pt[k] = (k % 50 == 7) ? 0.0 : $urandom_range(50000) / 100000.0;
      pz[k] = ($urandom_range(100000) / 10000.0) - 5.0;
      if (k % 40 == 3) pz[k] = 40.0;
      if (k % 40 == 5) pz[k] = -40.0;
      pa[k] = 4.0 + $urandom_range(2);
      pb[k] = 3.0 * (1 + $urandom_range(2));
      pl[k] = (k % 3 == 0) ? 1.0 : 0.25 + $urandom_range(3750) / 1000.0;
    end
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < NEL; k++) begin
      in_valid = 1'b1;
      in_tag   = 32'(k);
      in_d.x   = $realtobits(px[k]);
      in_d.t   = $realtobits(pt[k]);
      in_d.z   = $realtobits(pz[k]);
      in_d.a   = $realtobits(pa[k]);
      in_d.b   = $realtobits(pb[k]);
      in_d.lam = $realtobits(pl[k]);
      ce = ($urandom_range(9) != 0);
      issued_at[k] = en_cnt;
      @(negedge clk);
      while (!ce) begin
        ce = ($urandom_range(9) != 0);
        issued_at[k] = en_cnt;
        @(negedge clk);
      end
    end
    in_valid = 1'b0;
    ce = 1'b1;
    repeat (LAT + 5) @(negedge clk);
    checks++;
    if (n_out != NEL) fail($sformatf("results: %0d of %0d", n_out, NEL));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10 * NEL + 1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
