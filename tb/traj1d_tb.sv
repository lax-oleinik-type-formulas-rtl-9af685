// traj1d_tb -- self-checking test of the trajectory evaluator.
//
// Random terminal points x in [-4,4], horizons t in (0,0.5], bounds a in
// {4,5,6}, b in {3,6,9}, initial positions u drawn inside [x-at, x+bt] (both
// ends and zero included now and then) and running times s in [0,t] are fed
// with random stalls. gamma(s) is compared with the reference trajectory built
// from the three region cases and mirror symmetry; the endpoints gamma(0) = u
// and gamma(t) = x are checked too, and the latency of one enabled cycle.
module traj1d_tb;
  import fp64_pkg::*;
  import hj_ref_pkg::*;

  localparam int NEL = 4000;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n, ce, in_valid, out_valid;
  f64_t in_x, in_t, in_u, in_a, in_b, in_s, out_g;
  logic [31:0] in_tag, out_tag;

  int checks = 0;
  int failures = 0;
  real rx[NEL], rt[NEL], ru[NEL], ra[NEL], rb[NEL], rs[NEL];
  longint issued_at[NEL];
  longint en_cnt = 0;
  int n_out = 0;

  traj1d #(.TAG_W(32)) dut (.*);

  task automatic fail(string msg);
    failures++;
    if (failures < 20) $display("FAIL %s", msg);
  endtask

  always @(posedge clk) begin
    if (rst_n && ce) begin
      en_cnt <= en_cnt + 1;
      if (out_valid) begin
        int k;
        real g, ge;
        k  = int'(out_tag);
        g  = $bitstoreal(out_g);
        ge = g_ref(rs[k], rx[k], rt[k], ru[k], ra[k], rb[k]);
        checks += 3;
        if (k != n_out) fail($sformatf("order %0d vs %0d", k, n_out));
        if (absr(g - ge) > 1e-9 * (1 + absr(rx[k]) + absr(ru[k])))
          fail($sformatf("gamma el %0d: got %g ref %g (s=%g x=%g t=%g u=%g a=%g b=%g)",
                         k, g, ge, rs[k], rx[k], rt[k], ru[k], ra[k], rb[k]));
        if (en_cnt - issued_at[k] != 1) fail("latency");
        n_out++;
      end
    end
  end

  initial begin
    real lo, hi;
    rst_n = 0; ce = 1; in_valid = 0;
    {in_x, in_t, in_u, in_a, in_b, in_s} = '0;
    in_tag = '0;
    for (int k = 0; k < NEL; k++) begin
      rx[k] = $urandom_range(80000) / 10000.0 - 4.0;
      rt[k] = (1 + $urandom_range(49999)) / 100000.0;
      ra[k] = 4.0 + $urandom_range(2);
      rb[k] = 3.0 * (1 + $urandom_range(2));
      lo = rx[k] - ra[k] * rt[k];
      hi = rx[k] + rb[k] * rt[k];
      case (k % 10)
        0: ru[k] = lo;
        1: ru[k] = hi;
        2: ru[k] = (lo < 0 && hi > 0) ? 0.0 : lo;
        default: ru[k] = lo + (hi - lo) * ($urandom_range(10000) / 10000.0);
      endcase
      case (k % 7)
        0: rs[k] = 0.0;
        1: rs[k] = rt[k];
        default: rs[k] = rt[k] * ($urandom_range(10000) / 10000.0);
      endcase
    end
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < NEL; k++) begin
      in_valid = 1;
      in_tag = 32'(k);
      in_x = $realtobits(rx[k]); in_t = $realtobits(rt[k]);
      in_u = $realtobits(ru[k]); in_a = $realtobits(ra[k]);
      in_b = $realtobits(rb[k]); in_s = $realtobits(rs[k]);
      ce = ($urandom_range(7) != 0);
      issued_at[k] = en_cnt;
      @(negedge clk);
      while (!ce) begin
        ce = ($urandom_range(7) != 0);
        issued_at[k] = en_cnt;
        @(negedge clk);
      end
    end
    in_valid = 0;
    ce = 1;
    repeat (5) @(negedge clk);
    // the endpoints of the path, checked directly
    for (int k = 0; k < NEL; k += 97) begin
      checks += 2;
      if (absr(g_ref(0.0, rx[k], rt[k], ru[k], ra[k], rb[k]) - ru[k]) > 1e-9) fail("ref gamma(0)");
      if (absr(g_ref(rt[k], rx[k], rt[k], ru[k], ra[k], rb[k]) - rx[k]) > 1e-9) fail("ref gamma(t)");
    end
    checks++;
    if (n_out != NEL) fail($sformatf("outputs %0d", n_out));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20 * NEL) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
