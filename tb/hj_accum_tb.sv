// hj_accum_tb -- self-checking test of the per-point reduction.
//
// Points of random length (1..16 elements) with random element values are
// streamed with random stalls and random gaps (in_valid low). The sum is
// recomputed in real arithmetic in the same order (IEEE double, so the result
// must match bit for bit) with alpha added; out_valid must pulse exactly once
// per point, one enabled cycle after its last element.
module hj_accum_tb;
  import fp64_pkg::*;

  localparam int NPT = 600;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n, ce, in_valid, in_last, out_valid;
  f64_t alpha, in_f, out_s;

  int checks = 0;
  int failures = 0;
  real exp_s[$];
  logic expect_out = 1'b0;

  hj_accum dut (.*);

  task automatic fail(string msg);
    failures++;
    if (failures < 20) $display("FAIL %s", msg);
  endtask

  always @(posedge clk) begin
    if (rst_n && ce) begin
      checks++;
      if (out_valid != expect_out) fail("out_valid timing");
      if (out_valid && exp_s.size() > 0) begin
        real e;
        e = exp_s.pop_front();
        checks++;
        if (out_s !== $realtobits(e))
          fail($sformatf("S got %g expected %g", $bitstoreal(out_s), e));
      end
      expect_out <= in_valid && in_last;
    end
  end

  initial begin
    real acc, f, al;
    int n;
    rst_n = 0; ce = 1; in_valid = 0; in_last = 0; in_f = '0;
    al = -0.5;
    alpha = $realtobits(al);
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1;
    for (int p = 0; p < NPT; p++) begin
      n = 1 + $urandom_range(15);
      acc = 0.0;
      for (int i = 0; i < n; i++) begin
        f = ($urandom_range(2000000) - 1000000) / 3333.0;
        acc = acc + f;
        in_valid = 1;
        in_f = $realtobits(f);
        in_last = (i == n - 1);
        if (in_last) exp_s.push_back(acc + al);
        ce = ($urandom_range(5) != 0);
        @(negedge clk);
        while (!ce) begin
          ce = ($urandom_range(5) != 0);
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
    if (exp_s.size() != 0) fail("missing results");
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
