// fp64_pkg_tb -- self-checking test of the binary64 functions in fp64_pkg.
//
// Random operands with exponents in a moderate range (no subnormals, no
// overflow) are pushed through f_add, f_sub, f_mul, f_div and f_sqrt and the
// results are compared bit for bit with the simulator's own IEEE double
// arithmetic (real, $realtobits), which rounds to nearest even as the package
// does. Comparisons and min/max are checked against real comparisons. A
// watchdog ends the run if it does not finish.
module fp64_pkg_tb;
  import fp64_pkg::*;

  int checks = 0;
  int failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  function automatic real rnd_real(int emax);
    logic [63:0] b;
    int          e;
    e = int'($urandom_range(2 * emax)) - emax;
    b = {$urandom(), $urandom()};
    b[62:52] = 11'(1023 + e);
    return $bitstoreal(b);
  endfunction

  task automatic check_bits(string what, f64_t got, real exp_r);
    checks++;
    if (got !== $realtobits(exp_r)) begin
      failures++;
      if (failures < 10)
        $display("MISMATCH %s got %h (%g) expected %h (%g)", what, got,
                  $bitstoreal(got), $realtobits(exp_r), exp_r);
    end
  endtask

  initial begin
    real a, b;
    repeat (4000) begin
      a = rnd_real(40);
      b = rnd_real(40);
      if ($urandom_range(3) == 0) b = a * (1.0 + rnd_real(2) * 1.0e-9);
      check_bits("add", f_add($realtobits(a), $realtobits(b)), a + b);
      check_bits("sub", f_sub($realtobits(a), $realtobits(b)), a - b);
      check_bits("mul", f_mul($realtobits(a), $realtobits(b)), a * b);
      check_bits("div", f_div($realtobits(a), $realtobits(b)), a / b);
      check_bits("sqrt", f_sqrt($realtobits(a < 0 ? -a : a)), $sqrt(a < 0 ? -a : a));
      checks++;
      if (f_lt($realtobits(a), $realtobits(b)) != (a < b)) failures++;
      check_bits("min", f_min($realtobits(a), $realtobits(b)), (a < b) ? a : b);
      check_bits("max", f_max($realtobits(a), $realtobits(b)), (a < b) ? b : a);
    end
    // special values
    check_bits("add0", f_add($realtobits(3.5), $realtobits(-3.5)), 0.0);
    check_bits("mul0", f_mul($realtobits(0.0), $realtobits(7.0)), 0.0);
    check_bits("twice", f_twice($realtobits(-1.25)), -2.5);
    checks++;
    if (!f_lt($realtobits(1.0e300), F64_PINF)) failures++;
    checks++;
    if (f_add(F64_PINF, $realtobits(-5.0)) !== F64_PINF) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
