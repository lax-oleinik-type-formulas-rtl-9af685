// coef_store_tb -- self-checking test of the constant tables.
//
// Loads random a_i, b_i, y_j[i], alpha_j and lambda through the write port,
// keeping a copy in the testbench, then advances the element counter through
// points of random length (with idle cycles in between) and checks that the
// index and every table read at that index match the copy. Rewrites between
// points check that the tables can be reloaded.
module coef_store_tb;
  import fp64_pkg::*;

  localparam int NMAX = 16;
  localparam int M = 3;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n, cfg_we, adv, adv_last;
  logic [2:0] cfg_sel;
  logic [1:0] cfg_j;
  logic [3:0] cfg_i, idx;
  f64_t cfg_data, a, b, lam;
  f64_t [M-1:0] y, alpha;

  coef_store #(.NMAX(NMAX), .M(M)) dut (.*);

  int checks = 0;
  int failures = 0;
  f64_t ma[NMAX], mb[NMAX], my[M][NMAX], malpha[M], mlam;

  task automatic fail(string msg);
    failures++;
    if (failures < 20) $display("FAIL %s", msg);
  endtask

  task automatic wr(int sel, int j, int i, f64_t d);
    cfg_we = 1; cfg_sel = 3'(sel); cfg_j = 2'(j); cfg_i = 4'(i); cfg_data = d;
    @(negedge clk);
    cfg_we = 0;
  endtask

  task automatic load_all();
    for (int i = 0; i < NMAX; i++) begin
      ma[i] = {$urandom(), $urandom()}; wr(0, 0, i, ma[i]);
      mb[i] = {$urandom(), $urandom()}; wr(1, 0, i, mb[i]);
      for (int j = 0; j < M; j++) begin
        my[j][i] = {$urandom(), $urandom()}; wr(2, j, i, my[j][i]);
      end
    end
    for (int j = 0; j < M; j++) begin
      malpha[j] = {$urandom(), $urandom()}; wr(3, j, 0, malpha[j]);
    end
    mlam = {$urandom(), $urandom()}; wr(4, 0, 0, mlam);
  endtask

  initial begin
    int n;
    rst_n = 0; cfg_we = 0; adv = 0; adv_last = 0;
    cfg_sel = 0; cfg_j = 0; cfg_i = 0; cfg_data = '0;
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1;
    checks++;
    if (lam !== F64_ONE || idx !== 0) fail("reset values");
    for (int round = 0; round < 4; round++) begin
      load_all();
      for (int p = 0; p < 40; p++) begin
        n = 1 + $urandom_range(NMAX - 1);
        for (int i = 0; i < n; i++) begin
          adv = 1;
          adv_last = (i == n - 1);
          #1;
          checks += 4 + M;
          if (int'(idx) != i) fail($sformatf("idx %0d expected %0d", idx, i));
          if (a !== ma[i]) fail("a");
          if (b !== mb[i]) fail("b");
          if (lam !== mlam) fail("lam");
          for (int j = 0; j < M; j++) begin
            if (y[j] !== my[j][i]) fail($sformatf("y[%0d][%0d]", j, i));
            if (alpha[j] !== malpha[j]) fail("alpha");
          end
          @(negedge clk);
          if ($urandom_range(3) == 0) begin
            adv = 0;
            @(negedge clk);
            checks++;
            if (int'(idx) != ((i == n - 1) ? 0 : i + 1)) fail("idx held");
          end
        end
        adv = 0;
      end
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
