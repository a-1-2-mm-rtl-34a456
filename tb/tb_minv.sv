// tb_minv: checks the 2x2 inversion unit.  For random diagonal blocks of the
// kind the factorization produces (Hermitian, positive definite, entries up
// to about 60, plus slightly non-Hermitian and general ones) it compares
// m * 2^alpha with a floating-point inverse, relative to the largest entry
// of the inverse.  It checks the four-cycle latency (outputs still hold the
// previous result three cycles after an issue) and that a singular block
// gives zero.
module tb_minv;
  import prep_pkg::*;
  import tb_pkg::*;

  logic  clk = 0, rst_n = 0, en = 0;
  mat2_t d, m;
  exp_t  alpha;
  minv dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    rm_t r, hw;
    real a0, d0, br, bi, sc, e, worst;
    mat2_t prev;
    worst = 0.0;
    d = '0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int trial = 0; trial < 60; trial++) begin
      sc = (trial % 3 == 0) ? 60.0 : (trial % 3 == 1) ? 4.0 : 0.3;
      a0 = sc * (0.2 + 0.8 * real'($urandom_range(1000)) / 1000.0);
      d0 = sc * (0.2 + 0.8 * real'($urandom_range(1000)) / 1000.0);
      br = 0.6 * $sqrt(a0 * d0) * rnd(1.0) / 1.5;
      bi = 0.6 * $sqrt(a0 * d0) * rnd(1.0) / 1.5;
      d[0][0] = mk(a0, (trial % 4 == 3) ? rnd(0.01 * sc) : 0.0);
      d[1][1] = mk(d0, 0.0);
      d[0][1] = mk(br, bi);
      d[1][0] = mk(br, (trial % 4 == 2) ? -bi + rnd(0.01 * sc) : -bi);
      if (trial >= 50) d = rnd_m(20.0);           // general complex blocks
      r = rm_inv(to_rm(d));
      prev = m;
      en <= 1;
      @(posedge clk);
      en <= 0;
      repeat (2) @(posedge clk);
      #1 check(m == prev, "output changed before four cycles");
      @(posedge clk);
      #1;
      hw = to_rm(m);
      for (int i = 0; i < 2; i++) for (int j = 0; j < 2; j++) for (int p = 0; p < 2; p++)
        hw[i][j][p] = hw[i][j][p] * $pow(2.0, real'(alpha));
      e = 0.0;
      for (int i = 0; i < 2; i++) for (int j = 0; j < 2; j++) for (int p = 0; p < 2; p++)
        if ((hw[i][j][p] - r[i][j][p]) ** 2 > e) e = (hw[i][j][p] - r[i][j][p]) ** 2;
      e = $sqrt(e) / rm_max(r);
      if (e > worst) worst = e;
      check(e < 2.0e-3, $sformatf("trial %0d relative error %g", trial, e));
      @(posedge clk);
    end
    d = '0;
    d[0][0] = mk(2.0, 0.0); d[0][1] = mk(1.0, 0.0); d[1][0] = mk(4.0, 0.0); d[1][1] = mk(2.0, 0.0);
    en <= 1;
    @(posedge clk);
    en <= 0;
    repeat (4) @(posedge clk);
    #1 check(m == '0, "singular block gives zero");
    $display("worst relative error %g", worst);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
