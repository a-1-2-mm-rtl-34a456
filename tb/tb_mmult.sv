// tb_mmult: checks the matrix multiplication unit against a floating-point
// product A*B*2^alpha for exponents from -12 to +3, within one LSB plus the
// rounding of the reference inputs, and its one-cycle latency.
module tb_mmult;
  import prep_pkg::*;
  import tb_pkg::*;

  logic  clk = 0, rst_n = 0, en = 0;
  mat2_t a, b, q;
  exp_t  alpha;
  mmult dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    rm_t r;
    real sc;
    mat2_t held;
    a = '0; b = '0; alpha = '0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int trial = 0; trial < 60; trial++) begin
      int al;
      al = -12 + (trial % 16);
      a <= rnd_m(8.0);
      b <= rnd_m(2.0);
      alpha <= exp_t'(al);
      en <= 1;
      #1;
      sc = 2.0 ** al;
      r = rm_mul(to_rm(a), to_rm(b));
      for (int i = 0; i < 2; i++) for (int j = 0; j < 2; j++) begin r[i][j][0] *= sc; r[i][j][1] *= sc; end
      held = q;
      @(posedge clk);
      en <= 0;
      #1;
      if (rm_max(r) < 120.0)
        check(rm_err(q, r) <= 0.51 * LSB, $sformatf("alpha %0d error %g LSB", al, rm_err(q, r) / LSB));
      check(q != held || rm_err(held, r) <= LSB, "result one cycle after issue");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
