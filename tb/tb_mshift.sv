// tb_mshift: checks the block scaler against a floating-point product with
// 2^alpha, rounded to nearest, for exponents from -20 to +6, and that
// results beyond the format saturate to its limits.
module tb_mshift;
  import prep_pkg::*;
  import tb_pkg::*;

  mat2_t a, q;
  exp_t  alpha;
  mshift dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    rm_t r;
    real sc;
    for (int trial = 0; trial < 80; trial++) begin
      int al;
      al = -20 + (trial % 27);
      a = rnd_m(1.0);
      alpha = exp_t'(al);
      #1;
      sc = 2.0 ** al;
      r = to_rm(a);
      for (int i = 0; i < 2; i++) for (int j = 0; j < 2; j++) begin r[i][j][0] *= sc; r[i][j][1] *= sc; end
      if (rm_max(r) < 127.0)
        check(rm_err(q, r) <= 0.5 * LSB, $sformatf("alpha %0d error %g LSB", al, rm_err(q, r) / LSB));
    end
    a = '0;
    a[0][0] = mk(100.0, -100.0);
    alpha = 3;
    #1;
    check(q[0][0].re == fx_t'(20'hFFFFF) && q[0][0].im == fx_t'(21'h100000), "saturation");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
