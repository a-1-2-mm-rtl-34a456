// tb_pe: checks one processing element in both modes.  Gram mode: the
// accumulator must equal a floating-point sum of A*conj(B) over random
// operands, plus the regularisation value.  Backward substitution: after a
// load it must equal the loaded value plus the sum of a_in*b, where b is
// the value shifted in from b_in one cycle earlier; x_out must repeat b_in
// one cycle later; y_out must show acc when `own` is set and a_in otherwise.
module tb_pe;
  import prep_pkg::*;
  import tb_pkg::*;

  logic  clk = 0, rst_n = 0, clr = 0, gram_en = 0, reg_en = 0, bs_load = 0, bs_en = 0, own = 0;
  fx_t   reg_val;
  cplx_t load_val, A, B, a_in, b_in, x_out, y_out, acc;
  pe dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic real cerr(input cplx_t c, input real re, input real im);
    return $sqrt((to_r(c.re) - re) ** 2 + (to_r(c.im) - im) ** 2);
  endfunction

  initial begin
    real sr, si, ar, ai, br, bi, lr, li;
    cplx_t bprev;
    A = '0; B = '0; a_in = '0; b_in = '0; load_val = '0; reg_val = '0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int trial = 0; trial < 4; trial++) begin
      // ---- Gram mode
      clr <= 1;
      @(posedge clk);
      clr <= 0;
      sr = 0.0; si = 0.0;
      for (int k = 0; k < 32; k++) begin
        A <= rnd_c(0.7);
        B <= rnd_c(0.7);
        gram_en <= 1;
        #1;
        ar = to_r(A.re); ai = to_r(A.im); br = to_r(B.re); bi = to_r(B.im);
        sr += ar * br + ai * bi;
        si += ai * br - ar * bi;
        @(posedge clk);
      end
      gram_en <= 0;
      reg_val <= to_fx(0.375);
      reg_en <= 1;
      @(posedge clk);
      reg_en <= 0;
      #1;
      check(cerr(acc, sr + 0.375, si) < 32 * LSB, $sformatf("Gram sum error %g", cerr(acc, sr + 0.375, si)));
      // ---- backward substitution
      load_val <= rnd_c(0.2);
      b_in <= rnd_c(1.0);
      bs_load <= 1;
      #1;
      lr = to_r(load_val.re); li = to_r(load_val.im);
      @(posedge clk);
      bs_load <= 0;
      #1;
      check(cerr(acc, lr, li) == 0.0, "load");
      sr = lr; si = li;
      for (int k = 0; k < 8; k++) begin
        bprev = x_out;
        a_in <= rnd_c(0.2);
        b_in <= rnd_c(1.0);
        bs_en <= 1;
        own <= 0;
        #1;
        check(y_out == a_in, "y_out passes a_in");
        ar = to_r(a_in.re); ai = to_r(a_in.im); br = to_r(bprev.re); bi = to_r(bprev.im);
        sr += ar * br - ai * bi;
        si += ar * bi + ai * br;
        @(posedge clk);
        #1;
        check(x_out == b_in, "b register shifts");
      end
      bs_en <= 0;
      own <= 1;
      #1;
      check(y_out == acc, "y_out shows acc when own");
      check(cerr(acc, sr, si) < 8 * LSB, $sformatf("substitution sum error %g", cerr(acc, sr, si)));
      own <= 0;
      @(posedge clk);
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
