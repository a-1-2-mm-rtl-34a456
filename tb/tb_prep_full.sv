// tb_prep_full: end-to-end test of the preprocessing engine at its default
// size (64 x 16), the same checks as tb_prep_top.
//
// For several random channel matrices (each row scaled to a largest
// magnitude of one, as the engine expects) it feeds the rows with one
// deliberately stalled cycle, supplies N0/Es, collects the upper triangle of
// A^-1 from the column outputs and compares it with an inverse computed here
// in floating point (complex Gauss-Jordan elimination on the same quantised
// H).  It also checks the length of every step (B rows, N(N+1)/2 register
// writes, the engine's table length, 2U backward-substitution cycles), that
// each upper entry arrives exactly once, and that every mechanism happened:
// an input stall, regularisation, MMAC, MSUB, MINV with a non-zero exponent,
// MMULT, the conjugate path into the diagonal elements and back-to-back
// matrices.
module tb_prep_full;
  import prep_pkg::*;

  localparam int U    = 16;
  localparam int B    = 64;
  localparam int N    = U / 2;
  localparam int NMAT = 2;
  localparam real TOL = 0.02;   // error bound, relative to the largest |A^-1| entry

  logic       clk = 1'b0;
  logic       rst_n = 1'b0;
  logic       start = 1'b0;
  logic       in_valid = 1'b0;
  logic       in_ready;
  cplx_t      in_row [U];
  fx_t        reg_val;
  logic       out_valid [U];
  logic [7:0] out_row [U];
  cplx_t      out_data [U];
  logic       busy, done;

  prep_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  function automatic fx_t to_fx(input real v);
    return fx_t'($rtoi(v * real'(1 << F) + (v >= 0 ? 0.5 : -0.5)));
  endfunction
  function automatic real to_r(input fx_t v);
    return real'(v) / real'(1 << F);
  endfunction

  // ---------------------------------------------------------- reference
  real hr [B][U], hi [B][U];
  real ar [U][2*U], ai [U][2*U];   // augmented [A | I]
  real xr [U][U], xi [U][U];
  real regv;

  task automatic make_matrix(input int seed_mode);
    real mx, m2, vr, vi;
    for (int b = 0; b < B; b++) begin
      mx = 0.0;
      for (int u = 0; u < U; u++) begin
        vr = (real'($urandom_range(2000)) - 1000.0) / 1000.0;
        vi = (real'($urandom_range(2000)) - 1000.0) / 1000.0;
        hr[b][u] = vr;
        hi[b][u] = vi;
        m2 = $sqrt(vr * vr + vi * vi);
        if (m2 > mx) mx = m2;
      end
      for (int u = 0; u < U; u++) begin
        hr[b][u] = to_r(to_fx(hr[b][u] / mx));
        hi[b][u] = to_r(to_fx(hi[b][u] / mx));
      end
    end
    regv = to_r(to_fx((seed_mode == 0) ? 0.25 : 1.0 + 0.5 * real'(seed_mode)));
  endtask

  task automatic reference_inverse();
    real pr, pi, d, fr, fi, tr, ti;
    for (int m = 0; m < U; m++)
      for (int n = 0; n < 2 * U; n++) begin
        ar[m][n] = 0.0;
        ai[m][n] = 0.0;
      end
    for (int m = 0; m < U; m++) begin
      for (int n = 0; n < U; n++)
        for (int b = 0; b < B; b++) begin   // conj(h_m) h_n
          ar[m][n] += hr[b][m] * hr[b][n] + hi[b][m] * hi[b][n];
          ai[m][n] += hr[b][m] * hi[b][n] - hi[b][m] * hr[b][n];
        end
      ar[m][m] += regv;
      ar[m][U+m] = 1.0;
    end
    for (int c = 0; c < U; c++) begin
      pr = ar[c][c];
      pi = ai[c][c];
      d  = pr * pr + pi * pi;
      for (int n = 0; n < 2 * U; n++) begin   // row c /= pivot
        tr = (ar[c][n] * pr + ai[c][n] * pi) / d;
        ti = (ai[c][n] * pr - ar[c][n] * pi) / d;
        ar[c][n] = tr;
        ai[c][n] = ti;
      end
      for (int m = 0; m < U; m++) if (m != c) begin
        fr = ar[m][c];
        fi = ai[m][c];
        for (int n = 0; n < 2 * U; n++) begin
          ar[m][n] -= fr * ar[c][n] - fi * ai[c][n];
          ai[m][n] -= fr * ai[c][n] + fi * ar[c][n];
        end
      end
    end
    for (int m = 0; m < U; m++)
      for (int n = 0; n < U; n++) begin
        xr[m][n] = ar[m][U+n];
        xi[m][n] = ai[m][U+n];
      end
  endtask

  // ---------------------------------------------------------- monitors
  int n_stall = 0, n_reg = 0, n_gram = 0, n_wr = 0, n_eng = 0, n_bs = 0;
  int n_mmac = 0, n_msub = 0, n_minv = 0, n_mmult = 0, n_alpha = 0, n_conj = 0, n_mat = 0;
  int got [U][U];
  real hwr [U][U], hwi [U][U];

  always @(posedge clk) if (rst_n) begin
    if (in_ready && !in_valid) n_stall++;
    if (dut.gram_en)           n_gram++;
    if (dut.reg_en)            n_reg++;
    if (dut.ra_wr_en)          n_wr++;
    if (dut.eng_busy)          n_eng++;
    if (dut.bs_load || dut.bs_en) n_bs++;
    if (dut.u_eng.ins.mmac_en)  n_mmac++;
    if (dut.u_eng.ins.msub_en)  n_msub++;
    if (dut.u_eng.ins.minv_en)  n_minv++;
    if (dut.u_eng.ins.mmult_en) n_mmult++;
    if (dut.u_eng.ins.wr_en && dut.u_eng.ins.wr_src == WSRC_DINV && dut.u_eng.alpha != 0) n_alpha++;
    if (dut.bs_en && dut.u_sa.g_dmux[0].dg != '0) n_conj++;
    for (int n = 0; n < U; n++)
      if (out_valid[n]) begin
        got[out_row[n]][n]++;
        hwr[out_row[n]][n] = to_r(out_data[n].re);
        hwi[out_row[n]][n] = to_r(out_data[n].im);
      end
  end

  // ---------------------------------------------------------- stimulus
  initial begin : main
    real emax, xmax, er;
    int  c0, c1;
    for (int u = 0; u < U; u++) in_row[u] = '0;
    reg_val = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int mat = 0; mat < NMAT; mat++) begin
      make_matrix(mat);
      reference_inverse();
      for (int m = 0; m < U; m++) for (int n = 0; n < U; n++) got[m][n] = 0;
      n_gram = 0; n_wr = 0; n_eng = 0; n_bs = 0; n_reg = 0;
      reg_val <= to_fx(regv);
      start <= 1'b1;
      @(posedge clk);
      start <= 1'b0;
      c0 = $time / 10;
      for (int b = 0; b < B; b++) begin
        if (b == B / 2) begin          // one idle input cycle
          in_valid <= 1'b0;
          @(posedge clk);
        end
        in_valid <= 1'b1;
        for (int u = 0; u < U; u++) in_row[u] <= '{re: to_fx(hr[b][u]), im: to_fx(hi[b][u])};
        @(posedge clk);
        while (!in_ready) @(posedge clk);
      end
      in_valid <= 1'b0;
      while (!done) @(posedge clk);
      c1 = $time / 10;
      @(posedge clk);
      n_mat++;
      // step lengths
      check(n_gram == B, $sformatf("gram cycles %0d", n_gram));
      check(n_reg == 1, "one regularisation cycle");
      check(n_wr == N * (N + 1) / 2, $sformatf("register-array writes %0d", n_wr));
      check(n_eng == bldl_len(N), $sformatf("engine cycles %0d vs %0d", n_eng, bldl_len(N)));
      check(n_bs == 2 * U, $sformatf("backward substitution cycles %0d", n_bs));
      check(c1 - c0 == B + 1 + 1 + N * (N + 1) / 2 + 1 + bldl_len(N) + 1 + 2 * U + 1,
            $sformatf("matrix latency %0d cycles", c1 - c0));
      // values
      emax = 0.0;
      xmax = 0.0;
      for (int m = 0; m < U; m++)
        for (int n = m; n < U; n++) begin
          er = $sqrt((hwr[m][n] - xr[m][n]) ** 2 + (hwi[m][n] - xi[m][n]) ** 2);
          if (er > emax) emax = er;
          if ($sqrt(xr[m][n] ** 2 + xi[m][n] ** 2) > xmax) xmax = $sqrt(xr[m][n] ** 2 + xi[m][n] ** 2);
        end
      for (int m = 0; m < U; m++)
        for (int n = m; n < U; n++) begin
          er = $sqrt((hwr[m][n] - xr[m][n]) ** 2 + (hwi[m][n] - xi[m][n]) ** 2);
          check(got[m][n] == 1, $sformatf("x[%0d][%0d] delivered %0d times", m, n, got[m][n]));
          check(er <= TOL * xmax, $sformatf("x[%0d][%0d] = (%f,%f), expected (%f,%f)",
                m, n, hwr[m][n], hwi[m][n], xr[m][n], xi[m][n]));
        end
      $display("matrix %0d: %0d cycles, max |error| %g, max |x| %g", mat, c1 - c0, emax, xmax);
    end
    // every mechanism
    check(n_stall > 0, "input stall");
    check(n_mmac > 0 && n_msub > 0 && n_minv > 0 && n_mmult > 0, "all four engine units used");
    check(n_alpha > 0, "non-zero inversion exponent");
    check(n_conj > 0, "conjugate path into a diagonal element");
    check(n_mat == NMAT, "back-to-back matrices");
    $display("mechanisms: stall=%0d mmac=%0d msub=%0d minv=%0d mmult=%0d alpha!=0=%0d conj=%0d matrices=%0d",
             n_stall, n_mmac, n_msub, n_minv, n_mmult, n_alpha, n_conj, n_mat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (NMAT * (B + 2 * U + bldl_len(N) + N * N + 100)) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
