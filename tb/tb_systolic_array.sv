// tb_systolic_array: checks the triangular array at U = 8 in both modes.
// Gram mode: after B = 12 random rows and one regularisation cycle every
// lower 2x2 block read out must match H^H H + r I computed in floating
// point.  Backward substitution: random unit block-lower-triangular L and
// Hermitian positive-definite blocks D_j are sent over the load port the way
// the register array forwards them (L_ij and D_j^-1, plus a D_j write that
// must be ignored); after the 2U-cycle run every upper entry of
// X = (L D L^H)^-1 must have appeared exactly once on the column outputs,
// match a floating-point inverse, and x_00 must be the last, in cycle 2U.
module tb_systolic_array;
  import prep_pkg::*;
  import tb_pkg::*;

  localparam int U = 8, B = 12, N = U / 2, NB = N * (N + 1) / 2;

  logic          clk = 0, rst_n = 0, clr = 0, gram_en = 0, reg_en = 0, ld_valid = 0, bs_load = 0, bs_en = 0;
  cplx_t         h_row [U];
  fx_t           reg_val;
  logic [7:0]    blk_i, blk_j, bs_t;
  mat2_t         blk_out, ld_data;
  logic [AW-1:0] ld_addr;
  cplx_t         out_data [U];
  logic          out_valid [U];
  logic [7:0]    out_row [U];
  systolic_array #(.U(U)) dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  real hr [B][U], hi [B][U];
  real gr [U][U], gi [U][U];
  real lr [U][U], li [U][U];      // L
  real dr [U][U], di [U][U];      // block-diagonal D (from the quantised D^-1)
  real tr [U][U], ti [U][U];      // L D
  real ar [U][2*U], ai [U][2*U];
  int  got [U][U];
  int  last_t;
  real xr [U][U], xi [U][U];

  task automatic gauss_jordan();
    real pr, pi, d, fr, fi, ur, ui;
    for (int m = 0; m < U; m++) for (int n = 0; n < U; n++) begin
      ar[m][U+n] = (m == n) ? 1.0 : 0.0;
      ai[m][U+n] = 0.0;
    end
    for (int c = 0; c < U; c++) begin
      pr = ar[c][c]; pi = ai[c][c]; d = pr * pr + pi * pi;
      for (int n = 0; n < 2 * U; n++) begin
        ur = (ar[c][n] * pr + ai[c][n] * pi) / d;
        ui = (ai[c][n] * pr - ar[c][n] * pi) / d;
        ar[c][n] = ur; ai[c][n] = ui;
      end
      for (int m = 0; m < U; m++) if (m != c) begin
        fr = ar[m][c]; fi = ai[m][c];
        for (int n = 0; n < 2 * U; n++) begin
          ar[m][n] -= fr * ar[c][n] - fi * ai[c][n];
          ai[m][n] -= fr * ai[c][n] + fi * ar[c][n];
        end
      end
    end
  endtask

  always @(posedge clk) if (bs_en)
    for (int n = 0; n < U; n++) if (out_valid[n]) begin
      got[out_row[n]][n]++;
      xr[out_row[n]][n] = to_r(out_data[n].re);
      xi[out_row[n]][n] = to_r(out_data[n].im);
      last_t = int'(bs_t);
    end

  initial begin
    real e, emax, xmax, r;
    mat2_t blk, dq, dinvq;
    rm_t dm;
    for (int u = 0; u < U; u++) h_row[u] = '0;
    reg_val = '0; blk_i = '0; blk_j = '0; bs_t = '0; ld_addr = '0; ld_data = '0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    // ================= Gram mode
    clr <= 1;
    @(posedge clk);
    clr <= 0;
    for (int m = 0; m < U; m++) for (int n = 0; n < U; n++) begin gr[m][n] = 0; gi[m][n] = 0; end
    for (int b = 0; b < B; b++) begin
      for (int u = 0; u < U; u++) begin
        h_row[u] <= rnd_c(0.7);
        #0;
      end
      #1;
      for (int u = 0; u < U; u++) begin hr[b][u] = to_r(h_row[u].re); hi[b][u] = to_r(h_row[u].im); end
      for (int m = 0; m < U; m++) for (int n = 0; n < U; n++) begin
        gr[m][n] += hr[b][m] * hr[b][n] + hi[b][m] * hi[b][n];
        gi[m][n] += hr[b][m] * hi[b][n] - hi[b][m] * hr[b][n];
      end
      gram_en <= 1;
      @(posedge clk);
    end
    gram_en <= 0;
    r = 0.625;
    reg_val <= to_fx(r);
    reg_en <= 1;
    @(posedge clk);
    reg_en <= 0;
    for (int m = 0; m < U; m++) gr[m][m] += r;
    for (int i = 0; i < N; i++)
      for (int j = 0; j <= i; j++) begin
        blk_i = 8'(i); blk_j = 8'(j);
        #1;
        for (int p = 0; p < 2; p++) for (int q = 0; q < 2; q++) begin
          e = $sqrt((to_r(blk_out[p][q].re) - gr[2*i+p][2*j+q]) ** 2 + (to_r(blk_out[p][q].im) - gi[2*i+p][2*j+q]) ** 2);
          check(e < B * LSB, $sformatf("A block (%0d,%0d) entry (%0d,%0d) error %g", i, j, p, q, e));
        end
      end
    // ================= backward substitution
    for (int m = 0; m < U; m++) for (int n = 0; n < U; n++) begin
      lr[m][n] = (m == n) ? 1.0 : 0.0; li[m][n] = 0.0; dr[m][n] = 0.0; di[m][n] = 0.0;
    end
    @(posedge clk);
    for (int i = 0; i < N; i++)
      for (int j = 0; j <= i; j++) begin
        if (i > j) begin
          blk = rnd_m(0.5);
          for (int p = 0; p < 2; p++) for (int q = 0; q < 2; q++) begin
            lr[2*i+p][2*j+q] = to_r(blk[p][q].re); li[2*i+p][2*j+q] = to_r(blk[p][q].im);
          end
          ld_valid <= 1; ld_addr <= AW'(blk_addr(i, j)); ld_data <= blk;
          @(posedge clk);
        end else begin
          dq[0][0] = mk(1.0 + rnd(0.5) + 1.0, 0.0);
          dq[1][1] = mk(2.0 + rnd(0.5), 0.0);
          dq[0][1] = rnd_c(0.4);
          dq[1][0] = cconj(dq[0][1]);
          dm = rm_inv(to_rm(dq));
          for (int p = 0; p < 2; p++) for (int q = 0; q < 2; q++) dinvq[p][q] = mk(dm[p][q][0], dm[p][q][1]);
          dm = rm_inv(to_rm(dinvq));   // the D the quantised D^-1 belongs to
          for (int p = 0; p < 2; p++) for (int q = 0; q < 2; q++) begin
            dr[2*j+p][2*j+q] = dm[p][q][0]; di[2*j+p][2*j+q] = dm[p][q][1];
          end
          ld_valid <= 1; ld_addr <= AW'(blk_addr(j, j)); ld_data <= rnd_m(3.0);   // D_j: ignored
          @(posedge clk);
          ld_valid <= 1; ld_addr <= AW'(NB + j); ld_data <= dinvq;
          @(posedge clk);
        end
      end
    ld_valid <= 0;
    // A = L D L^H
    for (int m = 0; m < U; m++) for (int n = 0; n < U; n++) begin
      tr[m][n] = 0; ti[m][n] = 0;
      for (int k = 0; k < U; k++) begin
        tr[m][n] += lr[m][k] * dr[k][n] - li[m][k] * di[k][n];
        ti[m][n] += lr[m][k] * di[k][n] + li[m][k] * dr[k][n];
      end
    end
    for (int m = 0; m < U; m++) for (int n = 0; n < U; n++) begin
      ar[m][n] = 0; ai[m][n] = 0;
      for (int k = 0; k < U; k++) begin   // (L D) L^H
        ar[m][n] += tr[m][k] * lr[n][k] + ti[m][k] * li[n][k];
        ai[m][n] += ti[m][k] * lr[n][k] - tr[m][k] * li[n][k];
      end
    end
    gauss_jordan();
    for (int m = 0; m < U; m++) for (int n = 0; n < U; n++) got[m][n] = 0;
    last_t = 0;
    @(posedge clk);
    for (int t = 1; t <= 2 * U; t++) begin
      bs_t <= 8'(t);
      bs_load <= (t == 1);
      bs_en <= (t > 1);
      @(posedge clk);
    end
    bs_en <= 0; bs_load <= 0; bs_t <= '0;
    @(posedge clk);
    emax = 0; xmax = 0;
    for (int m = 0; m < U; m++) for (int n = m; n < U; n++)
      if ($sqrt(ar[m][U+n] ** 2 + ai[m][U+n] ** 2) > xmax) xmax = $sqrt(ar[m][U+n] ** 2 + ai[m][U+n] ** 2);
    for (int m = 0; m < U; m++) for (int n = m; n < U; n++) begin
      e = $sqrt((xr[m][n] - ar[m][U+n]) ** 2 + (xi[m][n] - ai[m][U+n]) ** 2);
      if (e > emax) emax = e;
      check(got[m][n] == 1, $sformatf("x[%0d][%0d] seen %0d times", m, n, got[m][n]));
      check(e < 0.01 * xmax, $sformatf("x[%0d][%0d] error %g", m, n, e));
    end
    check(last_t == 2 * U && got[0][0] == 1, $sformatf("last output in cycle %0d", last_t));
    $display("backward substitution: max error %g, max |x| %g", emax, xmax);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
