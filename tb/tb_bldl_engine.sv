// tb_bldl_engine: checks the block-LDL engine at N = 4 (U = 8) with a plain
// array standing in for the register array.  The array is loaded with the
// lower blocks of A = H^H H + r I for random H; after done, every L_ij,
// D_jj and D_jj^-1 block must match a floating-point run of the block-LDL
// recursion (Alg. 1) on the same A, and the engine must have been busy for
// exactly its table length.  Two matrices are factorised back to back.
module tb_bldl_engine;
  import prep_pkg::*;
  import tb_pkg::*;

  localparam int N = 4, U = 2 * N, B = 16, NB = N * (N + 1) / 2;

  logic          clk = 0, rst_n = 0, start = 0, busy, done, wr_en;
  logic [AW-1:0] rd_addr, wr_addr;
  mat2_t         rd_data, wr_data;
  bldl_engine #(.N(N)) dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  mat2_t mem [NB + N];
  assign rd_data = (int'(rd_addr) < NB + N) ? mem[rd_addr] : '0;
  always @(posedge clk) if (wr_en) mem[wr_addr] <= wr_data;

  rm_t ab [N][N];              // A blocks (lower), then reference L
  rm_t db [N], dib [N];        // reference D_jj and D_jj^-1
  int  n_busy;
  always @(posedge clk) if (busy) n_busy++;

  function automatic rm_t rm_sub(input rm_t a, input rm_t b);
    rm_t r;
    for (int i = 0; i < 2; i++) for (int j = 0; j < 2; j++) for (int p = 0; p < 2; p++)
      r[i][j][p] = a[i][j][p] - b[i][j][p];
    return r;
  endfunction

  initial begin
    real hr [B][U], hi [B][U];
    real e, scale;
    rm_t s;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int run = 0; run < 2; run++) begin
      for (int b = 0; b < B; b++) for (int u = 0; u < U; u++) begin
        hr[b][u] = rnd(0.7); hi[b][u] = rnd(0.7);
      end
      for (int i = 0; i < N; i++) for (int j = 0; j <= i; j++) begin
        mat2_t q;
        for (int p = 0; p < 2; p++) for (int c = 0; c < 2; c++) begin
          real sr, si;
          sr = 0.0;
          si = 0.0;
          for (int b = 0; b < B; b++) begin   // a_mn = sum conj(h_m) h_n
            sr += hr[b][2*i+p] * hr[b][2*j+c] + hi[b][2*i+p] * hi[b][2*j+c];
            si += hr[b][2*i+p] * hi[b][2*j+c] - hi[b][2*i+p] * hr[b][2*j+c];
          end
          if (2 * i + p == 2 * j + c) sr += 0.5 + run;
          q[p][c] = mk(sr, si);
        end
        mem[blk_addr(i, j)] = q;
        ab[i][j] = to_rm(q);
      end
      for (int j = 0; j < N; j++) mem[NB + j] = '0;
      // floating-point block LDL (Alg. 1)
      for (int j = 0; j < N; j++) begin
        s = ab[j][j];
        for (int k = 0; k < j; k++) s = rm_sub(s, rm_mul(rm_mul(ab[j][k], db[k]), rm_herm(ab[j][k])));
        db[j] = s;
        dib[j] = rm_inv(s);
        for (int i = j + 1; i < N; i++) begin
          s = ab[i][j];
          for (int k = 0; k < j; k++) s = rm_sub(s, rm_mul(rm_mul(ab[i][k], db[k]), rm_herm(ab[j][k])));
          ab[i][j] = rm_mul(s, dib[j]);
        end
      end
      n_busy = 0;
      start <= 1;
      @(posedge clk);
      start <= 0;
      while (!done) @(posedge clk);
      @(posedge clk);
      check(n_busy == bldl_len(N), $sformatf("busy %0d cycles, table has %0d", n_busy, bldl_len(N)));
      for (int j = 0; j < N; j++) begin
        scale = rm_max(db[j]);
        e = rm_err(mem[blk_addr(j, j)], db[j]);
        check(e < 1e-3 * scale + 4 * LSB, $sformatf("D_%0d error %g", j, e));
        scale = rm_max(dib[j]);
        e = rm_err(mem[NB + j], dib[j]);
        check(e < 1e-2 * scale + 2 * LSB, $sformatf("D_%0d^-1 error %g (max %g)", j, e, scale));
        for (int i = j + 1; i < N; i++) begin
          e = rm_err(mem[blk_addr(i, j)], ab[i][j]);
          check(e < 1e-2 * rm_max(ab[i][j]) + 8 * LSB, $sformatf("L_%0d%0d error %g", i, j, e));
        end
      end
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
