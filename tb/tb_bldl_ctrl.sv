// tb_bldl_ctrl: checks the instruction table and its sequencer for N = 8
// block rows (U = 16).  It counts the operations the block-LDL recursion
// needs (sum_j (N-j) j MMAC terms, N(N+1)/2 subtractions, N inversions,
// N(N-1)/2 multiplications, three block fetches per MMAC term plus one per
// subtraction, one write per result) and checks the data dependencies of
// every fetch and that each sum is restarted by its first term: an L block is read only after it was written by MMULT, a D
// block only after it was written by MSUB, an A block only before it is
// overwritten.  It also checks the run length (448 cycles) and that done
// pulses once, right after the last row.
module tb_bldl_ctrl;
  import prep_pkg::*;

  localparam int N = 8;
  localparam int NB = N * (N + 1) / 2;

  logic   clk = 0, rst_n = 0, start = 0, busy, done;
  instr_t instr;
  bldl_ctrl #(.N(N)) dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int n_clr, first_term, n_mmac, n_msub, n_minv, n_mmult, n_rd, n_wr, n_busy, n_done;
  bit written_l [NB], written_d [NB], overwritten [NB];
  int blk_i [NB], blk_j [NB];

  initial begin
    int exp_mmac = 0;
    for (int j = 0; j < N; j++) exp_mmac += (N - j) * j;
    for (int i = 0; i < N; i++) for (int j = 0; j <= i; j++) begin
      blk_i[i * (i + 1) / 2 + j] = i;
      blk_j[i * (i + 1) / 2 + j] = j;
    end
    for (int run = 0; run < 2; run++) begin
      n_clr = 0; first_term = 1; n_mmac = 0; n_msub = 0; n_minv = 0; n_mmult = 0; n_rd = 0; n_wr = 0; n_busy = 0; n_done = 0;
      for (int k = 0; k < NB; k++) begin written_l[k] = 0; written_d[k] = 0; overwritten[k] = 0; end
      repeat (2) @(posedge clk);
      rst_n <= 1;
      start <= 1;
      @(posedge clk);
      start <= 0;
      #1;
      while (!done) begin
        if (busy) n_busy++;
        n_mmac  += int'(instr.mmac_en);
        if (instr.mmac_en) begin
          check(instr.mmac_clr == first_term, "first MMAC term of each sum restarts it, others do not");
          n_clr += int'(instr.mmac_clr);
          first_term = 0;
        end
        if (instr.msub_en) first_term = 1;
        n_msub  += int'(instr.msub_en);
        n_minv  += int'(instr.minv_en);
        n_mmult += int'(instr.mmult_en);
        if (instr.rd_en) begin
          int a;
          a = int'(instr.rd_addr);
          n_rd++;
          check(a < NB, "fetch address inside the A/L/D area");
          if (a < NB) begin
            if (instr.rd_dst == DST_OPA) check(!overwritten[a], $sformatf("A block %0d fetched after overwrite", a));
            else if (blk_i[a] == blk_j[a]) check(written_d[a], $sformatf("D block %0d fetched before written", a));
            else check(written_l[a], $sformatf("L block %0d fetched before written", a));
          end
        end
        if (instr.wr_en) begin
          int a;
          a = int'(instr.wr_addr);
          n_wr++;
          if (a < NB) begin
            overwritten[a] = 1;
            if (instr.wr_src == WSRC_SUB)   written_d[a] = 1;
            if (instr.wr_src == WSRC_MMULT) written_l[a] = 1;
            check((instr.wr_src == WSRC_SUB) == (blk_i[a] == blk_j[a]), $sformatf("write source %0d for block %0d", instr.wr_src, a));
          end else check(instr.wr_src == WSRC_DINV && a < NB + N, "D^-1 slot written from the inverter");
        end
        @(posedge clk);
        #1;
      end
      n_done++;
      @(posedge clk);
      #1 check(!done && !busy, "done is a single pulse");
      check(n_busy == 448 && n_busy == bldl_len(N), $sformatf("run length %0d", n_busy));
      check(n_mmac == exp_mmac, $sformatf("MMAC terms %0d", n_mmac));
      check(n_msub == NB, "subtractions");
      check(n_clr == NB - N, $sformatf("restarted sums %0d", n_clr));
      check(n_minv == N, "inversions");
      check(n_mmult == N * (N - 1) / 2, "multiplications");
      check(n_rd == 3 * exp_mmac + NB, "fetches");
      check(n_wr == NB + N, "writes");
    end
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
