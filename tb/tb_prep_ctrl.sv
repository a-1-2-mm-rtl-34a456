// tb_prep_ctrl: checks the top-level sequencer with U = 16, B = 64 and a
// model of the engine that answers eng_start with done after 40 cycles.
// Checked: rows are counted only when in_valid is high (a stalled cycle adds
// one), exactly B Gram cycles then one regularisation cycle, 36 register
// writes with addresses 0..35 in order together with the matching block
// indices, one engine start, a backward-substitution window of 2U cycles
// with bs_t counting 1..2U (load in the first), then a single done pulse.
module tb_prep_ctrl;
  import prep_pkg::*;

  localparam int U = 16, B = 64, N = U / 2, NB = N * (N + 1) / 2;

  logic          clk = 0, rst_n = 0, start = 0, in_valid = 0, in_ready;
  logic          sa_clr, gram_en, reg_en, ra_wr_en, eng_start, eng_done = 0, bs_load, bs_en, busy, done;
  logic [7:0]    blk_i, blk_j, bs_t;
  logic [AW-1:0] ra_wr_addr;
  prep_ctrl #(.U(U), .B(B)) dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // engine model
  initial forever begin
    @(posedge clk);
    if (eng_start) begin
      repeat (40) @(posedge clk);
      eng_done <= 1;
      @(posedge clk);
      eng_done <= 0;
    end
  end

  int n_gram = 0, n_reg = 0, n_wr = 0, n_start = 0, n_load = 0, n_bs = 0, n_done = 0, n_clr = 0;
  int wr_next = 0, bs_next = 1, t_reg = -1, t_last_gram = -1, cyc = 0;
  int wi = 0, wj = 0;
  always @(posedge clk) if (rst_n) begin
    cyc++;
    n_clr   += int'(sa_clr);
    if (gram_en) begin n_gram++; t_last_gram = cyc; end
    if (reg_en) begin n_reg++; t_reg = cyc; end
    if (ra_wr_en) begin
      if (int'(ra_wr_addr) != wr_next || int'(blk_i) != wi || int'(blk_j) != wj) begin
        failures++;
        $display("FAIL: write %0d at address %0d block (%0d,%0d)", wr_next, ra_wr_addr, blk_i, blk_j);
      end
      wr_next++;
      if (wj == wi) begin wi++; wj = 0; end else wj++;
      n_wr++;
    end
    n_start += int'(eng_start);
    if (bs_load || bs_en) begin
      if (int'(bs_t) != bs_next || bs_load != (bs_next == 1)) begin
        failures++;
        $display("FAIL: backward substitution cycle %0d shows t=%0d load=%0b", bs_next, bs_t, bs_load);
      end
      bs_next++;
      n_bs++;
    end
    n_done += int'(done);
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    start <= 1;
    @(posedge clk);
    start <= 0;
    for (int b = 0; b < B; b++) begin
      if (b == 10) begin in_valid <= 0; @(posedge clk); end
      in_valid <= 1;
      @(posedge clk);
    end
    in_valid <= 0;
    #1 check(!in_ready, "no more rows accepted after B");
    while (!done) @(posedge clk);
    @(posedge clk);
    #1 check(!busy, "idle after done");
    check(n_clr == 1, "one clear");
    check(n_gram == B, $sformatf("Gram cycles %0d", n_gram));
    check(n_reg == 1 && t_reg == t_last_gram + 1, "regularisation right after the last row");
    check(n_wr == NB, $sformatf("register writes %0d", n_wr));
    check(n_start == 1, "one engine start");
    check(n_bs == 2 * U, $sformatf("backward substitution cycles %0d", n_bs));
    check(n_done == 1, "one done");
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
