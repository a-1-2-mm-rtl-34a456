// tb_mmac: checks the matrix multiply-accumulate unit against a
// floating-point sum of X*Y*Z^H over several terms, the restart of a sum
// with clr, and the two-cycle latency (the accumulator one
// cycle after an issue must not yet hold it and must hold the new sum two cycles after).
module tb_mmac;
  import prep_pkg::*;
  import tb_pkg::*;

  logic  clk = 0, rst_n = 0, en = 0, clr = 0;
  mat2_t x, y, z, acc;
  mmac dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    rm_t sum, t;
    x = '0; y = '0; z = '0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int trial = 0; trial < 20; trial++) begin
      int nt;
      nt = 1 + trial % 4;
      for (int i = 0; i < 2; i++) for (int j = 0; j < 2; j++) begin sum[i][j][0] = 0; sum[i][j][1] = 0; end
      for (int k = 0; k < nt; k++) begin
        x <= rnd_m(2.0); y <= rnd_m(4.0); z <= rnd_m(2.0);
        #1;
        t = rm_mul(rm_mul(to_rm(x), to_rm(y)), rm_herm(to_rm(z)));
        for (int i = 0; i < 2; i++) for (int j = 0; j < 2; j++) begin
          sum[i][j][0] += t[i][j][0]; sum[i][j][1] += t[i][j][1];
        end
        en <= 1; clr <= (k == 0);
        @(posedge clk);
        en <= 0; clr <= 0;
      end
      // one cycle after the last issue the last term is not in yet
      #1 check(rm_err(acc, sum) > 6 * LSB * nt, "sum complete after one cycle");
      @(posedge clk); #1;
      check(rm_err(acc, sum) <= 6 * LSB * nt, $sformatf("sum of %0d terms, error %g", nt, rm_err(acc, sum)));
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
