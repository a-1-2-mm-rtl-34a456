// tb_msub: checks the matrix subtraction unit entry by entry against an
// integer model (with saturation at the format limits), the use_b bypass,
// and the one-cycle latency (result present right after the issuing edge,
// held while en is low).
module tb_msub;
  import prep_pkg::*;
  import tb_pkg::*;

  logic  clk = 0, rst_n = 0, en = 0, use_b = 0;
  mat2_t a, b, q;
  msub dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic longint satl(input longint v);
    if (v > 1048575)  return 1048575;
    if (v < -1048576) return -1048576;
    return v;
  endfunction

  initial begin
    mat2_t held;
    a = '0; b = '0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int trial = 0; trial < 40; trial++) begin
      a <= rnd_m(trial < 30 ? 50.0 : 127.0);
      b <= rnd_m(trial < 30 ? 50.0 : 127.0);
      use_b <= (trial % 5 != 0);
      en <= 1;
      @(posedge clk);
      en <= 0;
      #1;
      for (int i = 0; i < 2; i++)
        for (int j = 0; j < 2; j++) begin
          check(longint'(q[i][j].re) == satl(longint'(a[i][j].re) - (use_b ? longint'(b[i][j].re) : 0)), "re");
          check(longint'(q[i][j].im) == satl(longint'(a[i][j].im) - (use_b ? longint'(b[i][j].im) : 0)), "im");
        end
      held = q;
      a <= rnd_m(10.0);
      @(posedge clk); #1;
      check(q == held, "result held while en is low");
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
