// tb_regarray: checks the register array against a plain array model:
// writes through the systolic-array port and the engine port land at their
// addresses, the engine read port returns the stored block in the same
// cycle, every engine write appears on the forward bus in its own cycle,
// and all entries start at zero after reset.
module tb_regarray;
  import prep_pkg::*;
  import tb_pkg::*;

  localparam int N = 8;
  localparam int DEPTH = N * (N + 1) / 2 + N;

  logic          clk = 0, rst_n = 0, sa_wr_en = 0, eng_wr_en = 0, fwd_valid;
  logic [AW-1:0] sa_wr_addr, eng_rd_addr, eng_wr_addr, fwd_addr;
  mat2_t         sa_wr_data, eng_rd_data, eng_wr_data, fwd_data;
  regarray #(.N(N)) dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  mat2_t model [DEPTH];

  initial begin
    sa_wr_addr = '0; eng_rd_addr = '0; eng_wr_addr = '0; sa_wr_data = '0; eng_wr_data = '0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int k = 0; k < DEPTH; k++) begin
      eng_rd_addr = AW'(k);
      #1 check(eng_rd_data == '0, "reset value");
      model[k] = '0;
    end
    @(posedge clk);
    // fill through the systolic-array port
    for (int k = 0; k < N * (N + 1) / 2; k++) begin
      sa_wr_en <= 1;
      sa_wr_addr <= AW'(k);
      sa_wr_data <= rnd_m(50.0);
      #1 model[k] = sa_wr_data;
      @(posedge clk);
    end
    sa_wr_en <= 0;
    // random engine traffic
    for (int it = 0; it < 300; it++) begin
      int wa, ra;
      wa = $urandom_range(DEPTH - 1);
      ra = $urandom_range(DEPTH - 1);
      eng_wr_en <= ($urandom_range(1) == 1);
      eng_wr_addr <= AW'(wa);
      eng_wr_data <= rnd_m(50.0);
      eng_rd_addr <= AW'(ra);
      #1;
      check(eng_rd_data == model[ra], $sformatf("read %0d", ra));
      check(fwd_valid == eng_wr_en, "forward valid");
      if (eng_wr_en) check(fwd_addr == eng_wr_addr && fwd_data == eng_wr_data, "forward data");
      if (eng_wr_en) model[wa] = eng_wr_data;
      @(posedge clk);
    end
    eng_wr_en <= 0;
    @(posedge clk);
    for (int k = 0; k < DEPTH; k++) begin
      eng_rd_addr = AW'(k);
      #1 check(eng_rd_data == model[k], $sformatf("final %0d", k));
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
