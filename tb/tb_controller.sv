// tb_controller: runs the controller against a counter model in the
// testbench (loaded with n-1 on init, decremented on cnt_dec, zero flag
// fed back). For several values of n it checks that init lasts one cycle,
// that acc is high for exactly n consecutive cycles, that done follows
// immediately and holds, and that start is ignored while busy.
module tb_controller;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic cnt_zero;
  logic init, acc, cnt_dec, busy, done;
  int   cnt = 0;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  controller dut (.*);

  assign cnt_zero = (cnt == 0);
  int n_cur = 4;
  always_ff @(posedge clk) begin
    if (init) cnt <= n_cur - 1;
    else if (cnt_dec && cnt != 0) cnt <= cnt - 1;
  end

  initial begin : watchdog
    repeat (100_000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  initial begin
    int accs;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check(!busy && !done && !acc && !init, "idle after reset");
    for (int k = 0; k < 6; k++) begin
      n_cur = (k == 0) ? 1 : 2 << k;
      @(negedge clk);
      start = 1'b1;
      #1;
      check(init && !acc, "init on start");
      @(negedge clk);
      start = 1'b0;
      accs = 0;
      while (acc && accs < 1000) begin
        check(busy && !done && !init, "busy during run");
        if (accs == 1) start = 1'b1;  // must be ignored
        @(negedge clk);
        start = 1'b0;
        accs++;
      end
      check(accs == n_cur, $sformatf("n=%0d: %0d accumulation cycles", n_cur, accs));
      check(done && !busy, "done after the last accumulation");
      repeat (3) @(negedge clk);
      check(done && !acc, "done holds");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
