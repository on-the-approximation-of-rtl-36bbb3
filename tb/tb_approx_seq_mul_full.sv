// tb_approx_seq_mul_full: the multiplier at its default size (N = 64,
// T = 32, halved carry chain) multiplying corner-case and random operands.
// Each product is compared with the bit-level reference model, and each
// must be ready exactly 64 cycles after start is accepted. Fix-to-1 is
// enabled or disabled at random; the test fails if no product used the
// late carry across the split point, if fix-to-1 was never applied or
// never suppressed, or if start issued while busy was not ignored.
module tb_approx_seq_mul_full;
  import asm_ref_pkg::*;

  localparam int N = 64;
  localparam int T = 32;
  localparam int RANDOM_PRODUCTS = 20000;

  logic           clk = 1'b0;
  logic           rst_n = 1'b0;
  logic           start = 1'b0;
  logic [N-1:0]   a = '0, b = '0;
  logic           fix_en = 1'b1;
  logic           busy, done;
  logic [2*N-1:0] p;

  int checks = 0, failures = 0;
  int n_late = 0, n_fix = 0, n_fix_off = 0, n_inexact = 0, n_ignored = 0;

  always #5 clk = ~clk;

  approx_seq_mul dut (.clk, .rst_n, .start, .a, .b, .fix_en, .busy, .done, .p);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  task automatic run(logic [N-1:0] av, logic [N-1:0] bv, bit fix, bit poke);
    int cyc;
    ref_result_t r;
    prod_t exp;
    @(negedge clk);
    a = av; b = bv; fix_en = fix; start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    cyc = 0;
    while (!done && cyc < 4 * N) begin
      start = poke && (cyc == 5);
      @(negedge clk);
      cyc++;
    end
    start = 1'b0;
    r = approx_core(av, bv, N, T);
    exp = approx_ref(av, bv, N, T, fix);
    check(cyc == N, $sformatf("latency %0d, expected %0d", cyc, N));
    check(p == exp[2*N-1:0], $sformatf("a=%h b=%h fix=%0b p=%h expected %h",
                                       av, bv, fix, p, exp[2*N-1:0]));
    if (r.late_carries > 0) n_late++;
    if (r.last_carry && fix) n_fix++;
    if (r.last_carry && !fix) n_fix_off++;
    if (p != (2*N)'(av) * (2*N)'(bv)) n_inexact++;
    if (poke) n_ignored++;
  endtask

  function automatic logic [N-1:0] rnd();
    return {$urandom, $urandom};
  endfunction

  initial begin : watchdog
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run('0, '0, 1'b1, 1'b0);
    run('1, '1, 1'b1, 1'b0);
    run('1, '1, 1'b0, 1'b1);
    run('1, 64'd1, 1'b1, 1'b0);
    run(64'd1, '1, 1'b1, 1'b0);
    run(64'h8000_0000_0000_0000, 64'h8000_0000_0000_0000, 1'b1, 1'b0);
    run(64'h0000_0000_FFFF_FFFF, '1, 1'b1, 1'b0);
    for (int n = 0; n < RANDOM_PRODUCTS; n++)
      run(rnd(), rnd(), 1'($urandom), n == 7);
    $display("mechanisms: late_carry=%0d fix_applied=%0d fix_suppressed=%0d inexact=%0d start_ignored=%0d",
             n_late, n_fix, n_fix_off, n_inexact, n_ignored);
    check(n_late > 0, "late carry across the split point occurred");
    check(n_fix > 0, "fix-to-1 applied");
    check(n_fix_off > 0, "fix-to-1 suppressed by fix_en");
    check(n_inexact > 0, "approximate product differs from exact");
    check(n_ignored > 0, "start while busy ignored");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
