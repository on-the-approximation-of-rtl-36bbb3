// tb_approx_seq_mul: end-to-end test of the approximate sequential
// multiplier at N = 8, T = 4 (halved carry chain), plus the worked example
// of a 4-bit multiplier with two 2-bit adder segments.
//
// Every one of the 65536 operand pairs of the 8-bit multiplier is
// multiplied, with fix-to-1 enabled or disabled at random, and compared
// with the bit-level reference model in asm_ref_pkg. Each product must
// take exactly N cycles from the accepting edge to done. The test also
// checks that start is ignored while busy, that the product holds while
// done is high, and that fix_en acts on the held product. It counts how
// often each mechanism of the design occurred (late carry across the split
// point, fix-to-1 applied, fix-to-1 suppressed, a product that differs from
// the exact one, start ignored while busy) and fails if one never did.
module tb_approx_seq_mul;
  import asm_ref_pkg::*;

  localparam int N = 8;
  localparam int T = 4;

  logic           clk = 1'b0;
  logic           rst_n = 1'b0;
  logic           start = 1'b0;
  logic [N-1:0]   a = '0, b = '0;
  logic           fix_en = 1'b1;
  logic           busy, done;
  logic [2*N-1:0] p;

  // 4-bit instance with t = 2 for the worked example.
  logic           start4 = 1'b0;
  logic [3:0]     a4 = '0, b4 = '0;
  logic           busy4, done4;
  logic [7:0]     p4;

  int checks = 0, failures = 0;
  int n_late = 0, n_fix = 0, n_fix_off = 0, n_inexact = 0, n_ignored = 0;

  always #5 clk = ~clk;

  approx_seq_mul #(.N(N), .T(T)) dut (
    .clk, .rst_n, .start, .a, .b, .fix_en, .busy, .done, .p
  );

  approx_seq_mul #(.N(4), .T(2)) dut4 (
    .clk, .rst_n, .start(start4), .a(a4), .b(b4), .fix_en(1'b1),
    .busy(busy4), .done(done4), .p(p4)
  );

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  // One multiplication; optionally pulse start again in the middle.
  task automatic run(logic [N-1:0] av, logic [N-1:0] bv, bit fix, bit poke);
    int cyc;
    ref_result_t r;
    prod_t exp;
    @(negedge clk);
    a = av; b = bv; fix_en = fix; start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    check(busy && !done, "busy after start");
    cyc = 0;
    while (!done && cyc < 4 * N) begin
      if (poke && cyc == N / 2) begin
        start = 1'b1;
        b = ~bv;
      end else begin
        start = 1'b0;
      end
      @(negedge clk);
      cyc++;
    end
    start = 1'b0;
    r = approx_core(av, bv, N, T);
    exp = approx_ref(av, bv, N, T, fix);
    check(cyc == N, $sformatf("latency %0d, expected %0d", cyc, N));
    check(p == exp[2*N-1:0],
          $sformatf("a=%0d b=%0d fix=%0b p=%h expected %h", av, bv, fix, p, exp[2*N-1:0]));
    if (r.late_carries > 0) n_late++;
    if (r.last_carry && fix) n_fix++;
    if (r.last_carry && !fix) n_fix_off++;
    if (p != (2*N)'(av) * (2*N)'(bv)) n_inexact++;
    if (poke) n_ignored++;
  endtask

  initial begin : watchdog
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    prod_t exp;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check(!busy && !done, "idle after reset");

    // Worked example: multiplier 1011, multiplicand 1101, t = 2.
    a4 = 4'b1011; b4 = 4'b1101; start4 = 1'b1;
    @(negedge clk);
    start4 = 1'b0;
    repeat (4) @(negedge clk);
    check(done4, "4-bit example done after 4 cycles");
    check(p4 == 8'b1001_1111, $sformatf("4-bit example p=%b expected 10011111", p4));
    check(p4 != 8'd143, "4-bit example differs from the exact product 10001111");

    // Product holds while done, and fix_en acts on the held value.
    // a = b = 255 leaves a carry in the last LSP accumulation.
    exp = approx_ref(8'hFF, 8'hFF, N, T, 1'b1);
    run(8'hFF, 8'hFF, 1'b1, 1'b0);
    repeat (3) @(negedge clk);
    check(done && p == exp[2*N-1:0], "product held while done");
    if (approx_core(8'hFF, 8'hFF, N, T).last_carry) begin
      fix_en = 1'b0;
      #1;
      exp = approx_ref(8'hFF, 8'hFF, N, T, 1'b0);
      check(p == exp[2*N-1:0], "fix_en low shows the unfixed product");
    end

    // start while busy is ignored.
    run(8'd201, 8'd77, 1'b1, 1'b1);
    run(8'd255, 8'd129, 1'b0, 1'b1);

    // Every operand pair.
    for (int i = 0; i < 1 << N; i++)
      for (int k = 0; k < 1 << N; k++)
        run(N'(i), N'(k), 1'($urandom_range(0, 1)), 1'b0);

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
