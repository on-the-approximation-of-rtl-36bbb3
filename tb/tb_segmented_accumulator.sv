// tb_segmented_accumulator: checks one split accumulation stage at N = 8,
// T = 3 with random operands and random enable/clear. The testbench keeps
// its own copy of the delayed carry: the LSP result is the T-bit sum of the
// low operand bits, the MSP result is the sum of the high bits plus the LSP
// carry stored by the last enabled cycle (cleared by clr and by reset).
module tb_segmented_accumulator;

  localparam int N = 8;
  localparam int T = 3;

  logic         clk = 1'b0, rst_n = 1'b0, clr = 1'b0, en = 1'b0;
  logic [N-1:0] x = '0, y = '0, sum;
  logic         cout, c_lsp_q;
  int checks = 0, failures = 0, n_carry_used = 0;
  bit model_c = 1'b0;

  always #5 clk = ~clk;

  segmented_accumulator #(.N(N), .T(T)) dut (.*);

  initial begin : watchdog
    repeat (100_000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int lo, hi;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 20000; n++) begin
      @(negedge clk);
      x = N'($urandom); y = N'($urandom);
      clr = ($urandom_range(0, 15) == 0);
      en  = ($urandom_range(0, 3) != 0);
      #1;
      lo = int'(x[T-1:0]) + int'(y[T-1:0]);
      hi = int'(x[N-1:T]) + int'(y[N-1:T]) + int'(model_c);
      checks++;
      if (c_lsp_q != model_c || sum != N'({hi[N-T-1:0], lo[T-1:0]}) || cout != hi[N-T]) begin
        failures++;
        if (failures < 10)
          $display("FAIL x=%h y=%h c=%0b sum=%h cout=%0b", x, y, model_c, sum, cout);
      end
      if (model_c) n_carry_used++;
      @(posedge clk);
      if (clr) model_c = 1'b0;
      else if (en) model_c = lo[T];
    end
    checks++;
    if (n_carry_used == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
