// tb_segment_adder: checks the accurate segment adder exhaustively at
// W = 6 and with random operands at the default width W = 32 (the LSP and
// MSP width of the 64-bit multiplier with a halved carry chain). Expected
// values come from integer arithmetic in the testbench.
module tb_segment_adder;

  logic [5:0]  x6, y6, s6;
  logic        ci6, co6;
  logic [31:0] x32, y32, s32;
  logic        ci32, co32;
  int checks = 0, failures = 0;

  segment_adder #(.W(6)) dut6 (.x(x6), .y(y6), .cin(ci6), .s(s6), .cout(co6));
  segment_adder dut32 (.x(x32), .y(y32), .cin(ci32), .s(s32), .cout(co32));

  initial begin : watchdog
    #1_000_000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint unsigned e;
    for (int i = 0; i < 64; i++)
      for (int k = 0; k < 64; k++)
        for (int c = 0; c < 2; c++) begin
          x6 = 6'(i); y6 = 6'(k); ci6 = 1'(c);
          #1;
          checks++;
          if ({co6, s6} != 7'(i + k + c)) begin
            failures++;
            $display("FAIL W=6 %0d+%0d+%0d gave %0d", i, k, c, {co6, s6});
          end
        end
    for (int n = 0; n < 20000; n++) begin
      x32 = $urandom; y32 = $urandom; ci32 = 1'($urandom);
      if (n == 0) begin x32 = '1; y32 = 32'd0; ci32 = 1'b1; end
      #1;
      e = longint'(x32) + longint'(y32) + longint'(ci32);
      checks++;
      if ({co32, s32} != e[32:0]) begin
        failures++;
        $display("FAIL W=32 %h+%h+%0d", x32, y32, ci32);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
