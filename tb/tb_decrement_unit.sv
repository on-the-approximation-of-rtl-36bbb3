// tb_decrement_unit: loads start values into a 6-bit decrement unit and
// counts the cycles until the zero flag rises; expects exactly the loaded
// value. Also checks that the flag stays high (the count saturates at
// zero) and that a load takes priority over a decrement.
module tb_decrement_unit;

  localparam int CW = 6;

  logic          clk = 1'b0, rst_n = 1'b0, load = 1'b0, dec = 1'b0;
  logic [CW-1:0] d = '0;
  logic          zero;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  decrement_unit #(.CW(CW)) dut (.*);

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
    int cyc;
    repeat (2) @(negedge clk);
    check(zero, "zero after reset");
    rst_n = 1'b1;
    for (int v = 0; v < 64; v++) begin
      @(negedge clk);
      load = 1'b1; dec = 1'b1; d = CW'(v);
      @(negedge clk);
      load = 1'b0;
      cyc = 0;
      while (!zero && cyc < 100) begin
        @(negedge clk);
        cyc++;
      end
      check(cyc == v, $sformatf("start %0d reached zero after %0d", v, cyc));
      repeat (3) @(negedge clk);
      check(zero, "zero holds");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
