// tb_shift_register: drives random clear/load/shift/serial-input sequences
// into an 8-bit shift register and compares with a model kept in the
// testbench (clear before load before shift; shift moves right, serial
// input enters at the MSB). Also checks the asynchronous reset.
module tb_shift_register;

  localparam int W = 8;

  logic         clk = 1'b0, rst_n = 1'b0;
  logic         clr = 1'b0, load = 1'b0, shift = 1'b0, sin = 1'b0;
  logic [W-1:0] d = '0, q;
  logic [W-1:0] m = '0;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  shift_register #(.W(W)) dut (.*);

  initial begin : watchdog
    repeat (100_000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    checks++;
    if (q != '0) failures++;
    rst_n = 1'b1;
    for (int n = 0; n < 20000; n++) begin
      @(negedge clk);
      clr = ($urandom_range(0, 7) == 0);
      load = ($urandom_range(0, 3) == 0);
      shift = 1'($urandom);
      sin = 1'($urandom);
      d = W'($urandom);
      @(posedge clk);
      if (clr) m = '0;
      else if (load) m = d;
      else if (shift) m = {sin, m[W-1:1]};
      #1;
      checks++;
      if (q != m) begin
        failures++;
        if (failures < 10) $display("FAIL q=%h expected %h", q, m);
      end
    end
    // Asynchronous reset between clock edges.
    @(negedge clk);
    clr = 1'b0; load = 1'b1; d = 8'hA5;
    @(negedge clk);
    load = 1'b0;
    #2 rst_n = 1'b0;
    #1;
    checks++;
    if (q != '0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
