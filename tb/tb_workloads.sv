// tb_workloads: the multiplier configurations that the error and hardware
// evaluations of the segmented-carry-chain multiplier consider, each
// simulated against the bit-level reference model.
//
//  - 8-bit multipliers with split points t = 2, 3, 4, every operand pair,
//    with fix-to-1 on and off (an 8-bit squaring of image pixels is a
//    subset of these pairs);
//  - 16-bit with t = 8 and the 28-, 30- and 32-bit multipliers with halved
//    carry chains, on random operands;
//  - the sizes of the hardware comparison with t = n/2: 4-bit (all pairs),
//    64-, 128- and 256-bit (random operands).
//
// Without fix-to-1 the absolute error can never exceed 2^(n+t-1), the
// weight of the one carry that is lost in the last accumulation, and is
// checked against that bound. The error statistics are printed.
module tb_workloads;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  localparam int K = 15;
  logic   fin   [K];
  int     chk   [K];
  int     fl    [K];
  int     late  [K];
  int     fixed [K];
  longint mae   [K];

  asm_check_unit #(.N(8),  .T(2),  .FIX(1), .EXHAUSTIVE(1)) u0  (clk, rst_n, fin[0],  chk[0],  fl[0],  late[0],  fixed[0],  mae[0]);
  asm_check_unit #(.N(8),  .T(2),  .FIX(0), .EXHAUSTIVE(1)) u1  (clk, rst_n, fin[1],  chk[1],  fl[1],  late[1],  fixed[1],  mae[1]);
  asm_check_unit #(.N(8),  .T(3),  .FIX(1), .EXHAUSTIVE(1)) u2  (clk, rst_n, fin[2],  chk[2],  fl[2],  late[2],  fixed[2],  mae[2]);
  asm_check_unit #(.N(8),  .T(3),  .FIX(0), .EXHAUSTIVE(1)) u3  (clk, rst_n, fin[3],  chk[3],  fl[3],  late[3],  fixed[3],  mae[3]);
  asm_check_unit #(.N(8),  .T(4),  .FIX(1), .EXHAUSTIVE(1)) u4  (clk, rst_n, fin[4],  chk[4],  fl[4],  late[4],  fixed[4],  mae[4]);
  asm_check_unit #(.N(8),  .T(4),  .FIX(0), .EXHAUSTIVE(1)) u5  (clk, rst_n, fin[5],  chk[5],  fl[5],  late[5],  fixed[5],  mae[5]);
  asm_check_unit #(.N(16), .T(8),  .FIX(1), .COUNT(20000))  u6  (clk, rst_n, fin[6],  chk[6],  fl[6],  late[6],  fixed[6],  mae[6]);
  asm_check_unit #(.N(28), .T(14), .FIX(0), .COUNT(5000))   u7  (clk, rst_n, fin[7],  chk[7],  fl[7],  late[7],  fixed[7],  mae[7]);
  asm_check_unit #(.N(30), .T(15), .FIX(0), .COUNT(5000))   u8  (clk, rst_n, fin[8],  chk[8],  fl[8],  late[8],  fixed[8],  mae[8]);
  asm_check_unit #(.N(32), .T(16), .FIX(0), .COUNT(5000))   u9  (clk, rst_n, fin[9],  chk[9],  fl[9],  late[9],  fixed[9],  mae[9]);
  asm_check_unit #(.N(4),  .T(2),  .FIX(1), .EXHAUSTIVE(1)) u10 (clk, rst_n, fin[10], chk[10], fl[10], late[10], fixed[10], mae[10]);
  asm_check_unit #(.N(4),  .T(2),  .FIX(0), .EXHAUSTIVE(1)) u11 (clk, rst_n, fin[11], chk[11], fl[11], late[11], fixed[11], mae[11]);
  asm_check_unit #(.N(64), .T(32), .FIX(1), .COUNT(2000))   u12 (clk, rst_n, fin[12], chk[12], fl[12], late[12], fixed[12], mae[12]);
  asm_check_unit #(.N(128),.T(64), .FIX(1), .COUNT(300))    u13 (clk, rst_n, fin[13], chk[13], fl[13], late[13], fixed[13], mae[13]);
  asm_check_unit #(.N(256),.T(128),.FIX(1), .COUNT(60))     u14 (clk, rst_n, fin[14], chk[14], fl[14], late[14], fixed[14], mae[14]);

  localparam int NBITS [K] = '{8, 8, 8, 8, 8, 8, 16, 28, 30, 32, 4, 4, 64, 128, 256};
  localparam int TBITS [K] = '{2, 2, 3, 3, 4, 4, 8, 14, 15, 16, 2, 2, 32, 64, 128};
  localparam bit FIXON [K] = '{1, 0, 1, 0, 1, 0, 1, 0, 0, 0, 1, 0, 1, 1, 1};

  int checks = 0, failures = 0;

  initial begin : watchdog
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit all;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    do begin
      @(negedge clk);
      all = 1'b1;
      for (int k = 0; k < K; k++) all &= fin[k];
    end while (!all);
    for (int k = 0; k < K; k++) begin
      checks += chk[k];
      failures += fl[k];
      // The late carry across the split point must occur in every run.
      checks++;
      if (late[k] == 0) begin
        failures++;
        $display("FAIL N=%0d T=%0d: no late carry", NBITS[k], TBITS[k]);
      end
      if (FIXON[k]) begin
        checks++;
        if (fixed[k] == 0) begin
          failures++;
          $display("FAIL N=%0d T=%0d: fix-to-1 never applied", NBITS[k], TBITS[k]);
        end
      end else if (NBITS[k] <= 32) begin
        checks++;
        if (mae[k] > (longint'(1) << (NBITS[k] + TBITS[k] - 1))) begin
          failures++;
          $display("FAIL N=%0d T=%0d: MAE %0d above 2^(N+T-1)", NBITS[k], TBITS[k], mae[k]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
