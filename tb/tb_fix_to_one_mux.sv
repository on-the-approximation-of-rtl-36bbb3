// tb_fix_to_one_mux: checks the fix-to-1 multiplexers at N = 8, T = 3 and
// at the defaults N = 64, T = 32 with random products: with sel low the
// product passes, with sel high the N+T low bits read 1 and the rest pass.
module tb_fix_to_one_mux;

  logic         sel8, sel64;
  logic [15:0]  pi8, po8;
  logic [127:0] pi64, po64;
  int checks = 0, failures = 0;

  fix_to_one_mux #(.N(8), .T(3)) dut8 (.sel(sel8), .p_in(pi8), .p_out(po8));
  fix_to_one_mux dut64 (.sel(sel64), .p_in(pi64), .p_out(po64));

  initial begin : watchdog
    #1_000_000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [15:0]  e8;
    logic [127:0] e64;
    for (int n = 0; n < 2000; n++) begin
      sel8 = 1'($urandom); sel64 = 1'($urandom);
      pi8 = 16'($urandom);
      pi64 = {$urandom, $urandom, $urandom, $urandom};
      #1;
      e8 = sel8 ? {pi8[15:11], 11'h7FF} : pi8;
      e64 = sel64 ? {pi64[127:96], 96'hFFFF_FFFF_FFFF_FFFF_FFFF_FFFF} : pi64;
      checks += 2;
      if (po8 != e8) begin failures++; $display("FAIL N=8 %h -> %h", pi8, po8); end
      if (po64 != e64) begin failures++; $display("FAIL N=64 sel=%0b", sel64); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
