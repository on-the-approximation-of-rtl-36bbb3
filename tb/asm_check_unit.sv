// asm_check_unit: drives one approximate sequential multiplier of size
// N x N with split point T through a run of products and checks each one.
//
// With EXHAUSTIVE set every operand pair is used, otherwise COUNT random
// pairs (plus all-ones operands). FIX sets fix_en. Every product is
// compared with the bit-level reference model and must be ready N cycles
// after start is accepted. For N <= 32 the unit also accumulates error
// statistics against the exact product: error rate (ER), mean error
// distance (MED, exact minus approximate), mean absolute error distance,
// normalised MED (NMED, divided by (2^N-1)^2) and the maximum absolute
// error (MAE), and prints them when finished. Used by tb_workloads.
module asm_check_unit
  import asm_ref_pkg::*;
#(
  parameter int N          = 8,
  parameter int T          = 4,
  parameter bit FIX        = 1'b1,
  parameter bit EXHAUSTIVE = 1'b0,
  parameter int COUNT      = 100
) (
  input  logic clk,
  input  logic rst_n,
  output logic finished,
  output int   checks,
  output int   failures,
  output int   late_products,
  output int   fixed_products,
  output longint mae
);

  logic           start = 1'b0;
  logic [N-1:0]   a = '0, b = '0;
  logic           busy, done;
  logic [2*N-1:0] p;

  approx_seq_mul #(.N(N), .T(T)) dut (
    .clk, .rst_n, .start, .a, .b, .fix_en(FIX), .busy, .done, .p
  );

  int     errors = 0;
  real    sum_ed = 0.0, sum_abs = 0.0;
  longint total = 0;

  task automatic run(logic [N-1:0] av, logic [N-1:0] bv);
    int cyc;
    ref_result_t r;
    prod_t exp;
    logic [2*N-1:0] exact;
    longint ed;
    @(negedge clk);
    a = av; b = bv; start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    cyc = 0;
    while (!done && cyc < 4 * N) begin
      @(negedge clk);
      cyc++;
    end
    r = approx_core(av, bv, N, T);
    exp = approx_ref(av, bv, N, T, FIX);
    checks += 2;
    if (cyc != N) failures++;
    if (p != exp[2*N-1:0]) begin
      failures++;
      if (failures < 5) $display("FAIL N=%0d T=%0d a=%h b=%h p=%h expected %h",
                                 N, T, av, bv, p, exp[2*N-1:0]);
    end
    if (r.late_carries > 0) late_products++;
    if (FIX && r.last_carry) fixed_products++;
    if (N <= 32) begin
      exact = (2*N)'(av) * (2*N)'(bv);
      ed = longint'(64'(exact) - 64'(p));
      total++;
      if (ed != 0) errors++;
      sum_ed += real'(ed);
      sum_abs += real'(ed < 0 ? -ed : ed);
      if ((ed < 0 ? -ed : ed) > mae) mae = (ed < 0 ? -ed : ed);
    end
  endtask

  function automatic logic [N-1:0] rnd();
    logic [N-1:0] v;
    for (int k = 0; k < N; k += 32) v = {v, $urandom};
    return v;
  endfunction

  initial begin
    real maxp;
    finished = 1'b0;
    checks = 0; failures = 0; late_products = 0; fixed_products = 0; mae = 0;
    @(posedge rst_n);
    if (EXHAUSTIVE) begin
      for (longint i = 0; i < (longint'(1) << N); i++)
        for (longint k = 0; k < (longint'(1) << N); k++)
          run(N'(i), N'(k));
    end else begin
      run('1, '1);
      for (int n = 0; n < COUNT; n++) run(rnd(), rnd());
    end
    if (N <= 32) begin
      maxp = (2.0 ** N - 1.0) ** 2;
      $display("N=%0d T=%0d fix=%0b %s products=%0d: ER=%f MED=%f MAED=%f NMED=%e MAE=%0d (2^(N+T-1)=%0d)",
               N, T, FIX, EXHAUSTIVE ? "all" : "random", total,
               real'(errors) / real'(total), sum_ed / real'(total), sum_abs / real'(total),
               sum_ed / real'(total) / maxp, mae, longint'(1) << (N + T - 1));
    end else begin
      $display("N=%0d T=%0d fix=%0b random products=%0d checked", N, T, FIX, COUNT + 1);
    end
    finished = 1'b1;
  end

endmodule
