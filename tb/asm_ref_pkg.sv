// asm_ref_pkg: reference model for the testbenches of the approximate
// sequential multiplier.
//
// approx_core() evaluates the bit-level recurrence of the approximate
// product directly: s[i] is bit i of the j-th accumulated sum, c[i] the
// carry out of bit i. For j > 0 bit i adds s(j-1)[i+1], a[i]&b[j] and the
// carry of bit i-1 of the same accumulation, except bit t, which takes the
// carry of bit t-1 from the previous accumulation. s(j)[n] is the carry
// out of bit n-1. The product bits are s(r)[0] for r < n-1 and
// s(n-1)[r-n+1] above. approx_ref() adds fix-to-1: with it enabled and the
// last carry c(n-1)[t-1] set, bits n+t-1..0 are 1. The model has no
// registers, counters or shifts, so it is independent of the way the
// hardware is built. Operands up to MAXN bits.
package asm_ref_pkg;

  localparam int MAXN = 256;

  typedef logic [MAXN-1:0]   opnd_t;
  typedef logic [2*MAXN-1:0] prod_t;

  typedef struct {
    prod_t p;           // product without fix-to-1
    bit    last_carry;  // carry of bit t-1 in the last accumulation
    int    late_carries;// accumulations j>0 that received a late carry of 1
  } ref_result_t;

  function automatic ref_result_t approx_core(opnd_t a, opnd_t b, int n, int t);
    logic [MAXN:0]   s, s_new;
    logic [MAXN-1:0] c, c_new;
    logic            x, y;
    ref_result_t     r;
    r.p = '0;
    r.late_carries = 0;
    s = '0;
    c = '0;
    for (int i = 0; i < n; i++) s[i] = a[i] & b[0];
    if (n > 1) r.p[0] = s[0];
    for (int j = 1; j < n; j++) begin
      s_new = '0;
      c_new = '0;
      if (c[t-1]) r.late_carries++;
      for (int i = 0; i < n; i++) begin
        x = s[i+1];
        y = a[i] & b[j];
        if (i == 0) begin
          s_new[i] = x ^ y;
          c_new[i] = x & y;
        end else if (i == t) begin
          s_new[i] = x ^ y ^ c[i-1];
          c_new[i] = ((x ^ y) & c[i-1]) | (x & y);
        end else begin
          s_new[i] = x ^ y ^ c_new[i-1];
          c_new[i] = ((x ^ y) & c_new[i-1]) | (x & y);
        end
      end
      s_new[n] = c_new[n-1];
      s = s_new;
      c = c_new;
      if (j < n - 1) r.p[j] = s[0];
    end
    for (int k = n - 1; k < 2 * n; k++) r.p[k] = s[k-n+1];
    r.last_carry = c[t-1];
    return r;
  endfunction

  function automatic prod_t approx_ref(opnd_t a, opnd_t b, int n, int t, bit fix);
    ref_result_t r;
    r = approx_core(a, b, n, t);
    if (fix && r.last_carry) begin
      for (int k = 0; k < n + t; k++) r.p[k] = 1'b1;
    end
    return r.p;
  endfunction

endpackage
