// fix_to_one_mux: the fix-to-1 output multiplexers.
//
// When the LSP adder produces a carry in the last accumulation, that carry
// has nowhere to go: it would only reach the MSP adder one cycle later.
// Instead of dropping it, the multiplier replaces the N+T least significant
// product bits by ones, i.e. by 2^(N+T)-1, the value nearest to the lost
// carry that fits below bit N+T. With sel low the product passes unchanged.
// The upper N-T bits always pass. Purely combinational.
//
// The bit range follows the paper's formal definition of the approximate
// product (all of bits N+T-1..0 forced).
module fix_to_one_mux #(
  parameter int unsigned N = 64,
  parameter int unsigned T = 32
) (
  input  logic           sel,
  input  logic [2*N-1:0] p_in,
  output logic [2*N-1:0] p_out
);

  always_comb begin
    p_out = p_in;
    if (sel) p_out[N+T-1:0] = '1;
  end

endmodule
