// segmented_accumulator: one approximate accumulation step with a carry
// chain cut at bit T.
//
// The N-bit addition x + y is split into an LSP adder (bits T-1..0) and an
// MSP adder (bits N-1..T). The LSP carry-out does not ripple into the MSP
// adder in the same cycle: it is captured in a D flip-flop when en is high
// and drives the MSP carry-in in the following accumulation. The LSP adder
// has carry-in 0. This is the segmentation the paper proposes: the critical
// path shrinks to the longer of the two adders, at the price of carries
// that arrive one cycle (and hence one shift position) late.
//
// Interface: x is the shifted partial sum from shift register A, y the
// partial product (B_lsb AND a). sum and cout are combinational; c_lsp_q
// is the stored LSP carry. The flip-flop is cleared asynchronously by
// rst_n (as in the paper) and synchronously by clr at the start of each
// product (this design's choice, so the controller can start a new product
// without a reset). clr has priority over en.
module segmented_accumulator #(
  parameter int unsigned N = 64,
  parameter int unsigned T = 32
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clr,
  input  logic         en,
  input  logic [N-1:0] x,
  input  logic [N-1:0] y,
  output logic [N-1:0] sum,
  output logic         cout,
  output logic         c_lsp_q
);

  if (T < 1 || T >= N) begin : g_bad_split
    $error("segmented_accumulator: split point T must satisfy 1 <= T < N");
  end

  logic c_lsp;

  segment_adder #(.W(T)) u_lsp (
    .x   (x[T-1:0]),
    .y   (y[T-1:0]),
    .cin (1'b0),
    .s   (sum[T-1:0]),
    .cout(c_lsp)
  );

  segment_adder #(.W(N-T)) u_msp (
    .x   (x[N-1:T]),
    .y   (y[N-1:T]),
    .cin (c_lsp_q),
    .s   (sum[N-1:T]),
    .cout(cout)
  );

  // Carry flip-flop between the two segments.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)   c_lsp_q <= 1'b0;
    else if (clr) c_lsp_q <= 1'b0;
    else if (en)  c_lsp_q <= c_lsp;
  end

endmodule
