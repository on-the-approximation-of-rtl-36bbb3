// approx_seq_mul: N x N -> 2N-bit unsigned approximate sequential
// multiplier with a segmented accumulator carry chain.
//
// How it works. Shift-and-add: shift register B starts with the
// multiplicand b, shift register A with zero. In each of N cycles the
// partial product (B_lsb AND a) is added to A, the N-bit sum and its carry
// are shifted right by one position into A, and the bit that falls out of
// A enters B from the left while B drops its LSB. After N cycles A holds
// the upper and B the lower half of the product. The approximation: the
// accumulator adder is split at bit T into an LSP adder (T bits) and an MSP
// adder (N-T bits). The LSP carry-out is stored in a flip-flop and used as
// the MSP carry-in one cycle later, so no carry crosses the split point in
// the same cycle and the critical path is that of the longer segment. A
// carry produced by the LSP in the very last cycle would be lost; when
// fix_en is high and that carry is 1, the N+T low product bits are forced
// to 1 (fix-to-1). With T = N/2 (the paper's main configuration) both
// segments are N/2 bits.
//
// Interface and timing. Pulse start with a and b valid; start is accepted
// when busy is low. b is captured on the accepting edge; a is used directly
// by the partial-product AND gates and must stay stable while busy is high
// (as in the paper's schematic, a is not registered). done rises N clock
// cycles after the accepting edge and stays high, with p valid, until the
// next start. fix_en may change at any time; it only affects the output
// multiplexers. rst_n is an asynchronous active-low reset.
//
// The datapath, the carry flip-flop, the decrement unit with zero detect
// and the fix-to-1 multiplexers follow the paper. The controller, the
// start/busy/done handshake and merging the add and the shift into one
// clock edge are this design's choices.
module approx_seq_mul
  import asm_pkg::*;
#(
  parameter int unsigned N = 64,
  parameter int unsigned T = 32
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic [N-1:0]   a,
  input  logic [N-1:0]   b,
  input  logic           fix_en,
  output logic           busy,
  output logic           done,
  output logic [2*N-1:0] p
);

  localparam int unsigned CW = (N > 2) ? $clog2(N) : 1;

  logic          init, acc, cnt_dec, cnt_zero;
  logic [N-1:0]  reg_a, reg_b;        // shift registers A and B
  logic [N-1:0]  pp;                  // partial product B_lsb AND a
  logic [N-1:0]  sum;
  logic          cout_msp, c_lsp_q;
  logic          fix_sel;

  controller u_ctrl (
    .clk     (clk),
    .rst_n   (rst_n),
    .start   (start),
    .cnt_zero(cnt_zero),
    .init    (init),
    .acc     (acc),
    .cnt_dec (cnt_dec),
    .busy    (busy),
    .done    (done)
  );

  decrement_unit #(.CW(CW)) u_dec (
    .clk  (clk),
    .rst_n(rst_n),
    .load (init),
    .dec  (cnt_dec),
    .d    (CW'(N - 1)),
    .zero (cnt_zero)
  );

  assign pp = a & {N{reg_b[0]}};

  segmented_accumulator #(.N(N), .T(T)) u_acc (
    .clk    (clk),
    .rst_n  (rst_n),
    .clr    (init),
    .en     (acc),
    .x      (reg_a),
    .y      (pp),
    .sum    (sum),
    .cout   (cout_msp),
    .c_lsp_q(c_lsp_q)
  );

  // A takes the new sum already shifted right, the MSP carry-out entering
  // from the left.
  shift_register #(.W(N)) u_reg_a (
    .clk  (clk),
    .rst_n(rst_n),
    .clr  (init),
    .load (acc),
    .shift(1'b0),
    .d    ({cout_msp, sum[N-1:1]}),
    .sin  (1'b0),
    .q    (reg_a)
  );

  // B holds the multiplicand and collects the low product bits.
  shift_register #(.W(N)) u_reg_b (
    .clk  (clk),
    .rst_n(rst_n),
    .clr  (1'b0),
    .load (init),
    .shift(acc),
    .d    (b),
    .sin  (sum[0]),
    .q    (reg_b)
  );

  // After the last accumulation c_lsp_q holds the LSP carry of that
  // accumulation; the zero detect marks that the sequence is complete.
  assign fix_sel = fix_en & done & cnt_zero & c_lsp_q;

  fix_to_one_mux #(.N(N), .T(T)) u_fix (
    .sel  (fix_sel),
    .p_in ({reg_a, reg_b}),
    .p_out(p)
  );

  // The multiplier operand is read combinationally in every cycle.
  a_stable_while_busy: assert property (
    @(posedge clk) disable iff (!rst_n) busy |-> $stable(a)
  ) else $error("approx_seq_mul: operand a changed during a multiplication");

endmodule
