// controller: sequencing of one approximate sequential multiplication.
//
// IDLE/DONE: waiting; done is high in DONE and the product is held. A start
// pulse in either state raises init for one cycle: on that clock edge shift
// register A and the carry flip-flop are cleared, b is loaded into shift
// register B and the decrement unit is loaded with n-1. The controller then
// enters RUN, where acc is high for exactly n cycles (one addition and one
// right shift per cycle). The decrement unit counts them; when its zero
// flag is high the current cycle is the last accumulation and the
// controller moves to DONE. busy is high in RUN. start is ignored in RUN.
//
// Timing: if start is sampled at clock edge E0, done rises after edge E0+n.
// The paper gives the datapath and says the controller is not shown; the
// states and the start/busy/done handshake are this design's own.
module controller
  import asm_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  input  logic cnt_zero,
  output logic init,
  output logic acc,
  output logic cnt_dec,
  output logic busy,
  output logic done
);

  state_t state, state_nx;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) state <= S_IDLE;
    else        state <= state_nx;
  end

  always_comb begin
    state_nx = state;
    init     = 1'b0;
    unique case (state)
      S_IDLE, S_DONE: begin
        if (start) begin
          init     = 1'b1;
          state_nx = S_RUN;
        end
      end
      S_RUN: begin
        if (cnt_zero) state_nx = S_DONE;
      end
      default: state_nx = S_IDLE;
    endcase
  end

  assign acc     = (state == S_RUN);
  assign cnt_dec = acc;
  assign busy    = (state == S_RUN);
  assign done    = (state == S_DONE);

endmodule
