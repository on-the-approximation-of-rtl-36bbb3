// shift_register: W-bit register with synchronous clear, parallel load and
// right shift with a left serial input.
//
// These are the three synchronous operations the paper gives its shift
// registers A and B. Priority is clear, then load, then shift; with none of
// them asserted the register holds. The asynchronous active-low reset to 0
// is added by this design so that every flip-flop starts from a known
// value. Output q is the register contents; changes take effect on the
// rising clock edge.
module shift_register #(
  parameter int unsigned W = 64
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clr,
  input  logic         load,
  input  logic         shift,
  input  logic [W-1:0] d,
  input  logic         sin,
  output logic [W-1:0] q
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      q <= '0;
    else if (clr)    q <= '0;
    else if (load)   q <= d;
    else if (shift)  q <= {sin, q[W-1:1]};
  end

endmodule
