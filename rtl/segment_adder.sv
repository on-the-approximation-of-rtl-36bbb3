// segment_adder: accurate W-bit adder with carry in and carry out.
//
// One segment of the split accumulator carry chain. The multiplier uses two
// of them: a t-bit adder for the least significant part (LSP) and an
// (n-t)-bit adder for the most significant part (MSP). The paper leaves the
// adder architecture open, so it is written as a plain '+' and the
// synthesis tool chooses the carry structure. Purely combinational:
// {cout, s} = x + y + cin.
module segment_adder #(
  parameter int unsigned W = 32
) (
  input  logic [W-1:0] x,
  input  logic [W-1:0] y,
  input  logic         cin,
  output logic [W-1:0] s,
  output logic         cout
);

  always_comb begin
    {cout, s} = {1'b0, x} + {1'b0, y} + {{W{1'b0}}, cin};
  end

endmodule
