// decrement_unit: down-counter with zero detect.
//
// Counts the accumulations still to come in a product. load sets the count
// to d (the multiplier loads n-1), dec subtracts one per accumulation and
// zero is high while the count is 0, that is during the last accumulation
// and afterwards. The paper names this unit and its two uses (telling the
// controller that the sequence is complete and enabling the fix-to-1
// multiplexers); the start value n-1 and saturation at zero are this
// design's choices. load has priority over dec. The count is internal;
// zero is decoded combinationally from it.
module decrement_unit #(
  parameter int unsigned CW = 6
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          load,
  input  logic          dec,
  input  logic [CW-1:0] d,
  output logic          zero
);

  logic [CW-1:0] q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                q <= '0;
    else if (load)             q <= d;
    else if (dec && q != '0)   q <= q - 1'b1;
  end

  assign zero = (q == '0);

endmodule
