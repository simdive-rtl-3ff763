// int_adder: integer-part adder of one lane (Mitchell's characteristic).
//
// Multiply adds the leading-one positions, k1 + k2; divide subtracts them,
// k1 - k2, by adding the two's complement of k2 (inverted bits plus a carry
// in), as the architecture does with its 2's-complement block in front of
// the binary adder.  The result is a signed 7-bit exponent.  Combinational.
// Widths are this design's: 5-bit k covers a 32-bit lane.
module int_adder (
  input  logic [4:0]        k1,
  input  logic [4:0]        k2,
  input  logic              div,
  output logic signed [6:0] e
);
  logic [6:0] k2_op;
  always_comb begin
    k2_op = div ? ~{2'b00, k2} : {2'b00, k2};   // 2's complement = invert + carry-in
    e     = $signed({2'b00, k1} + k2_op + 7'(div));
  end
endmodule
