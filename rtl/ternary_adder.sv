// ternary_adder: SIMD three-operand adder with error compensation.
//
// Adds the first fraction, the (possibly negated) second fraction and the
// aligned error coefficient of every lane in one pass.  It is four 8-bit
// slices, each adding three 8-bit words and a carry-in.  Three words plus a
// carry can exceed 9 bits, so every slice produces a 2-bit carry (the extra
// MSB of a ternary adder).  Between slices a multiplexer passes the carry on
// when both slots are in the same lane and forces 0 at a lane boundary, as
// set by the precision mode; the same chained structure serves one 32-bit,
// two 16-bit or four 8-bit additions.
//
// Outputs, combinational: `sum` holds the W-bit result field of each lane;
// `carry[s]` is the 2-bit carry out of the top slice of the lane that starts
// at slot s (0 for other slots), i.e. the integer part of the unsigned lane
// sum.  Follows the architecture (ternary addition with error term, slices
// linked by carry multiplexers); the 2-bit carry encoding is this design's.
module ternary_adder
  import simdive_pkg::*;
(
  input  logic [31:0]      x1,
  input  logic [31:0]      x2,
  input  logic [31:0]      c,
  input  prec_t            prec,
  output logic [31:0]      sum,
  output logic [1:0]       carry [SLOTS]
);
  logic [1:0] cout [SLOTS];
  logic [1:0] cin  [SLOTS];

  for (genvar s = 0; s < SLOTS; s++) begin : g_slice
    logic [9:0] r;
    if (s == 0) begin : g_first
      assign cin[s] = 2'd0;
    end else begin : g_link
      // carry multiplexer between slices
      assign cin[s] = slot_link(prec, s) ? cout[s-1] : 2'd0;
    end
    assign r = 10'(x1[8*s +: 8]) + 10'(x2[8*s +: 8]) + 10'(c[8*s +: 8]) + 10'(cin[s]);
    assign sum[8*s +: 8] = r[7:0];
    assign cout[s]       = r[9:8];
  end

  always_comb begin
    int unsigned w;
    for (int unsigned s = 0; s < SLOTS; s++) begin
      w        = lane_width(prec, s);
      carry[s] = 2'd0;
      for (int unsigned t = 0; t < SLOTS; t++)
        if (w != 0 && t == s + w/8 - 1) carry[s] = cout[t];
    end
  end
endmodule
