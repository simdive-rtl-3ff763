// out_shifter: anti-logarithm stage (output barrel shifter) of one lane.
//
// Mitchell's anti-log of k + t, where k = k1 +/- k2 and t = x1 +/- x2 + c is
// the ternary-adder result, always has the form 2^(k + floor(t)) * (1 + frac(t)):
// the carry out of the fraction sum (or the borrow in divide mode) moves one
// into the exponent, and the W-bit sum field is frac(t).  This stage
//   1. forms floor(t) = carry - nneg, where nneg counts the adder terms that
//      entered as 2^W - |value| (negated x2, negative coefficient);
//   2. clamps the rare results outside the normal range, which the error
//      term can cause: floor(t) = 2 becomes 1.111..1 * 2^(k+1) (multiply),
//      floor(t) = -2 becomes 1.0 * 2^(k-1) (divide);
//   3. shifts the mantissa {1, frac} left by the exponent and drops the W
//      fraction bits.
// Product: the 2W-bit integer 2^e * 1.f, truncated.  Quotient: fixed point
// with W integer and W fraction bits, 2^(e+W) * 1.f truncated.  Operand
// zero: result 0; divide by zero: all ones.  Combinational.
// MAXW is the widest lane this instance must serve; `w` (8, 16 or 32, not
// above MAXW) is the width of the lane it serves now.
// The anti-log equations follow the paper; the output formats, the clamping
// and the zero handling are this design's choices.
module out_shifter #(
  parameter int unsigned MAXW = 32
) (
  input  logic [5:0]          w,
  input  logic signed [6:0]   e,
  input  logic [1:0]          carry,
  input  logic [1:0]          nneg,
  input  logic [MAXW-1:0]     frac,
  input  logic                div,
  input  logic                zero_a,
  input  logic                zero_b,
  output logic [2*MAXW-1:0]   out
);
  localparam int unsigned VW = 3*MAXW + 1;

  always_comb begin
    logic signed [2:0]  fl;
    logic signed [7:0]  sh;
    logic [MAXW-1:0]    f;
    logic [MAXW-1:0]    wmask;
    logic [2*MAXW-1:0]  omask;
    logic [VW-1:0]      v;

    wmask = MAXW'({MAXW{1'b1}} >> (MAXW - int'(w)));
    omask = (2*MAXW)'({(2*MAXW){1'b1}} >> (2*MAXW - 2*int'(w)));
    f     = frac & wmask;
    fl    = $signed({1'b0, carry}) - $signed({1'b0, nneg});
    if (fl > 3'sd1) begin
      fl = 3'sd1;
      f  = wmask;
    end else if (fl < -3'sd1) begin
      fl = -3'sd1;
      f  = '0;
    end
    sh = 8'(e) + 8'(fl) + (div ? 8'(w) : 8'd0);
    v  = (VW'(f) | (VW'(1) << w)) << sh[6:0];
    v  = v >> w;
    if (zero_a || (zero_b && !div) || sh < 0)
      out = '0;
    else if (zero_b)
      out = omask;
    else
      out = v[2*MAXW-1:0] & omask;
  end
endmodule
