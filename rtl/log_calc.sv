// log_calc: SIMD approximate base-2 logarithm (Mitchell) of a 32-bit operand.
//
// For every lane an operand A = 2^k * (1 + x) is turned into its integer part
// k (position of the leading one) and its fraction x (the bits below the
// leading one).  Eight lod4 instances look at the eight 4-bit segments in
// parallel; per lane, the most significant non-zero segment inside the lane
// then gives k = 4*segment + position.  Which segments belong to which lane
// comes from the one-hot precision mode.
//
// Outputs, all combinational:
//   k[s], zero[s]  integer part and "operand is zero" flag of the lane that
//                  starts at slot s (both 0/1 for slots no lane starts at);
//   frac           packed fractions: the W-bit field of a W-bit lane holds
//                  x * 2^W, i.e. the bits below the leading one moved up to
//                  the top of the field, with zeros below (bit 0 of the field
//                  is always 0 because x has W-1 bits).
// Segment-parallel leading-one detection follows the architecture; the
// left-aligned fraction format and the normalising shift are this design's
// choices (the text only says integer and fractional parts are "determined").
module log_calc
  import simdive_pkg::*;
(
  input  logic [31:0] a,
  input  prec_t       prec,
  output logic [4:0]  k    [SLOTS],
  output logic        zero [SLOTS],
  output logic [31:0] frac
);
  logic       seg_zero [NIBBLES];
  logic [1:0] seg_pos  [NIBBLES];

  for (genvar n = 0; n < NIBBLES; n++) begin : g_lod
    lod4 u_lod (.seg(a[4*n +: 4]), .zero(seg_zero[n]), .pos(seg_pos[n]));
  end

  always_comb begin
    int unsigned w;
    logic [31:0] lane;
    logic [31:0] shifted;
    logic [31:0] mask;
    frac    = '0;
    lane    = '0;
    shifted = '0;
    mask    = '0;
    w       = 0;
    for (int unsigned s = 0; s < SLOTS; s++) begin
      w       = lane_width(prec, s);
      k[s]    = '0;
      zero[s] = 1'b1;
      if (w != 0) begin
        // ascending scan: the highest non-zero segment of the lane wins
        for (int unsigned n = 0; n < NIBBLES; n++) begin
          if (n >= 2*s && n < 2*s + w/4 && !seg_zero[n]) begin
            k[s]    = 5'(4*(n - 2*s)) + 5'(seg_pos[n]);
            zero[s] = 1'b0;
          end
        end
        mask    = (w == 32) ? 32'hFFFF_FFFF : ((32'd1 << w) - 32'd1);
        lane    = (a >> (8*s)) & mask;
        shifted = lane << (w - 32'(k[s]));   // shift by 32 (k = 0, W = 32) gives 0
        frac    = frac | ((shifted & mask) << (8*s));
      end
    end
  end
endmodule
