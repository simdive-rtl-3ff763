// simdive_pkg: types, constants and small helper functions shared by the
// SIMDive approximate SIMD multiplier-divider.
//
// The 32-bit datapath is cut into four 8-bit slots (slot 0 = bits 7:0 of
// each operand, slot 3 = bits 31:24).  A lane is one 8-, 16- or 32-bit
// operand pair; it starts at one slot and covers 1, 2 or 4 slots.  The
// precision mode is one-hot, as the architecture prefers for FPGA fabric;
// it lists the five supported lane layouts (one 32-bit lane, two 16-bit
// lanes, one 16-bit plus two 8-bit lanes in either half, four 8-bit lanes).
//
// The error-reduction tables hold, for each of the 64 cells spanned by the
// three fraction MSBs of both operands, the mean of the correction that
// makes Mitchell's approximation exact, as a signed number with LSB weight
// 2^-9 (COEF_W = 8 bits, one LUT per bit):
//   multiply: c(x1,x2) = x1*x2               if 1+x1+x2+x1*x2 < 2
//                        (1-x1)*(1-x2)/2     otherwise
//   divide:   c(x1,x2) = x2*(x2-x1)/(1+x2)   if x1 >= x2
//                        (x1-x2)*(1-x2)/(1+x2) otherwise
//   entry[8*i+j] = round(512 * mean of c over x1 in [i/8,(i+1)/8),
//                                              x2 in [j/8,(j+1)/8))
// The mean is taken over a 64x64 grid of cell-interior points.  Adding c to
// the fraction sum before the anti-logarithm removes, on average over the
// cell, the error of Mitchell's method; the multiply entries are all
// positive and the divide entries all negative or zero.
package simdive_pkg;

  // One-hot precision mode (lane layout), upper half listed first.
  typedef enum logic [4:0] {
    PREC_32     = 5'b00001,  // one 32x32 lane
    PREC_16_16  = 5'b00010,  // two 16x16 lanes
    PREC_16_8_8 = 5'b00100,  // 16x16 in bits 31:16, two 8x8 in bits 15:0
    PREC_8_8_16 = 5'b01000,  // two 8x8 in bits 31:16, 16x16 in bits 15:0
    PREC_8X4    = 5'b10000   // four 8x8 lanes
  } prec_t;

  localparam int unsigned SLOTS    = 4;   // 8-bit slots in the 32-bit datapath
  localparam int unsigned NIBBLES  = 8;   // 4-bit LOD segments
  localparam int unsigned COEF_W   = 8;   // bits per table entry, LSB weight 2^-9

  typedef logic signed [COEF_W-1:0] coef_t;

  localparam coef_t MUL_TAB [64] = '{
      2,   6,  10,  14,  18,  22,  24,  12,
      6,  18,  30,  42,  54,  58,  39,  13,
     10,  30,  50,  70,  74,  55,  33,  11,
     14,  42,  70,  79,  63,  45,  27,   9,
     18,  54,  74,  63,  49,  35,  21,   7,
     22,  58,  55,  45,  35,  25,  15,   5,
     24,  39,  33,  27,  21,  15,   9,   3,
     12,  13,  11,   9,   7,   5,   3,   1};

  localparam coef_t DIV_TAB [64] = '{
     -9, -43, -66, -75, -71, -59, -39, -14,
     -3,  -8, -33, -50, -53, -47, -33, -12,
     -7, -10,  -8, -24, -35, -35, -26, -10,
    -10, -20, -15,  -7, -17, -23, -20,  -8,
    -14, -30, -30, -19,  -6, -11, -13,  -6,
    -18, -40, -45, -39, -23,  -6,  -6,  -4,
    -22, -50, -60, -58, -46, -26,  -6,  -2,
    -25, -60, -76, -77, -69, -52, -28,  -5};

  // Width of the lane that starts at slot s (0 if no lane starts there).
  function automatic int unsigned lane_width(prec_t p, int unsigned s);
    unique case (p)
      PREC_32:     return (s == 0) ? 32 : 0;
      PREC_16_16:  return (s == 0 || s == 2) ? 16 : 0;
      PREC_16_8_8: return (s == 2) ? 16 : (s < 2) ? 8 : 0;
      PREC_8_8_16: return (s == 0) ? 16 : (s >= 2) ? 8 : 0;
      default:     return 8;
    endcase
  endfunction

  // Carry link into slot s (s = 1..3): 1 when slots s-1 and s are in the
  // same lane, so the slice carry is passed on instead of cut to 0.
  function automatic logic slot_link(prec_t p, int unsigned s);
    unique case (p)
      PREC_32:     return 1'b1;
      PREC_16_16:  return (s != 2);
      PREC_16_8_8: return (s == 3);
      PREC_8_8_16: return (s == 1);
      default:     return 1'b0;
    endcase
  endfunction

  // First slot of the lane that contains slot s.
  function automatic int unsigned lane_base(prec_t p, int unsigned s);
    int unsigned b;
    b = s;
    for (int unsigned i = 1; i < SLOTS; i++)
      if (b > 0 && slot_link(p, b)) b = b - 1;
    return b;
  endfunction

endpackage
