// coef_select: light-weight error-coefficient selection for one lane.
//
// The three most significant fraction bits of each operand split the unit
// square of (x1, x2) into 64 cells; every cell has its own correction
// coefficient (the tables and their formula are in simdive_pkg).  Bit i of
// the coefficient is a function of the six selecting bits alone, so it is
// one 6-input LUT whose 64 entries are bit i of the 64 coefficients; the
// module builds exactly those per-bit LUTs from the tables.  COEF_BITS sets
// how many LUTs (coefficient bits) are kept, which is the accuracy knob:
// the table entries are cut to their COEF_BITS upper bits, so the output
// LSB weighs 2^-(COEF_BITS+1).  Multiply and divide need different
// coefficients; a 2:1 multiplexer driven by the lane's mode picks between
// the two LUT banks.  Combinational.
//
// From the architecture: 3 MSBs per fraction, 64 cells, one LUT per
// coefficient bit, eight LUTs for the most accurate setting.  The table
// values (mean correction per cell) and the separate multiply/divide banks
// are this design's reconstruction.
module coef_select
  import simdive_pkg::*;
#(
  parameter int unsigned COEF_BITS = 8    // 1..8 LUTs per coefficient
) (
  input  logic [2:0]                  f1_msb,
  input  logic [2:0]                  f2_msb,
  input  logic                        div,
  output logic signed [COEF_BITS-1:0] coef
);
  localparam int unsigned DROP = COEF_W - COEF_BITS;

  // LUT initialisation vectors, one 64-bit vector per coefficient bit.
  function automatic logic [63:0] lut_init(logic is_div, int unsigned bitn);
    logic [63:0] v;
    for (int unsigned e = 0; e < 64; e++)
      v[e] = is_div ? DIV_TAB[e][bitn + DROP] : MUL_TAB[e][bitn + DROP];
    return v;
  endfunction

  logic [5:0]           sel;
  logic [COEF_BITS-1:0] mul_bits, div_bits;

  assign sel = {f1_msb, f2_msb};

  for (genvar i = 0; i < COEF_BITS; i++) begin : g_lut
    localparam logic [63:0] MUL_INIT = lut_init(1'b0, i);
    localparam logic [63:0] DIV_INIT = lut_init(1'b1, i);
    assign mul_bits[i] = MUL_INIT[sel];
    assign div_bits[i] = DIV_INIT[sel];
  end

  assign coef = div ? div_bits : mul_bits;

  initial assert (COEF_BITS >= 1 && COEF_BITS <= COEF_W)
    else $error("coef_select: COEF_BITS must be 1..%0d", COEF_W);
endmodule
