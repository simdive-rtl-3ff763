// simdive: approximate SIMD multiplier-divider (Mitchell's algorithm with
// light-weight error reduction), 32-bit datapath.
//
// Function.  The 32-bit operands a and b are cut into lanes by the one-hot
// precision mode `prec`: one 32-bit lane, two 16-bit lanes, a 16-bit lane
// and two 8-bit lanes, or four 8-bit lanes.  Every lane independently
// multiplies or divides, selected by the `div` bit of the lane's lowest
// 8-bit slot.  A lane of width W occupies a[8s+W-1:8s], b[8s+W-1:8s] and
// result[16s+2W-1:16s], where s is its lowest slot.  A product is the
// approximate 2W-bit integer a*b; a quotient is a/b in fixed point with W
// integer and W fraction bits.  a == 0 gives 0; a != 0 divided by 0 gives
// all ones.
//
// How it works.  Each operand's approximate log k + x comes from log_calc
// (4-bit leading-one detectors).  The integer parts are added or subtracted
// in int_adder; the fractions are summed in one ternary_adder pass together
// with an error coefficient chosen by coef_select from the 3 MSBs of both
// fractions, the second fraction first negated by twos_comp in divide
// lanes.  out_shifter applies the anti-logarithm.  Adders and the negation
// are four 8-bit slices chained by carry multiplexers that the precision
// mode opens or closes, so the same hardware serves every lane layout.
//
// Timing.  The datapath is combinational from a, b, prec, div to an output
// register: a request with in_valid = 1 gives out_valid = 1 and its result
// on the next clock edge, one new request per cycle.  The output register
// and the active-low synchronous reset of out_valid are this design's
// choice; the structure of the datapath follows the paper, and the table
// values, output formats, overflow clamping and zero handling are this
// design's reconstruction (see the individual modules).
module simdive
  import simdive_pkg::*;
#(
  parameter int unsigned COEF_BITS = 8   // error-coefficient LUTs (accuracy knob), 1..8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [31:0]      a,
  input  logic [31:0]      b,
  input  prec_t            prec,
  input  logic [SLOTS-1:0] div,       // per slot; a lane uses its lowest slot's bit
  output logic             out_valid,
  output logic [63:0]      result
);
  localparam int unsigned SLOT_MAXW [SLOTS] = '{32, 8, 16, 8};

  // ---- logarithms ---------------------------------------------------------
  logic [4:0]  k1 [SLOTS], k2 [SLOTS];
  logic        z1 [SLOTS], z2 [SLOTS];
  logic [31:0] f1, f2, f2n;
  logic [SLOTS-1:0] borrow;

  log_calc u_log_a (.a(a), .prec(prec), .k(k1), .zero(z1), .frac(f1));
  log_calc u_log_b (.a(b), .prec(prec), .k(k2), .zero(z2), .frac(f2));

  twos_comp u_neg (.x(f2), .prec(prec), .neg(div), .y(f2n), .borrow(borrow));

  // ---- error coefficients ---------------------------------------------------
  logic [2:0]                  f1_msb [SLOTS], f2_msb [SLOTS];
  logic signed [COEF_BITS-1:0] coef   [SLOTS];
  logic [31:0]                 cpack;
  logic [1:0]                  nneg   [SLOTS];
  logic [5:0]                  w      [SLOTS];

  always_comb begin
    for (int unsigned s = 0; s < SLOTS; s++) begin
      w[s]      = 6'(lane_width(prec, s));
      f1_msb[s] = '0;
      f2_msb[s] = '0;
      for (int unsigned t = 0; t < 32; t++) begin
        if (w[s] != 0 && t == 8*s + int'(w[s]) - 1) begin
          f1_msb[s] = f1[t -: 3];
          f2_msb[s] = f2[t -: 3];
        end
      end
    end
  end

  for (genvar s = 0; s < SLOTS; s++) begin : g_coef
    coef_select #(.COEF_BITS(COEF_BITS)) u_coef (
      .f1_msb(f1_msb[s]), .f2_msb(f2_msb[s]), .div(div[s]), .coef(coef[s]));
  end

  // Align each coefficient (LSB weight 2^-(COEF_BITS+1)) to its W-bit lane
  // field (LSB weight 2^-W); bits below the field LSB are dropped.
  always_comb begin
    logic signed [31:0] cv;
    logic [31:0]        mask;
    cpack = '0;
    cv    = '0;
    mask  = '0;
    for (int unsigned s = 0; s < SLOTS; s++) begin
      nneg[s] = 2'(borrow[s]);
      if (w[s] != 0) begin
        cv   = 32'(coef[s]);
        if (int'(w[s]) >= COEF_BITS + 1) cv = cv <<< (int'(w[s]) - COEF_BITS - 1);
        else                              cv = cv >>> (COEF_BITS + 1 - int'(w[s]));
        mask    = (w[s] == 6'd32) ? 32'hFFFF_FFFF : ((32'd1 << w[s]) - 32'd1);
        cpack   = cpack | ((cv & mask) << (8*s));
        nneg[s] = nneg[s] + 2'(cv < 0);
      end
    end
  end

  // ---- fraction and integer additions ---------------------------------------
  logic [31:0]       fsum;
  logic [1:0]        fcarry [SLOTS];
  logic signed [6:0] e      [SLOTS];

  ternary_adder u_tadd (.x1(f1), .x2(f2n), .c(cpack), .prec(prec),
                        .sum(fsum), .carry(fcarry));

  for (genvar s = 0; s < SLOTS; s++) begin : g_int
    int_adder u_iadd (.k1(k1[s]), .k2(k2[s]), .div(div[s]), .e(e[s]));
  end

  // ---- anti-logarithm and output packing -----------------------------------
  logic [63:0] lane_out [SLOTS];

  for (genvar s = 0; s < SLOTS; s++) begin : g_shift
    localparam int unsigned MW = SLOT_MAXW[s];
    logic [2*MW-1:0] o;
    logic [5:0]      ws;
    // a slot can only start a lane up to its shifter's width
    assign ws = (int'(w[s]) > MW) ? 6'(MW) : w[s];
    out_shifter #(.MAXW(MW)) u_shift (
      .w(ws), .e(e[s]), .carry(fcarry[s]), .nneg(nneg[s]),
      .frac(fsum[8*s +: MW]), .div(div[s]),
      .zero_a(z1[s]), .zero_b(z2[s]), .out(o));
    assign lane_out[s] = (w[s] != 0) ? 64'(o) : 64'd0;
  end

  logic [63:0] res_d;
  always_comb begin
    res_d = '0;
    for (int unsigned s = 0; s < SLOTS; s++)
      res_d = res_d | (lane_out[s] << (16*s));
  end

  always_ff @(posedge clk) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
    if (in_valid) result <= res_d;
  end

  // The precision mode must name exactly one lane layout.
  a_prec_onehot: assert property (@(posedge clk) disable iff (!rst_n)
                                  in_valid |-> $onehot(prec));
endmodule
