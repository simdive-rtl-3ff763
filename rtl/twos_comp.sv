// twos_comp: SIMD two's complement of the second operand's fraction.
//
// In divide mode Mitchell's method subtracts the fractions, x1 - x2, so the
// second fraction is negated before it enters the adder.  Each lane whose
// mode bit is 1 gets (2^W - x) mod 2^W in its W-bit field; other lanes pass
// unchanged.  The negation is built like the adder it feeds: four 8-bit
// slices invert their bits and add a carry that enters at the lane's lowest
// slot (the "+1") and ripples through the slots of the same lane, linked or
// cut by the precision mode.
//
// `borrow[s]` (for the lane starting at slot s) is 1 when the field now
// holds 2^W - x with x != 0, i.e. the negated term counts one 2^W too many;
// the output stage subtracts it again.  Combinational.  The slice-wise
// construction is this design's choice; the text only names the block.
module twos_comp
  import simdive_pkg::*;
(
  input  logic [31:0]      x,
  input  prec_t            prec,
  input  logic [SLOTS-1:0] neg,     // per slot: 1 = lane divides (use bit of lane's first slot)
  output logic [31:0]      y,
  output logic [SLOTS-1:0] borrow
);
  always_comb begin
    logic       c;
    logic       inv;
    logic [8:0] r;
    logic [SLOTS-1:0] cout;
    c    = 1'b0;
    cout = '0;
    for (int unsigned s = 0; s < SLOTS; s++) begin
      inv = neg[lane_base(prec, s)];
      if (s == 0 || !slot_link(prec, s)) c = inv;   // lane starts: inject +1
      r        = {1'b0, x[8*s +: 8] ^ {8{inv}}} + 9'(c);
      y[8*s +: 8] = r[7:0];
      c        = r[8];
      cout[s]  = r[8];
    end
    borrow = '0;
    for (int unsigned s = 0; s < SLOTS; s++) begin
      // carry out of the lane's top slot: 1 only for x == 0
      if (lane_width(prec, s) != 0)
        borrow[s] = neg[s] & ~cout[s + lane_width(prec, s)/8 - 1];
    end
  end
endmodule
