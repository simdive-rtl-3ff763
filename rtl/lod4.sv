// lod4: leading-one detector for one 4-bit segment of an operand.
//
// Two outputs, each a function of the same four input bits, so each maps
// onto one FPGA LUT: `zero` flags an all-zero segment, and `pos` gives the
// bit position (0..3) of the most significant 1.  `pos` is 0 when the
// segment is zero; the caller must look at `zero` first.  Purely
// combinational.  The split into a zero flag and a position per 4-bit
// segment follows the architecture; the encoding of `pos` as a 2-bit binary
// number is this design's choice.
module lod4 (
  input  logic [3:0] seg,
  output logic       zero,
  output logic [1:0] pos
);
  always_comb begin
    zero = (seg == 4'b0000);
    casez (seg)
      4'b1???: pos = 2'd3;
      4'b01??: pos = 2'd2;
      4'b001?: pos = 2'd1;
      default: pos = 2'd0;
    endcase
  end
endmodule
