// tb_ternary_adder: random test of the SIMD ternary adder.  For each lane
// the W-bit sum field and the carry must equal the plain sum of the three
// lane fields, so carries must cross slices inside a lane and stop at lane
// boundaries.
module tb_ternary_adder;
  import simdive_pkg::*;
  logic [31:0] x1, x2, c, sum;
  prec_t       prec;
  logic [1:0]  carry [SLOTS];
  int checks = 0, failures = 0;

  ternary_adder dut (.x1(x1), .x2(x2), .c(c), .prec(prec), .sum(sum), .carry(carry));

  prec_t modes [5] = '{PREC_32, PREC_16_16, PREC_16_8_8, PREC_8_8_16, PREC_8X4};

  initial begin
    #10_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int w;
    longint unsigned m, t;
    for (int i = 0; i < 20000; i++) begin
      prec = modes[i % 5];
      x1 = $urandom(); x2 = $urandom(); c = $urandom();
      if (i % 5 == 1) begin x1 = 32'hFFFF_FFFF; x2 = 32'hFFFF_FFFF; end
      #1;
      for (int s = 0; s < 4; s++) begin
        w = int'(lane_width(prec, s));
        if (w == 0) continue;
        m = (64'd1 << w) - 1;
        t = ((64'(x1) >> (8*s)) & m) + ((64'(x2) >> (8*s)) & m) + ((64'(c) >> (8*s)) & m);
        checks += 2;
        if (((64'(sum) >> (8*s)) & m) != (t & m)) begin
          failures++; $display("FAIL sum prec=%s s=%0d", prec.name(), s);
        end
        if (64'(carry[s]) != (t >> w)) begin
          failures++; $display("FAIL carry prec=%s s=%0d got %0d exp %0d", prec.name(), s, carry[s], t >> w);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
