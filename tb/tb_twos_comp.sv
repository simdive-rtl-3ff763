// tb_twos_comp: random test of the SIMD fraction negation.  Divide lanes
// must hold (2^W - x) mod 2^W and flag a borrow exactly when x != 0;
// multiply lanes must pass x unchanged.
module tb_twos_comp;
  import simdive_pkg::*;
  logic [31:0] x, y;
  prec_t       prec;
  logic [3:0]  neg, borrow;
  int checks = 0, failures = 0;

  twos_comp dut (.x(x), .prec(prec), .neg(neg), .y(y), .borrow(borrow));

  prec_t modes [5] = '{PREC_32, PREC_16_16, PREC_16_8_8, PREC_8_8_16, PREC_8X4};

  initial begin
    #10_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int w;
    longint unsigned lx, ly, m;
    for (int i = 0; i < 20000; i++) begin
      prec = modes[i % 5];
      x = $urandom();
      if (i % 9 == 0) x &= 32'hFF00_00FF;
      neg = 4'($urandom());
      #1;
      for (int s = 0; s < 4; s++) begin
        w = int'(lane_width(prec, s));
        if (w == 0) continue;
        m  = (64'd1 << w) - 1;
        lx = (64'(x) >> (8*s)) & m;
        ly = (64'(y) >> (8*s)) & m;
        checks += 2;
        if (ly != (neg[s] ? ((~lx + 1) & m) : lx)) begin
          failures++; $display("FAIL y x=%h s=%0d neg=%b y=%h", x, s, neg[s], y);
        end
        if (borrow[s] !== (neg[s] && lx != 0)) begin
          failures++; $display("FAIL borrow x=%h s=%0d", x, s);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
