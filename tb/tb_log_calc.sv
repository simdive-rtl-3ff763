// tb_log_calc: random test of the SIMD log calculator in all lane layouts.
// For every lane, k must be the position of the leading one and the field
// must hold the bits below it moved to the top of the lane; zero lanes must
// raise the zero flag.
module tb_log_calc;
  import simdive_pkg::*;
  logic [31:0] a, frac;
  prec_t       prec;
  logic [4:0]  k    [SLOTS];
  logic        zero [SLOTS];
  int checks = 0, failures = 0;

  log_calc dut (.a(a), .prec(prec), .k(k), .zero(zero), .frac(frac));

  prec_t modes [5] = '{PREC_32, PREC_16_16, PREC_16_8_8, PREC_8_8_16, PREC_8X4};

  initial begin
    #10_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int w, kk;
    longint unsigned lane, fexp, fgot;
    for (int i = 0; i < 20000; i++) begin
      prec = modes[i % 5];
      a = $urandom();
      if (i % 7 == 0) a &= 32'h0F00_00F0;
      if (i % 11 == 0) a = 32'h0000_0000;
      if (i % 13 == 0) a = 32'h8080_8080 >> (i % 8);
      #1;
      for (int s = 0; s < 4; s++) begin
        w = int'(lane_width(prec, s));
        if (w == 0) continue;
        lane = (64'(a) >> (8*s)) & ((64'd1 << w) - 1);
        kk = -1;
        for (int j = 0; j < w; j++) if (lane[j]) kk = j;
        checks++;
        if (zero[s] !== (kk < 0)) begin failures++; $display("FAIL zero a=%h s=%0d", a, s); end
        if (kk >= 0) begin
          fexp = ((lane - (64'd1 << kk)) << (w - kk)) & ((64'd1 << w) - 1);
          fgot = (64'(frac) >> (8*s)) & ((64'd1 << w) - 1);
          checks += 2;
          if (k[s] !== 5'(kk)) begin failures++; $display("FAIL k a=%h s=%0d got %0d exp %0d", a, s, k[s], kk); end
          if (fgot != fexp) begin failures++; $display("FAIL frac a=%h s=%0d got %h exp %h", a, s, fgot, fexp); end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
