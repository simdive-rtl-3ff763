// tb_out_shifter: random test of the anti-log stage at MAXW = 32 and lane
// widths 8, 16 and 32.  The expected value is computed as
// floor(2^(e + floor(t)) * (1 + frac) [* 2^W for quotients]) with the
// clamping and zero rules described in the module.
module tb_out_shifter;
  logic [5:0]        w;
  logic signed [6:0] e;
  logic [1:0]        carry, nneg;
  logic [31:0]       frac;
  logic              div, za, zb;
  logic [63:0]       out;
  int checks = 0, failures = 0;

  out_shifter #(.MAXW(32)) dut (.w(w), .e(e), .carry(carry), .nneg(nneg), .frac(frac),
                                .div(div), .zero_a(za), .zero_b(zb), .out(out));

  initial begin
    #10_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ww, fl, ex, sh, k1, k2, clamps;
    longint unsigned f, mant, full, expv;
    int widths [3] = '{8, 16, 32};
    clamps = 0;
    for (int i = 0; i < 30000; i++) begin
      ww   = widths[i % 3];
      div  = 1'($urandom());
      k1   = $urandom_range(0, ww - 1);
      k2   = $urandom_range(0, ww - 1);
      e    = 7'(div ? k1 - k2 : k1 + k2);
      frac = $urandom();
      za   = ($urandom_range(0, 30) == 0);
      zb   = ($urandom_range(0, 30) == 0);
      if (div) begin carry = 2'($urandom_range(0, 2)); nneg = 2'($urandom_range(carry, 2)); end
      else     begin carry = 2'($urandom_range(0, 2)); nneg = 2'd0; end
      w = 6'(ww);
      #1;
      full = (ww == 32) ? 64'hFFFF_FFFF_FFFF_FFFF : ((64'd1 << (2*ww)) - 1);
      f    = 64'(frac) & ((64'd1 << ww) - 1);
      fl   = int'(carry) - int'(nneg);
      if (fl > 1)  begin fl = 1;  f = (64'd1 << ww) - 1; clamps++; end
      if (fl < -1) begin fl = -1; f = 0; clamps++; end
      ex   = int'(e) + fl;
      sh   = div ? ex + ww : ex;
      mant = (64'd1 << ww) | f;
      if (za || (zb && !div) || sh < 0) expv = 0;
      else if (zb)                      expv = full;
      else if (sh >= ww)                expv = (mant << (sh - ww)) & full;
      else                              expv = (mant >> (ww - sh)) & full;
      checks++;
      if (out != expv) begin
        failures++;
        if (failures < 10) $display("FAIL w=%0d div=%0d e=%0d c=%0d n=%0d frac=%h got %h exp %h",
                                    ww, div, e, carry, nneg, frac, out, expv);
      end
    end
    checks++;
    if (clamps == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
