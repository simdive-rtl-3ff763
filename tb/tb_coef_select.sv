// tb_coef_select: checks all 64 multiply and 64 divide coefficients, at
// 8 LUTs and at 5 LUTs, against values recomputed here from the defining
// formula (mean exact correction per cell, tb_ref_pkg).
module tb_coef_select;
  import tb_ref_pkg::*;
  logic [2:0]        f1, f2;
  logic              div;
  logic signed [7:0] c8;
  logic signed [4:0] c5;
  int checks = 0, failures = 0;

  coef_select #(.COEF_BITS(8)) dut8 (.f1_msb(f1), .f2_msb(f2), .div(div), .coef(c8));
  coef_select #(.COEF_BITS(5)) dut5 (.f1_msb(f1), .f2_msb(f2), .div(div), .coef(c5));

  initial begin
    #10_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    build_coefs();
    for (int d = 0; d < 2; d++)
      for (int c = 0; c < 64; c++) begin
        div = d[0]; f1 = 3'(c / 8); f2 = 3'(c % 8);
        #1;
        checks += 2;
        if (int'(c8) != coef_bits(d[0], c, 8)) begin
          failures++; $display("FAIL 8-bit div=%0d cell=%0d got %0d exp %0d", d, c, c8, coef_bits(d[0], c, 8));
        end
        if (int'(c5) != coef_bits(d[0], c, 5)) begin
          failures++; $display("FAIL 5-bit div=%0d cell=%0d got %0d exp %0d", d, c, c5, coef_bits(d[0], c, 5));
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
