// tb_int_adder: exhaustive test of the integer-part adder, k1 + k2 and
// k1 - k2 for all 5-bit k1, k2.
module tb_int_adder;
  logic [4:0]        k1, k2;
  logic              div;
  logic signed [6:0] e;
  int checks = 0, failures = 0;

  int_adder dut (.k1(k1), .k2(k2), .div(div), .e(e));

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int d = 0; d < 2; d++)
      for (int i = 0; i < 32; i++)
        for (int j = 0; j < 32; j++) begin
          k1 = 5'(i); k2 = 5'(j); div = d[0];
          #1;
          checks++;
          if (int'(e) != (d ? i - j : i + j)) begin
            failures++; $display("FAIL k1=%0d k2=%0d div=%0d e=%0d", i, j, d, e);
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
