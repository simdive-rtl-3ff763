// tb_lod4: exhaustive test of the 4-bit leading-one detector against a
// bit scan.
module tb_lod4;
  logic [3:0] seg;
  logic       zero;
  logic [1:0] pos;
  int checks = 0, failures = 0;

  lod4 dut (.seg(seg), .zero(zero), .pos(pos));

  initial begin
    #100_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int p;
    for (int v = 0; v < 16; v++) begin
      seg = 4'(v);
      #1;
      p = 0;
      for (int i = 0; i < 4; i++) if (v & (1 << i)) p = i;
      checks++;
      if (zero !== (v == 0)) begin failures++; $display("FAIL zero seg=%b", seg); end
      if (v != 0) begin
        checks++;
        if (pos !== 2'(p)) begin failures++; $display("FAIL pos seg=%b got %0d", seg, pos); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
