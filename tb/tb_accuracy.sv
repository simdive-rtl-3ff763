// tb_accuracy: accuracy workload for the tunable error reduction.
//
// Three SIMDive instances keep 8, 6 and 4 coefficient bits (LUTs).  Each is
// fed the same uniformly random operands as 8x8 multiplies, 8/8 divides
// (four 8-bit lanes), 16x16 multiplies and 16/8 divides (two 16-bit lanes),
// the test sets the architecture's accuracy figures are quoted for.  The
// mean and peak relative errors against exact arithmetic are printed.
// Checks: every result equals the reference model; at 8 bits the 16-bit
// mean errors stay below 1%; fewer coefficient bits never lower the mean
// error by more than noise (the accuracy knob works in the right direction).
module tb_accuracy;
  import simdive_pkg::*;
  import tb_ref_pkg::*;

  localparam int NCFG = 3;
  localparam int CB [NCFG] = '{8, 6, 4};

  logic        clk = 1'b0;
  logic        rst_n, in_valid;
  logic [31:0] a, b;
  prec_t       prec;
  logic [3:0]  div;
  logic        ov   [NCFG];
  logic [63:0] res  [NCFG];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  for (genvar g = 0; g < NCFG; g++) begin : g_dut
    simdive #(.COEF_BITS(CB[g])) dut (.clk(clk), .rst_n(rst_n), .in_valid(in_valid),
      .a(a), .b(b), .prec(prec), .div(div), .out_valid(ov[g]), .result(res[g]));
  end

  initial begin
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // test sets: 0 = 8x8 mul, 1 = 8/8 div, 2 = 16x16 mul, 3 = 16/8 div
  real are [NCFG][4];
  real pre [NCFG][4];
  string set_name [4] = '{"8x8 multiply", "8/8 divide", "16x16 multiply", "16/8 divide"};

  initial begin
    int w, set, cl, n;
    longint unsigned x, y, exp;
    real ex, ap, r;
    build_coefs();
    for (int g = 0; g < NCFG; g++) for (int t = 0; t < 4; t++) begin are[g][t] = 0.0; pre[g][t] = 0.0; end
    rst_n = 1'b0; in_valid = 1'b0; a = '0; b = '0; prec = PREC_8X4; div = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    n = 8000;
    for (set = 0; set < 4; set++) begin
      for (int i = 0; i < n; i++) begin
        @(negedge clk);
        a = $urandom(); b = $urandom();
        w = (set < 2) ? 8 : 16;
        prec = (w == 8) ? PREC_8X4 : PREC_16_16;
        div  = (set % 2 == 1) ? 4'hF : 4'h0;
        if (set == 3) b &= 32'h00FF_00FF;
        for (int s = 0; s < 32 / w; s++) begin
          if (((a >> (w*s)) & ((1 << w) - 1)) == 0) a |= 32'd1 << (w*s);
          if (((b >> (w*s)) & ((1 << w) - 1)) == 0) b |= 32'd1 << (w*s);
        end
        in_valid = 1'b1;
        @(posedge clk); #1;
        in_valid = 1'b0;
        for (int g = 0; g < NCFG; g++) begin
          for (int s = 0; s < 32 / w; s++) begin
            x = (64'(a) >> (w*s)) & ((64'd1 << w) - 1);
            y = (64'(b) >> (w*s)) & ((64'd1 << w) - 1);
            exp = ref_lane(x, y, w, div[0], CB[g], cl);
            checks++;
            if (((res[g] >> (2*w*s)) & ((64'd1 << (2*w)) - 1)) != exp) begin
              failures++;
              if (failures < 10) $display("FAIL cfg=%0d set=%0d x=%h y=%h", CB[g], set, x, y);
            end
            ex = div[0] ? real'(x) / real'(y) : real'(x) * real'(y);
            ap = real'((res[g] >> (2*w*s)) & ((64'd1 << (2*w)) - 1));
            if (div[0]) ap = ap / real'(64'd1 << w);
            r  = (ex > ap ? ex - ap : ap - ex) / ex;
            are[g][set] += r;
            if (r > pre[g][set]) pre[g][set] = r;
          end
        end
      end
      for (int g = 0; g < NCFG; g++) are[g][set] = 100.0 * are[g][set] / (n * 32 / w);
    end
    for (int g = 0; g < NCFG; g++)
      for (int t = 0; t < 4; t++)
        $display("%0d coefficient bits, %-15s mean rel. error %6.3f %%, peak %7.3f %%",
                 CB[g], set_name[t], are[g][t], 100.0 * pre[g][t]);
    checks += 2;
    if (!(are[0][2] < 1.0)) failures++;
    if (!(are[0][3] < 1.0)) failures++;
    for (int t = 0; t < 4; t++) begin
      checks++;
      if (!(are[0][t] <= are[1][t] + 0.02 && are[1][t] <= are[2][t] + 0.02)) begin
        failures++; $display("FAIL accuracy not monotonic in coefficient bits, set %0d", t);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
