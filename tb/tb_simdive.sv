// tb_simdive: end-to-end test of the SIMDive top at its default parameters.
//
// Drives one request per cycle through every lane layout with random
// operands and random per-lane multiply/divide selection, and compares each
// lane of the registered result with the reference model in tb_ref_pkg.
// Checks the one-cycle latency (out_valid and result one clock after
// in_valid).  Directed vectors reach zero operands, division by zero and
// the two overflow clamps of the anti-log stage.  Finally it measures the
// mean relative error of 16x16 products and 16/8 quotients against exact
// arithmetic and requires it below 1% (the architecture targets about 0.8%).
// Every mechanism listed in `seen` must occur at least once.
module tb_simdive;
  import simdive_pkg::*;
  import tb_ref_pkg::*;

  logic        clk = 1'b0;
  logic        rst_n;
  logic        in_valid;
  logic [31:0] a, b;
  prec_t       prec;
  logic [3:0]  div;
  logic        out_valid;
  logic [63:0] result;

  int checks = 0, failures = 0;

  // mechanism counters
  typedef enum int {M_P32, M_P16_16, M_P16_8_8, M_P8_8_16, M_P8X4, M_MUL, M_DIV, M_MIXED,
                    M_ZERO, M_DIV0, M_CLAMP_MUL, M_CLAMP_DIV, M_CHAIN, M_NUM} mech_e;
  int seen [M_NUM];

  always #5 clk = ~clk;

  simdive dut (.clk(clk), .rst_n(rst_n), .in_valid(in_valid), .a(a), .b(b),
               .prec(prec), .div(div), .out_valid(out_valid), .result(result));

  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic void check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endfunction

  // one request; result checked one cycle later
  task automatic run_vec(prec_t p, logic [31:0] av, logic [31:0] bv, logic [3:0] dv);
    int w, cl;
    bit has_mul, has_div;
    longint unsigned exp, got;
    @(negedge clk);
    in_valid = 1'b1; a = av; b = bv; prec = p; div = dv;
    @(posedge clk);
    #1;
    in_valid = 1'b0;
    check(out_valid === 1'b1, "out_valid one cycle after in_valid");
    has_mul = 0; has_div = 0;
    for (int s = 0; s < 4; s++) begin
      w = int'(lane_width(p, s));
      if (w == 0) continue;
      exp = ref_lane((64'(av) >> (8*s)) & ((64'd1 << w) - 1),
                     (64'(bv) >> (8*s)) & ((64'd1 << w) - 1), w, dv[s], 8, cl);
      got = (result >> (16*s)) & ((w == 32) ? 64'hFFFF_FFFF_FFFF_FFFF : ((64'd1 << (2*w)) - 1));
      check(got == exp, $sformatf("prec=%s slot=%0d a=%h b=%h div=%b exp=%h got=%h",
                                  p.name(), s, av, bv, dv[s], exp, got));
      if (dv[s]) has_div = 1; else has_mul = 1;
      if (cl == 1) seen[M_CLAMP_MUL]++;
      if (cl == 2) seen[M_CLAMP_DIV]++;
      if (w > 8) seen[M_CHAIN]++;
      if (((64'(av) >> (8*s)) & ((64'd1 << w) - 1)) == 0 ||
          ((64'(bv) >> (8*s)) & ((64'd1 << w) - 1)) == 0) begin
        if (dv[s] && ((64'(bv) >> (8*s)) & ((64'd1 << w) - 1)) == 0) seen[M_DIV0]++;
        else seen[M_ZERO]++;
      end
    end
    if (has_mul) seen[M_MUL]++;
    if (has_div) seen[M_DIV]++;
    if (has_mul && has_div) seen[M_MIXED]++;
    case (p)
      PREC_32:     seen[M_P32]++;
      PREC_16_16:  seen[M_P16_16]++;
      PREC_16_8_8: seen[M_P16_8_8]++;
      PREC_8_8_16: seen[M_P8_8_16]++;
      default:     seen[M_P8X4]++;
    endcase
  endtask

  prec_t modes [5] = '{PREC_32, PREC_16_16, PREC_16_8_8, PREC_8_8_16, PREC_8X4};

  initial begin
    real are_mul, are_div, ex, ap;
    int  n_mul, n_div;
    logic [15:0] x, y;
    build_coefs();
    rst_n = 1'b0; in_valid = 1'b0; a = '0; b = '0; prec = PREC_32; div = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    @(posedge clk); #1;
    check(out_valid === 1'b0, "out_valid low after reset");

    // paper's worked example: 43 * 10 ~ 408 with plain Mitchell; 43 / 10 ~ 4
    run_vec(PREC_8X4, 32'h0000_002B, 32'h0000_000A, 4'b0010);
    run_vec(PREC_8X4, 32'h0000_2B2B, 32'h0000_0A0A, 4'b0001);

    // directed corner cases
    run_vec(PREC_16_16, 32'hFFFF_FFFF, 32'hFFFF_FFFF, 4'b0000);   // multiply clamp
    run_vec(PREC_32,    32'hFFFF_FFFF, 32'hFFFF_FFFF, 4'b0000);
    run_vec(PREC_16_16, 32'h8000_8000, 32'hFFFF_FFFF, 4'b0101);   // divide clamp
    run_vec(PREC_32,    32'h8000_0000, 32'hFFFF_FFFF, 4'b0001);
    run_vec(PREC_8X4,   32'h00FF_1200, 32'h0000_3400, 4'b1111);   // zeros, x/0
    run_vec(PREC_8X4,   32'h00FF_1200, 32'h0000_3400, 4'b0000);
    run_vec(PREC_32,    32'h0000_0001, 32'h0000_0000, 4'b0001);
    run_vec(PREC_32,    32'hFFFF_FFFF, 32'h0000_0001, 4'b0001);   // largest quotient
    run_vec(PREC_32,    32'h0000_0001, 32'hFFFF_FFFF, 4'b0001);   // smallest quotient

    // random vectors in every layout, back to back
    for (int i = 0; i < 20000; i++) begin
      logic [31:0] av, bv;
      av = $urandom(); bv = $urandom();
      if ($urandom_range(0, 15) == 0) av &= 32'h00FF_00FF;   // small and zero fields
      if ($urandom_range(0, 15) == 0) bv &= 32'hFF00_FF00;
      run_vec(modes[i % 5], av, bv, 4'($urandom()));
    end

    // mean relative error, 16x16 multiply and 16/8 divide (two lanes per request)
    are_mul = 0.0; are_div = 0.0; n_mul = 0; n_div = 0;
    for (int i = 0; i < 10000; i++) begin
      logic [31:0] av, bv;
      av = $urandom(); bv = $urandom();
      if (av[15:0] == 0) av[0] = 1'b1;
      if (av[31:16] == 0) av[16] = 1'b1;
      if (bv[15:0] == 0) bv[0] = 1'b1;
      if (bv[31:16] == 0) bv[16] = 1'b1;
      run_vec(PREC_16_16, av, bv, 4'b0000);
      for (int s = 0; s < 2; s++) begin
        x = av[16*s +: 16]; y = bv[16*s +: 16];
        ex = real'(x) * real'(y);
        ap = real'(result[32*s +: 32]);
        are_mul += (ex > ap ? ex - ap : ap - ex) / ex; n_mul++;
      end
      bv = bv & 32'h00FF_00FF;
      if (bv[7:0] == 0) bv[0] = 1'b1;
      if (bv[23:16] == 0) bv[16] = 1'b1;
      run_vec(PREC_16_16, av, bv, 4'b0101);
      for (int s = 0; s < 2; s++) begin
        x = av[16*s +: 16]; y = bv[16*s +: 16];
        ex = real'(x) / real'(y);
        ap = real'(result[32*s +: 32]) / 65536.0;
        are_div += (ex > ap ? ex - ap : ap - ex) / ex; n_div++;
      end
    end
    are_mul = 100.0 * are_mul / n_mul;
    are_div = 100.0 * are_div / n_div;
    $display("mean relative error: 16x16 multiply %0.3f %%, 16/8 divide %0.3f %%", are_mul, are_div);
    check(are_mul < 1.0, "16x16 multiply mean relative error below 1%");
    check(are_div < 1.0, "16/8 divide mean relative error below 1%");

    // out_valid drops with in_valid
    @(posedge clk); #1;
    check(out_valid === 1'b0, "out_valid low when idle");

    for (int m = 0; m < M_NUM; m++) begin
      $display("mechanism %s seen %0d times", mech_e'(m), seen[m]);
      check(seen[m] > 0, $sformatf("mechanism %s never happened", mech_e'(m)));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
