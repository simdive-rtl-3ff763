// tb_ann_layer: fully connected network inference with 8-bit operands, the
// multiply-heavy workload of the architecture, run through the SIMDive top
// at its default parameters.
//
// A 784-100-10 network (one hidden layer of 100 nodes, ReLU) with
// pseudo-random 8-bit signed weights and 8-bit unsigned inputs is evaluated
// twice: with exact products and with SIMDive products, four 8x8 products
// per request (PREC_8X4).  Signs are handled outside the unit in
// sign-magnitude form; products are accumulated exactly.  Hidden
// activations are requantised to 8 bits by a right shift.  The weights come
// from a fixed 32-bit LFSR so the test is repeatable; no trained network or
// data set is involved, so the figure of merit is agreement of the winning
// class between exact and approximate inference (the published accuracy
// drop of the approximate network is at most a few hundredths of a
// percent).  Every lane result is also compared with the reference model.
// Checks: the winning class agrees on at least 18 of 20 inputs.
module tb_ann_layer;
  import simdive_pkg::*;
  import tb_ref_pkg::*;

  localparam int NI = 784, NH = 100, NO = 10, NV = 20;

  logic        clk = 1'b0;
  logic        rst_n, in_valid;
  logic [31:0] a, b;
  prec_t       prec;
  logic [3:0]  div;
  logic        out_valid;
  logic [63:0] result;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  simdive dut (.clk(clk), .rst_n(rst_n), .in_valid(in_valid), .a(a), .b(b),
               .prec(prec), .div(div), .out_valid(out_valid), .result(result));

  initial begin
    repeat (5_000_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [31:0] lfsr = 32'hACE1_2345;
  function automatic int rnd(int lo, int hi);
    for (int i = 0; i < 8; i++) lfsr = {lfsr[30:0], lfsr[31] ^ lfsr[21] ^ lfsr[1] ^ lfsr[0]};
    return lo + int'(lfsr % 32'(hi - lo + 1));
  endfunction

  byte w1 [NH][NI];
  byte w2 [NO][NH];

  // dot product of unsigned activations and signed weights, n terms,
  // exact or through the unit (4 magnitudes per request)
  task automatic dot(input int n, input int act [], input int wt [], input bit approx,
                     output longint acc);
    logic [31:0] av, bv;
    int cl, m;
    longint unsigned exp;
    acc = 0;
    for (int i = 0; i < n; i += 4) begin
      av = '0; bv = '0;
      for (int j = 0; j < 4; j++)
        if (i + j < n) begin
          av[8*j +: 8] = 8'(act[i+j]);
          bv[8*j +: 8] = 8'(wt[i+j] < 0 ? -wt[i+j] : wt[i+j]);
        end
      if (!approx) begin
        for (int j = 0; j < 4; j++)
          if (i + j < n) acc += longint'(act[i+j]) * longint'(wt[i+j]);
      end else begin
        @(negedge clk);
        in_valid = 1'b1; a = av; b = bv; prec = PREC_8X4; div = 4'b0000;
        @(posedge clk); #1;
        in_valid = 1'b0;
        checks++;
        if (out_valid !== 1'b1) failures++;
        for (int j = 0; j < 4; j++) begin
          exp = ref_lane(64'(av[8*j +: 8]), 64'(bv[8*j +: 8]), 8, 1'b0, 8, cl);
          checks++;
          if (64'(result[16*j +: 16]) != exp) failures++;
          if (i + j < n) begin
            m = int'(result[16*j +: 16]);
            acc += (wt[i+j] < 0) ? -longint'(m) : longint'(m);
          end
        end
      end
    end
  endtask

  initial begin
    int x [], h [], wr [], agree;
    longint acc;
    int cls [2];
    longint best;
    build_coefs();
    rst_n = 1'b0; in_valid = 1'b0; a = '0; b = '0; prec = PREC_8X4; div = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int o = 0; o < NH; o++) for (int i = 0; i < NI; i++) w1[o][i] = byte'(rnd(-127, 127));
    for (int o = 0; o < NO; o++) for (int i = 0; i < NH; i++) w2[o][i] = byte'(rnd(-127, 127));
    x = new[NI]; h = new[NH]; wr = new[NI];
    agree = 0;
    for (int v = 0; v < NV; v++) begin
      // an "image": a few bright blobs on a dark background
      for (int i = 0; i < NI; i++) x[i] = (rnd(0, 9) < 2) ? rnd(128, 255) : rnd(0, 20);
      for (int md = 0; md < 2; md++) begin
        for (int o = 0; o < NH; o++) begin
          wr = new[NI];
          for (int i = 0; i < NI; i++) wr[i] = int'(w1[o][i]);
          dot(NI, x, wr, md[0], acc);
          acc = acc >>> 12;
          h[o] = (acc < 0) ? 0 : (acc > 255) ? 255 : int'(acc);
        end
        cls[md] = 0; best = -64'sd1 <<< 62;
        for (int o = 0; o < NO; o++) begin
          wr = new[NH];
          for (int i = 0; i < NH; i++) wr[i] = int'(w2[o][i]);
          dot(NH, h, wr, md[0], acc);
          if (acc > best) begin best = acc; cls[md] = o; end
        end
      end
      if (cls[0] == cls[1]) agree++;
    end
    $display("winning class agrees on %0d of %0d inputs", agree, NV);
    checks++;
    if (agree < NV - 2) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
