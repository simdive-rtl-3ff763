// tb_image_workloads: the two image-processing workloads run through the
// SIMDive top at its default parameters, on generated 64x64 8-bit images.
//
// Multiply blending: out = (p1 * p2) >> 8, four 8x8 products per request
// (PREC_8X4).  Reported as PSNR against the same blend with exact products.
//
// Gaussian noise removal: a noise-free image plus pseudo-random noise is
// filtered with the 3x3 kernel [1 3 1; 3 9 3; 1 3 1] / 25, in two modes:
//   divide only - weighted sums exact, two 16-bit divisions per request
//                 (PREC_16_16);
//   hybrid      - every request is PREC_16_8_8: two 8x8 kernel products in
//                 the lower half and, in the upper 16-bit lane, the division
//                 of the previous pixel's sum, so multiply and divide lanes
//                 of different widths run in the same request.
// PSNR is taken against the noise-free image, as for the exact filter.
// Every lane result is also compared with the reference model.
// Checks: blending PSNR above 35 dB; each approximate filter within 1.5 dB
// of the exact filter's PSNR.
module tb_image_workloads;
  import simdive_pkg::*;
  import tb_ref_pkg::*;

  localparam int N = 64;

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
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // one request, returns the registered result; checks each lane against the model
  task automatic issue(prec_t p, logic [31:0] av, logic [31:0] bv, logic [3:0] dv,
                       output logic [63:0] r);
    int w, cl;
    longint unsigned exp;
    @(negedge clk);
    in_valid = 1'b1; a = av; b = bv; prec = p; div = dv;
    @(posedge clk); #1;
    in_valid = 1'b0;
    r = result;
    checks++;
    if (out_valid !== 1'b1) failures++;
    for (int s = 0; s < 4; s++) begin
      w = int'(lane_width(p, s));
      if (w == 0) continue;
      exp = ref_lane((64'(av) >> (8*s)) & ((64'd1 << w) - 1),
                     (64'(bv) >> (8*s)) & ((64'd1 << w) - 1), w, dv[s], 8, cl);
      checks++;
      if (((r >> (16*s)) & ((w == 32) ? '1 : ((64'd1 << (2*w)) - 1))) != exp) begin
        failures++;
        if (failures < 10) $display("FAIL lane s=%0d a=%h b=%h", s, av, bv);
      end
    end
  endtask

  function automatic real psnr(real mse);
    return (mse == 0.0) ? 99.0 : 10.0 * $log10(255.0 * 255.0 / mse);
  endfunction

  int img1  [N][N], img2 [N][N], clean [N][N], noisy [N][N];
  int kern  [3][3] = '{'{1, 3, 1}, '{3, 9, 3}, '{1, 3, 1}};

  function automatic int px(int y, int x);   // clamped border
    int yy, xx;
    yy = (y < 0) ? 0 : (y >= N) ? N - 1 : y;
    xx = (x < 0) ? 0 : (x >= N) ? N - 1 : x;
    return noisy[yy][xx];
  endfunction

  initial begin
    logic [63:0] r;
    real mse_blend, mse_exact, mse_div, mse_hyb, p_blend, p_exact, p_div, p_hyb;
    int  ex, ap, sum, n;
    int  prods [9];
    int  sums [N*N], exact_out [N*N], div_out [N*N], hyb_out [N*N];
    int  pend_idx;

    build_coefs();
    rst_n = 1'b0; in_valid = 1'b0; a = '0; b = '0; prec = PREC_8X4; div = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;

    // generated images: smooth gradients with ripples, and noise
    for (int y = 0; y < N; y++)
      for (int x = 0; x < N; x++) begin
        img1[y][x]  = (2*x + y + 16 * ((x / 8 + y / 8) % 2)) & 8'hFF;
        img2[y][x]  = (255 - 3*y + x) & 8'hFF;
        clean[y][x] = 40 + (x * y) / 24 + 30 * (((x / 16) + (y / 16)) % 2);
        noisy[y][x] = clean[y][x] + $urandom_range(0, 40) - 20;
        if (noisy[y][x] < 0) noisy[y][x] = 0;
        if (noisy[y][x] > 255) noisy[y][x] = 255;
      end

    // ---- multiply blending --------------------------------------------------
    mse_blend = 0.0;
    for (int i = 0; i < N*N; i += 4) begin
      logic [31:0] av, bv;
      for (int j = 0; j < 4; j++) begin
        av[8*j +: 8] = 8'(img1[(i+j)/N][(i+j)%N]);
        bv[8*j +: 8] = 8'(img2[(i+j)/N][(i+j)%N]);
      end
      issue(PREC_8X4, av, bv, 4'b0000, r);
      for (int j = 0; j < 4; j++) begin
        ex = (int'(av[8*j +: 8]) * int'(bv[8*j +: 8])) >> 8;
        ap = int'(r[16*j +: 16]) >> 8;
        mse_blend += real'((ex - ap) * (ex - ap));
      end
    end
    p_blend = psnr(mse_blend / (N*N));

    // ---- Gaussian filter: exact sums --------------------------------------------
    for (int y = 0; y < N; y++)
      for (int x = 0; x < N; x++) begin
        sum = 0;
        for (int dy = 0; dy < 3; dy++)
          for (int dx = 0; dx < 3; dx++) sum += kern[dy][dx] * px(y + dy - 1, x + dx - 1);
        sums[y*N + x]      = sum;
        exact_out[y*N + x] = sum / 25;
      end

    // divide only: two 16-bit quotients per request, integer part kept
    for (int i = 0; i < N*N; i += 2) begin
      issue(PREC_16_16, {16'(sums[i+1]), 16'(sums[i])}, {16'd25, 16'd25}, 4'b0101, r);
      div_out[i]   = int'(r[31:16]);
      div_out[i+1] = int'(r[63:48]);
    end

    // hybrid: PREC_16_8_8 requests, two products + one division each
    pend_idx = -1;
    for (int i = 0; i <= N*N; i++) begin
      int y, x, s2;
      y = i / N; x = i % N;
      s2 = 0;
      for (int q = 0; q < 9; q += 2) begin
        logic [31:0] av, bv;
        av = '0; bv = 32'h0001_0101;
        if (i < N*N) begin
          av[7:0] = 8'(px(y + q/3 - 1, x + q%3 - 1));
          bv[7:0] = 8'(kern[q/3][q%3]);
          if (q + 1 < 9) begin
            av[15:8] = 8'(px(y + (q+1)/3 - 1, x + (q+1)%3 - 1));
            bv[15:8] = 8'(kern[(q+1)/3][(q+1)%3]);
          end
        end
        if (q == 0 && pend_idx >= 0) begin
          av[31:16] = 16'(hyb_out[pend_idx]);
          bv[31:16] = 16'd25;
        end
        issue(PREC_16_8_8, av, bv, 4'b0100, r);
        if (q == 0 && pend_idx >= 0) hyb_out[pend_idx] = int'(r[63:48]);
        if (i < N*N) begin
          s2 += int'(r[15:0]);
          if (q + 1 < 9) s2 += int'(r[31:16]);
        end
        if (i == N*N) break;
      end
      if (i < N*N) begin
        hyb_out[i] = s2;   // approximate weighted sum, divided in the next pixel's first request
        pend_idx = i;
      end
    end

    mse_exact = 0.0; mse_div = 0.0; mse_hyb = 0.0;
    for (int i = 0; i < N*N; i++) begin
      n = clean[i/N][i%N];
      mse_exact += real'((exact_out[i] - n) * (exact_out[i] - n));
      mse_div   += real'((div_out[i]   - n) * (div_out[i]   - n));
      mse_hyb   += real'((hyb_out[i]   - n) * (hyb_out[i]   - n));
    end
    p_exact = psnr(mse_exact / (N*N));
    p_div   = psnr(mse_div / (N*N));
    p_hyb   = psnr(mse_hyb / (N*N));
    $display("multiply blending: PSNR %0.1f dB against exact products", p_blend);
    $display("Gaussian filter PSNR against the noise-free image: noisy %0.1f dB, exact %0.1f dB, divide-only %0.1f dB, hybrid %0.1f dB",
             p_noise(), p_exact, p_div, p_hyb);
    checks += 3;
    if (!(p_blend > 35.0)) failures++;
    if (!(p_div > p_exact - 1.5)) failures++;
    if (!(p_hyb > p_exact - 1.5)) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real p_noise();
    real m;
    m = 0.0;
    for (int i = 0; i < N*N; i++)
      m += real'((noisy[i/N][i%N] - clean[i/N][i%N]) * (noisy[i/N][i%N] - clean[i/N][i%N]));
    return psnr(m / (N*N));
  endfunction
endmodule
