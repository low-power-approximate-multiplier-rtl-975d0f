// tb_conv_workload: the multiplier inside a convolution layer.
//
// Runs the arithmetic of one single-filter convolution layer of the size
// used for handwritten-digit recognition: a 28x28 8-bit image, a 3x3
// kernel of 8-bit unsigned weights, zero padding ("same" output, 28x28x1),
// followed by 2x2 max pooling to 14x14. Every multiplication goes through
// the approximate multiplier (one instance, used 9 times per output pixel);
// the accumulation, padding and pooling are done here in the testbench,
// since the layer itself is not part of the RTL. The image is generated:
// a bright ring on a dark background plus pseudo-random noise.
//
// Checks: every product equals the reference model bit for bit and never
// exceeds the exact product; each approximate output is at most the exact
// one; the mean relative error of the nonzero outputs is below 0.5 %; the
// approximate feature map, scaled to 8 bits, has a PSNR of at least 40 dB
// against the exact one; the pooled maps select the same position in at
// least 95 % of the windows. The thresholds are sanity bounds chosen for
// this test, not published figures. It also requires that some products
// were wrong, so that the approximation is actually exercised.
module tb_conv_workload;
  import mult_pkg::*;
  import mult_ref_pkg::*;

  localparam int H = 28;
  localparam int W = 28;
  localparam int K = 3;
  localparam int unsigned KW [K*K] = '{ 37,  90,  37,
                                        90, 201,  90,
                                        37,  90,  37};

  operand_t a, b;
  product_t p;
  int checks = 0, failures = 0;

  int unsigned img   [H][W];
  int unsigned out_x [H][W];     // exact accumulation
  int unsigned out_a [H][W];     // accumulation of approximate products
  int unsigned n_prod = 0, n_prod_err = 0, n_pool_same = 0, ksum = 0;
  real sum_rel = 0.0, sse = 0.0, psnr, mre, d;
  int unsigned n_rel = 0;

  approx_mult8x8 dut (.a(a), .b(b), .p(p));

  initial begin
    #10_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int r2, px, py, ix, iy, kk;
    int unsigned noise;
    // ---- generate the image
    for (int y = 0; y < H; y++) begin
      for (int x = 0; x < W; x++) begin
        r2 = (y - 14) * (y - 14) + (x - 14) * (x - 14);
        noise = $urandom_range(0, 40);
        img[y][x] = (r2 >= 36 && r2 <= 100) ? 200 + (noise % 56) : noise;
      end
    end
    foreach (KW[k]) ksum += KW[k];

    // ---- convolution
    for (int y = 0; y < H; y++) begin
      for (int x = 0; x < W; x++) begin
        out_x[y][x] = 0;
        out_a[y][x] = 0;
        for (int ky = 0; ky < K; ky++) begin
          for (int kx = 0; kx < K; kx++) begin
            iy = y + ky - 1;
            ix = x + kx - 1;
            if (iy < 0 || iy >= H || ix < 0 || ix >= W) continue;
            kk = ky * K + kx;
            a = 8'(img[iy][ix]);
            b = 8'(KW[kk]);
            #1;
            n_prod++;
            checks++;
            if (int'(p) != ref_mult(img[iy][ix], KW[kk]) || int'(p) > img[iy][ix] * KW[kk]) begin
              failures++;
              if (failures < 10) $display("FAIL %0d*%0d = %0d", a, b, p);
            end
            if (int'(p) != img[iy][ix] * KW[kk]) n_prod_err++;
            out_x[y][x] += img[iy][ix] * KW[kk];
            out_a[y][x] += int'(p);
          end
        end
        checks++;
        if (out_a[y][x] > out_x[y][x]) failures++;
        if (out_x[y][x] != 0) begin
          sum_rel += real'(out_x[y][x] - out_a[y][x]) / real'(out_x[y][x]);
          n_rel++;
        end
        d = real'(out_x[y][x] - out_a[y][x]) / real'(ksum);   // in 8-bit pixel units
        sse += d * d;
      end
    end

    // ---- 2x2 max pooling: does the approximate map pick the same pixel?
    for (int y = 0; y < H; y += 2) begin
      for (int x = 0; x < W; x += 2) begin
        int unsigned bx, ba;
        int sx, sa;
        bx = 0; ba = 0; sx = 0; sa = 0;
        for (int k = 0; k < 4; k++) begin
          py = y + k / 2;
          px = x + k % 2;
          if (k == 0 || out_x[py][px] > bx) begin bx = out_x[py][px]; sx = k; end
          if (k == 0 || out_a[py][px] > ba) begin ba = out_a[py][px]; sa = k; end
        end
        if (sx == sa) n_pool_same++;
      end
    end

    mre  = 100.0 * sum_rel / n_rel;
    psnr = (sse == 0.0) ? 99.0 : 10.0 * $log10(255.0 * 255.0 / (sse / (H * W)));
    $display("products %0d, wrong %0d; output mean relative error %0.4f %%; PSNR %0.2f dB; pooling agreement %0d/%0d",
             n_prod, n_prod_err, mre, psnr, n_pool_same, (H / 2) * (W / 2));
    checks++; if (!(mre < 0.5)) failures++;
    checks++; if (!(psnr >= 40.0)) failures++;
    checks++; if (n_pool_same * 100 < 95 * (H / 2) * (W / 2)) failures++;
    checks++; if (n_prod_err == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule : tb_conv_workload
