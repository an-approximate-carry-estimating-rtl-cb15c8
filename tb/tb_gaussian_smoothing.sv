// Gaussian smoothing of a 256x256 8-bit grey image with the approximate
// adder doing the additions of the convolution.
//
// The image is generated here: a diagonal gradient, a checkerboard of 32x32
// tiles and uniform noise of +-24 grey levels, clipped to 0..255. The filter
// is the 5x5 binomial approximation of a Gaussian, the outer product of
// (1 4 6 4 1) with itself, whose weights sum to 256.
// For every output pixel the 25 products weight * pixel are accumulated one
// by one through a 32-bit adder with 8-bit blocks (with and without
// rectification); the multiplications and the final division by 256 are
// exact. Borders are handled by clamping coordinates into the image.
// Every accumulation step is checked against an integer model of the adder.
// The run reports the PSNR of each approximate output image against the
// exactly computed one, and checks that rectification does not lower the
// PSNR and that both adders made at least one approximation.
module tb_gaussian_smoothing;
  localparam int unsigned W = 256;
  localparam int unsigned H = 256;
  localparam int unsigned N = 32;
  localparam int unsigned K = 8;

  logic         clk = 1'b0;
  int           checks = 0, failures = 0, cycles = 0;
  logic [N-1:0] acc_p, acc_c, prod;
  logic [N-1:0] sum_p, sum_c;
  logic         co_p, co_c;

  cesa_perl_adder #(.N(N), .K(K), .PERL_EN(1'b1)) u_perl (.a(acc_p), .b(prod), .sum(sum_p), .cout(co_p));
  cesa_perl_adder #(.N(N), .K(K), .PERL_EN(1'b0)) u_cesa (.a(acc_c), .b(prod), .sum(sum_c), .cout(co_c));

  byte unsigned img[H][W];
  int           kern[5][5] = '{'{1,  4,  6,  4, 1},
                               '{4, 16, 24, 16, 4},
                               '{6, 24, 36, 24, 6},
                               '{4, 16, 24, 16, 4},
                               '{1,  4,  6,  4, 1}};

  always #5 clk = ~clk;

  initial begin : watchdog
    while (cycles < 4 * W * H) begin
      @(posedge clk);
      cycles++;
    end
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [N-1:0] model(logic [N-1:0] p, logic [N-1:0] q, int wbits);
    logic [N-1:0] r;
    logic [K:0]   part;
    logic [4:0]   top;
    logic         c;
    c = 1'b0;
    for (int i = 0; i < N / K; i++) begin
      part = {1'b0, p[i*K +: K]} + {1'b0, q[i*K +: K]} + {{K{1'b0}}, c};
      r[i*K +: K] = part[K-1:0];
      top = (wbits == 4) ? {1'b0, p[i*K+K-4 +: 4]} + {1'b0, q[i*K+K-4 +: 4]}
                         : {3'b0, p[i*K+K-2 +: 2]} + {3'b0, q[i*K+K-2 +: 2]};
      c = (wbits == 4) ? top[4] : top[2];
    end
    return r;
  endfunction

  function automatic real psnr(real se, int npix);
    real mse;
    mse = se / real'(npix);
    if (mse == 0.0) return 99.0;
    return 10.0 * $log10(255.0 * 255.0 / mse);
  endfunction

  initial begin : stim
    int     v, exact, yy, xx;
    int     op, oc, oe;
    real    se_p = 0.0, se_c = 0.0;
    int     npix_err_p = 0, npix_err_c = 0, step_fail = 0;
    longint steps = 0;

    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++) begin
        v = (x + y) / 2 + ((((x / 32) + (y / 32)) % 2) * 64) + $urandom_range(48, 0) - 24;
        img[y][x] = byte'((v < 0) ? 0 : (v > 255) ? 255 : v);
      end

    for (int y = 0; y < H; y++) begin
      for (int x = 0; x < W; x++) begin
        acc_p = '0;
        acc_c = '0;
        exact = 0;
        for (int dy = -2; dy <= 2; dy++)
          for (int dx = -2; dx <= 2; dx++) begin
            yy = (y + dy < 0) ? 0 : (y + dy >= H) ? H - 1 : y + dy;
            xx = (x + dx < 0) ? 0 : (x + dx >= W) ? W - 1 : x + dx;
            prod = N'(kern[dy + 2][dx + 2] * int'(img[yy][xx]));
            #1;
            steps++;
            if (sum_p !== model(acc_p, prod, 4) || sum_c !== model(acc_c, prod, 2)) begin
              step_fail++;
              if (step_fail < 10)
                $display("FAIL step acc=%h/%h prod=%h got %h/%h", acc_p, acc_c, prod, sum_p, sum_c);
            end
            exact += int'(prod);
            acc_p = sum_p;
            acc_c = sum_c;
          end
        oe = exact / 256;
        op = int'(acc_p) / 256;
        oc = int'(acc_c) / 256;
        if (op > 255) op = 255;
        if (oc > 255) oc = 255;
        se_p += real'((op - oe) * (op - oe));
        se_c += real'((oc - oe) * (oc - oe));
        if (op != oe) npix_err_p++;
        if (oc != oe) npix_err_c++;
      end
      @(negedge clk);
    end

    checks++;
    if (step_fail != 0) failures++;
    $display("accumulation steps: %0d, model mismatches: %0d", steps, step_fail);
    $display("with rectification:    PSNR = %0.2f dB, pixels off = %0d of %0d",
             psnr(se_p, W * H), npix_err_p, W * H);
    $display("without rectification: PSNR = %0.2f dB, pixels off = %0d of %0d",
             psnr(se_c, W * H), npix_err_c, W * H);
    checks++;
    if (se_p > se_c) begin
      failures++;
      $display("FAIL rectification lowered the PSNR");
    end
    checks++;
    if (npix_err_p == 0 || npix_err_c == 0) begin
      failures++;
      $display("FAIL an adder never approximated");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
