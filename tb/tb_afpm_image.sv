// tb_afpm_image: image-processing workloads on the approximate multipliers.
//
// Two kernels in FP32 with pixels normalised to [0,1]:
//   blending:        out = alpha*I1 + (1-alpha)*I2, alpha = 0.6
//   edge detection:  Sobel gradients gx, gy (3x3 kernels with coefficients
//                    0, +-1, +-2) and magnitude sqrt(gx*gx + gy*gy)
// Every multiplication goes through the multiplier under test (AC4-4, AC5-5,
// AC6-6, ACL5) and, for the reference, through the exact IEEE 754 multiplier;
// additions and the square root are done in double precision and rounded to
// FP32 identically for both. PSNR (peak 255) of each approximate output
// against the exact one is printed. Three synthetic 48x48 images (smooth
// shading, random texture, blocks with sharp edges) stand in for photographs.
// Checks: for every test PSNR grows with N (AC4-4 < AC5-5 < AC6-6), ACL5 is
// below AC4-4, and all segmented configurations stay above 40 dB. Blending
// PSNR must fall within 3 dB of the range published for the same
// configurations on photographs (AC4-4 59.35-62.59 dB, AC5-5 72.51-75.48 dB,
// AC6-6 84.50-86.44 dB), and edge detection must exceed 80 dB for AC5-5 and
// AC6-6.
module tb_afpm_image;
  import fp_ref_pkg::*;

  localparam int S = 48;
  localparam int NCFG = 4;   // AC4-4, AC5-5, AC6-6, ACL5

  int checks = 0, failures = 0;

  logic [31:0] x, y, p_ex;
  logic [31:0] p_ap [NCFG];

  fp_mul_exact #(.EXP_W(8), .MAN_W(23)) u_ex (.a(x), .b(y), .p(p_ex));
  afpm #(.N(4)) u_ac4 (.x(x), .y(y), .p(p_ap[0]));
  afpm #(.N(5)) u_ac5 (.x(x), .y(y), .p(p_ap[1]));
  afpm #(.N(6)) u_ac6 (.x(x), .y(y), .p(p_ap[2]));
  afpm #(.N(5), .LOW_PREC(1'b1)) u_acl5 (.x(x), .y(y), .p(p_ap[3]));

  real img [3][S][S];
  // output of each configuration: index 0..NCFG-1 approximate, NCFG exact
  real out [NCFG+1][S][S];
  real psnr_tab [6][NCFG];
  // published blending PSNR range per segmented configuration, dB
  real blend_lo [3] = '{59.35, 72.51, 84.50};
  real blend_hi [3] = '{62.59, 75.48, 86.44};

  initial begin
    #100ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Multiply two reals through every multiplier; result k = NCFG is exact.
  task automatic mul(input real a, input real b, output real r [NCFG+1]);
    x = to_fp32(a);
    y = to_fp32(b);
    #1;
    for (int k = 0; k < NCFG; k++) r[k] = from_fp32(p_ap[k]);
    r[NCFG] = from_fp32(p_ex);
  endtask

  function automatic real rnd32(input real v);
    return from_fp32(to_fp32(v));
  endfunction

  function automatic real psnr(input int k);
    real mse, d;
    mse = 0.0;
    for (int i = 0; i < S; i++)
      for (int j = 0; j < S; j++) begin
        d = 255.0 * (out[k][i][j] - out[NCFG][i][j]);
        mse += d * d;
      end
    mse = mse / real'(S * S);
    if (mse == 0.0) return 200.0;
    return 10.0 * $log10(255.0 * 255.0 / mse);
  endfunction

  task automatic blend(input int i1, input int i2);
    real r1 [NCFG+1], r2 [NCFG+1];
    for (int i = 0; i < S; i++)
      for (int j = 0; j < S; j++) begin
        mul(0.6, img[i1][i][j], r1);
        mul(0.4, img[i2][i][j], r2);
        for (int k = 0; k <= NCFG; k++) out[k][i][j] = rnd32(r1[k] + r2[k]);
      end
  endtask

  task automatic sobel(input int im);
    int kx [3][3] = '{'{-1, 0, 1}, '{-2, 0, 2}, '{-1, 0, 1}};
    int ky [3][3] = '{'{-1, -2, -1}, '{0, 0, 0}, '{1, 2, 1}};
    real gx [NCFG+1], gy [NCFG+1], t [NCFG+1], sx [NCFG+1], sy [NCFG+1];
    for (int i = 0; i < S; i++)
      for (int j = 0; j < S; j++) begin
        for (int k = 0; k <= NCFG; k++) begin gx[k] = 0.0; gy[k] = 0.0; end
        for (int u = -1; u <= 1; u++)
          for (int v = -1; v <= 1; v++) begin
            real p;
            int ii, jj;
            ii = (i + u < 0) ? 0 : ((i + u >= S) ? S - 1 : i + u);
            jj = (j + v < 0) ? 0 : ((j + v >= S) ? S - 1 : j + v);
            p = img[im][ii][jj];
            if (kx[u+1][v+1] != 0) begin
              mul(real'(kx[u+1][v+1]), p, t);
              for (int k = 0; k <= NCFG; k++) gx[k] = rnd32(gx[k] + t[k]);
            end
            if (ky[u+1][v+1] != 0) begin
              mul(real'(ky[u+1][v+1]), p, t);
              for (int k = 0; k <= NCFG; k++) gy[k] = rnd32(gy[k] + t[k]);
            end
          end
        for (int k = 0; k <= NCFG; k++) begin
          real a [NCFG+1], b [NCFG+1];
          mul(gx[k], gx[k], a);
          mul(gy[k], gy[k], b);
          sx[k] = a[k];
          sy[k] = b[k];
        end
        for (int k = 0; k <= NCFG; k++) out[k][i][j] = rnd32($sqrt(sx[k] + sy[k]) / 4.0);
      end
  endtask

  initial begin
    string names [6] = '{"blend 0+1", "blend 2+0", "blend 1+2", "edge 0", "edge 1", "edge 2"};
    // synthetic images, pixel values p/255
    for (int i = 0; i < S; i++)
      for (int j = 0; j < S; j++) begin
        int v;
        v = 128 + int'(90.0 * $sin(real'(i) / 5.0) * $cos(real'(j) / 7.0));
        img[0][i][j] = real'(v) / 255.0;
        img[1][i][j] = real'($urandom_range(1, 255)) / 255.0;
        v = (((i / 12) + (j / 12)) % 2 == 1) ? 200 : 40;
        img[2][i][j] = real'(v + $urandom_range(0, 15)) / 255.0;
      end
    blend(0, 1); for (int k = 0; k < NCFG; k++) psnr_tab[0][k] = psnr(k);
    blend(2, 0); for (int k = 0; k < NCFG; k++) psnr_tab[1][k] = psnr(k);
    blend(1, 2); for (int k = 0; k < NCFG; k++) psnr_tab[2][k] = psnr(k);
    sobel(0);    for (int k = 0; k < NCFG; k++) psnr_tab[3][k] = psnr(k);
    sobel(1);    for (int k = 0; k < NCFG; k++) psnr_tab[4][k] = psnr(k);
    sobel(2);    for (int k = 0; k < NCFG; k++) psnr_tab[5][k] = psnr(k);
    $display("PSNR (dB)        AC4-4   AC5-5   AC6-6   ACL5");
    for (int t = 0; t < 6; t++) begin
      $display("%-14s  %6.2f  %6.2f  %6.2f  %6.2f", names[t],
               psnr_tab[t][0], psnr_tab[t][1], psnr_tab[t][2], psnr_tab[t][3]);
      checks += 3;
      if (!(psnr_tab[t][0] < psnr_tab[t][1] && psnr_tab[t][1] < psnr_tab[t][2])) begin
        failures++;
        $display("FAIL %s: PSNR does not grow with N", names[t]);
      end
      if (!(psnr_tab[t][3] < psnr_tab[t][0])) begin
        failures++;
        $display("FAIL %s: ACL5 not below AC4-4", names[t]);
      end
      if (psnr_tab[t][0] < 40.0) begin
        failures++;
        $display("FAIL %s: AC4-4 PSNR below 40 dB", names[t]);
      end
      if (t < 3) begin
        for (int k = 0; k < 3; k++) begin
          checks++;
          if (psnr_tab[t][k] < blend_lo[k] - 3.0 || psnr_tab[t][k] > blend_hi[k] + 3.0) begin
            failures++;
            $display("FAIL %s: configuration %0d PSNR outside the published range", names[t], k);
          end
        end
      end else begin
        checks++;
        if (psnr_tab[t][1] < 80.0 || psnr_tab[t][2] < 80.0) begin
          failures++;
          $display("FAIL %s: edge-detection PSNR not above 80 dB", names[t]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
