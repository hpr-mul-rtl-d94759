// tb_hpr_image_apps: image-processing workloads on the HPR multiplier at its
// default size (N = 8, K = 4), with input bit-flip noise Pf = 0.01 and 0.05.
//
// Images are generated here (IMG x IMG, 8-bit): a structured pattern X1 and
// a pseudo-random texture X2 from a fixed seed. Every multiplication of each
// kernel goes through the design under test:
//   multiplication:  Y = X1 * X2 / 255
//   sharpening:      Y = 2X - (1/273) * sum X(i+m, j+n) * Ms(m, n)
//                    Ms = [1 4 7 4 1; 4 16 26 16 4; 7 26 41 26 7; 4 16 26 16 4; 1 4 7 4 1]
//   smoothing:       Y = (1/60) * sum X(i+m, j+n) * Mt(m, n)
//                    Mt = [1 1 1 1 1; 1 4 4 4 1; 1 4 12 4 1; 1 4 4 4 1; 1 1 1 1 1]
// with the window clamped at the image edges and results clamped to 0..255.
// The image quality against the error-free output is reported as the mean
// structural similarity (SSIM over 8x8 tiles, usual constants
// C1 = (0.01*255)^2, C2 = (0.03*255)^2) for the HPR multiplier, for a
// typical TMR multiplier (modelled here only as a reference) and for one
// unprotected multiplier with the same noise.
// Checks: noise-free, every product is exact; with noise, every product
// matches the testbench's model of the scheme; and the HPR image must be of
// higher MSSIM than the unprotected multiplier's.
module tb_hpr_image_apps;
  localparam int N   = 8;
  localparam int K   = 4;
  localparam int H   = N - K;
  localparam int RW  = 2 * H;
  localparam int IMG = 64;

  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic [N-1:0]      a, b, fa, fb;
  logic [1:0][H-1:0] ra, rb;
  logic [2*N-1:0]    p;

  hpr_mul dut (.a(a), .b(b), .fp_flip_a(fa), .fp_flip_b(fb),
               .rp_flip_a(ra), .rp_flip_b(rb), .p(p));

  int x1 [IMG][IMG];
  int x2 [IMG][IMG];
  int y_ref [IMG][IMG], y_hpr [IMG][IMG], y_tmr [IMG][IMG], y_one [IMG][IMG];
  int ms [5][5] = '{'{1,4,7,4,1}, '{4,16,26,16,4}, '{7,26,41,26,7}, '{4,16,26,16,4}, '{1,4,7,4,1}};
  int mt [5][5] = '{'{1,1,1,1,1}, '{1,4,4,4,1}, '{1,4,12,4,1}, '{1,4,4,4,1}, '{1,1,1,1,1}};
  real pf;

  function automatic logic [N-1:0] noise(input int width);
    logic [N-1:0] m;
    m = '0;
    for (int i = 0; i < width; i++) m[i] = (real'($urandom % 1000000) / 1000000.0) < pf;
    return m;
  endfunction

  // One multiplication through every scheme. e: exact, h: HPR (design),
  // t: typical TMR reference, s: single unprotected multiplier.
  task automatic mul(input int x, input int y, output int e, output int h, output int t, output int s);
    logic [N-1:0] ta1, tb1, ta2, tb2;
    int fp_prod, fp_hi, req, r0, r1, v, m, t0, t1, t2;
    a = N'(x); b = N'(y);
    fa = noise(N); fb = noise(N);
    ra[0] = H'(noise(H)); rb[0] = H'(noise(H));
    ra[1] = H'(noise(H)); rb[1] = H'(noise(H));
    ta1 = noise(N); tb1 = noise(N); ta2 = noise(N); tb2 = noise(N);
    #1;
    e = x * y;
    h = int'(p);
    // Model of the HPR scheme.
    fp_prod = int'(a ^ fa) * int'(b ^ fb);
    fp_hi   = fp_prod >> (2 * K);
    req     = (fp_hi - int'((a ^ fa) >> K) * int'((b ^ fb) >> K)) & ((1 << RW) - 1);
    r0      = (int'((a >> K) ^ ra[0]) * int'((b >> K) ^ rb[0]) + req) & ((1 << RW) - 1);
    r1      = (int'((a >> K) ^ ra[1]) * int'((b >> K) ^ rb[1]) + req) & ((1 << RW) - 1);
    v       = (fp_hi & r0) | (fp_hi & r1) | (r0 & r1);
    m       = (v << (2 * K)) | (fp_prod & ((1 << (2 * K)) - 1));
    checks++;
    if (h != m || (pf == 0.0 && h != e)) begin
      failures++;
      if (failures <= 10) $display("FAIL %0d*%0d: got %0d model %0d exact %0d", x, y, h, m, e);
    end
    // Typical TMR reference and a single multiplier.
    t0 = fp_prod;
    t1 = int'(a ^ ta1) * int'(b ^ tb1);
    t2 = int'(a ^ ta2) * int'(b ^ tb2);
    t  = (t0 & t1) | (t0 & t2) | (t1 & t2);
    s  = t0;
  endtask

  function automatic int clamp(input int v, input int lo, input int hi);
    return (v < lo) ? lo : (v > hi) ? hi : v;
  endfunction

  function automatic real mssim(ref int u [IMG][IMG], ref int w [IMG][IMG]);
    real c1, c2, acc;
    int tiles;
    c1 = (0.01 * 255.0) ** 2;
    c2 = (0.03 * 255.0) ** 2;
    acc = 0.0; tiles = 0;
    for (int ti = 0; ti < IMG; ti += 8)
      for (int tj = 0; tj < IMG; tj += 8) begin
        real mu, mw, vu, vw, cv;
        mu = 0; mw = 0; vu = 0; vw = 0; cv = 0;
        for (int i = ti; i < ti + 8; i++)
          for (int j = tj; j < tj + 8; j++) begin mu += u[i][j]; mw += w[i][j]; end
        mu /= 64.0; mw /= 64.0;
        for (int i = ti; i < ti + 8; i++)
          for (int j = tj; j < tj + 8; j++) begin
            vu += (u[i][j] - mu) ** 2;
            vw += (w[i][j] - mw) ** 2;
            cv += (u[i][j] - mu) * (w[i][j] - mw);
          end
        vu /= 63.0; vw /= 63.0; cv /= 63.0;
        acc += ((2*mu*mw + c1) * (2*cv + c2)) / ((mu*mu + mw*mw + c1) * (vu + vw + c2));
        tiles++;
      end
    return acc / tiles;
  endfunction

  // app 0: multiplication, 1: sharpening, 2: smoothing.
  task automatic run_app(input int app);
    for (int i = 0; i < IMG; i++)
      for (int j = 0; j < IMG; j++) begin
        int e, h, t, s;
        if (app == 0) begin
          mul(x1[i][j], x2[i][j], e, h, t, s);
          y_ref[i][j] = e / 255; y_hpr[i][j] = clamp(h / 255, 0, 255);
          y_tmr[i][j] = clamp(t / 255, 0, 255); y_one[i][j] = clamp(s / 255, 0, 255);
        end else begin
          int se, sh, st, ss;
          se = 0; sh = 0; st = 0; ss = 0;
          for (int m = -2; m <= 2; m++)
            for (int n = -2; n <= 2; n++) begin
              int px, c;
              px = x1[clamp(i + m, 0, IMG - 1)][clamp(j + n, 0, IMG - 1)];
              c  = (app == 1) ? ms[m + 2][n + 2] : mt[m + 2][n + 2];
              mul(px, c, e, h, t, s);
              se += e; sh += h; st += t; ss += s;
            end
          if (app == 1) begin
            y_ref[i][j] = clamp(2 * x1[i][j] - se / 273, 0, 255);
            y_hpr[i][j] = clamp(2 * x1[i][j] - sh / 273, 0, 255);
            y_tmr[i][j] = clamp(2 * x1[i][j] - st / 273, 0, 255);
            y_one[i][j] = clamp(2 * x1[i][j] - ss / 273, 0, 255);
          end else begin
            y_ref[i][j] = clamp(se / 60, 0, 255);
            y_hpr[i][j] = clamp(sh / 60, 0, 255);
            y_tmr[i][j] = clamp(st / 60, 0, 255);
            y_one[i][j] = clamp(ss / 60, 0, 255);
          end
        end
        @(posedge clk);
      end
  endtask

  initial begin
    string names[3] = '{"multiplication", "sharpening", "smoothing"};
    real pfs[3] = '{0.0, 0.01, 0.05};
    void'($urandom(12345));
    for (int i = 0; i < IMG; i++)
      for (int j = 0; j < IMG; j++) begin
        x1[i][j] = (128 + 8 * i - 5 * j + (i * j) % 41) & 255;
        x2[i][j] = 32 + ($urandom % 200);
      end
    for (int app = 0; app < 3; app++)
      foreach (pfs[k]) begin
        real q_hpr, q_tmr, q_one;
        pf = pfs[k];
        run_app(app);
        q_hpr = mssim(y_ref, y_hpr);
        q_tmr = mssim(y_ref, y_tmr);
        q_one = mssim(y_ref, y_one);
        $display("%-14s Pf=%0.2f  MSSIM HPR=%0.3f  TMR=%0.3f  single=%0.3f",
                 names[app], pf, q_hpr, q_tmr, q_one);
        if (pf > 0.0) begin
          checks++;
          if (!(q_hpr > q_one)) begin
            failures++;
            $display("FAIL %s Pf=%0.2f: HPR image not better than unprotected", names[app], pf);
          end
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
