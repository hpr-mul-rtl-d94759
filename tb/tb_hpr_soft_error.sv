// tb_hpr_soft_error: soft-error tolerance sweep of the HPR multiplier with
// input noise, for N = 8, K = 2, 4, 6 and bit-flip probabilities Pf = 0.001,
// 0.005, 0.01 and 0.02.
//
// Noise model: every input bit of every multiplier copy is flipped
// independently with probability Pf (the FP copy's 2N operand bits, each RP
// copy's 2(N-K) truncated operand bits). The same random operands and the
// same noise on the shared upper bits feed each scheme. For every sample the
// HPR output is checked against the testbench's arithmetic model of the
// scheme; the run reports the mean square error (MSE) against the exact
// product for
//   HPR:      the design under test,
//   TMR:      three full 8x8 products, each with its own noise, bitwise
//             majority (model in this testbench, used only as a reference),
//   single:   one unprotected multiplier with the FP copy's noise,
// and the HPR MSE normalised to the TMR MSE. Check beyond the model match:
// at every point the HPR MSE must stay below the unprotected multiplier's.
// A directed case comes first: N = 8, K = 2 (the configuration that the
// bound Q_DUB = 7 % selects), A = 151, B = 108, with one flipped upper
// operand bit in the FP copy only. Since B_L = 0 the flip changes only the
// FP copy's upper 12 bits; the 12-bit voter must outvote it and the output
// must still be 16308.
module tb_hpr_soft_error;
  localparam int N = 8;
  localparam int SAMPLES = 20000;

  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic [N-1:0] a, b;
  logic [N-1:0] fa, fb;                 // FP copy noise (shared by all K)
  logic [N-1:0] ra0, rb0, ra1, rb1;     // RP copy noise, full width, sliced per K
  logic [2*N-1:0] p2, p4, p6;

  hpr_mul #(.N(N), .K(2)) u_k2 (.a(a), .b(b), .fp_flip_a(fa), .fp_flip_b(fb),
    .rp_flip_a({ra1[N-1:2], ra0[N-1:2]}), .rp_flip_b({rb1[N-1:2], rb0[N-1:2]}), .p(p2));
  hpr_mul #(.N(N), .K(4)) u_k4 (.a(a), .b(b), .fp_flip_a(fa), .fp_flip_b(fb),
    .rp_flip_a({ra1[N-1:4], ra0[N-1:4]}), .rp_flip_b({rb1[N-1:4], rb0[N-1:4]}), .p(p4));
  hpr_mul #(.N(N), .K(6)) u_k6 (.a(a), .b(b), .fp_flip_a(fa), .fp_flip_b(fb),
    .rp_flip_a({ra1[N-1:6], ra0[N-1:6]}), .rp_flip_b({rb1[N-1:6], rb0[N-1:6]}), .p(p6));

  function automatic logic [N-1:0] noise(input real pf);
    logic [N-1:0] m;
    for (int i = 0; i < N; i++) m[i] = (real'($urandom % 1000000) / 1000000.0) < pf;
    return m;
  endfunction

  // Arithmetic model of the HPR scheme with the current masks.
  function automatic int hpr_model(input int k);
    int rw, fp_prod, fp_hi, req, r0, r1, v;
    rw      = 2 * (N - k);
    fp_prod = int'(a ^ fa) * int'(b ^ fb);
    fp_hi   = fp_prod >> (2 * k);
    req     = (fp_hi - int'((a ^ fa) >> k) * int'((b ^ fb) >> k)) & ((1 << rw) - 1);
    r0      = (int'((a ^ ra0) >> k) * int'((b ^ rb0) >> k) + req) & ((1 << rw) - 1);
    r1      = (int'((a ^ ra1) >> k) * int'((b ^ rb1) >> k) + req) & ((1 << rw) - 1);
    v       = (fp_hi & r0) | (fp_hi & r1) | (r0 & r1);
    return (v << (2 * k)) | (fp_prod & ((1 << (2 * k)) - 1));
  endfunction

  initial begin
    real pfs[4] = '{0.001, 0.005, 0.01, 0.02};
    // Directed case: faulty FP copy outvoted.
    a = 8'd151; b = 8'd108;
    fa = 8'b0100_0000; fb = '0; ra0 = '0; rb0 = '0; ra1 = '0; rb1 = '0;
    @(posedge clk);
    checks++;
    if (p2 != 16'd16308 || $bits(u_k2.u_voter.y) != 12 ||
        u_k2.fp_p[15:4] == u_k2.voted || u_k2.fp_p[3:0] != 4'b0100) begin
      failures++;
      $display("FAIL directed K=2 case: p=%0d fp upper=%b voted=%b", p2, u_k2.fp_p[15:4], u_k2.voted);
    end
    foreach (pfs[ip]) begin
      real se_hpr[3], se_tmr, se_single;
      logic [N-1:0] ta0, tb0;
      se_hpr = '{0.0, 0.0, 0.0}; se_tmr = 0.0; se_single = 0.0;
      for (int s = 0; s < SAMPLES; s++) begin
        int exact, got[3], t0, t1, t2, tv;
        a = N'($urandom); b = N'($urandom);
        fa = noise(pfs[ip]); fb = noise(pfs[ip]);
        ra0 = noise(pfs[ip]); rb0 = noise(pfs[ip]);
        ra1 = noise(pfs[ip]); rb1 = noise(pfs[ip]);
        #1;
        exact  = int'(a) * int'(b);
        got[0] = int'(p2); got[1] = int'(p4); got[2] = int'(p6);
        for (int j = 0; j < 3; j++) begin
          int exp;
          exp = hpr_model(2 * j + 2);
          checks++;
          if (got[j] != exp) begin
            failures++;
            if (failures <= 10) $display("FAIL K=%0d %0d*%0d: got %0d model %0d", 2*j+2, a, b, got[j], exp);
          end
          se_hpr[j] += real'(got[j] - exact) ** 2;
        end
        // Typical TMR reference: full-width copies, RP noise masks reused
        // at full width for copies 2 and 3.
        t0 = int'(a ^ fa) * int'(b ^ fb);
        t1 = int'(a ^ ra0) * int'(b ^ rb0);
        t2 = int'(a ^ ra1) * int'(b ^ rb1);
        tv = (t0 & t1) | (t0 & t2) | (t1 & t2);
        se_tmr    += real'(tv - exact) ** 2;
        se_single += real'(t0 - exact) ** 2;
        if (s % 256 == 0) @(posedge clk);
      end
      for (int j = 0; j < 3; j++) begin
        $display("Pf=%0.3f K=%0d  MSE HPR=%0.1f  TMR=%0.1f  single=%0.1f  HPR/TMR=%0.3f",
                 pfs[ip], 2*j+2, se_hpr[j]/SAMPLES, se_tmr/SAMPLES, se_single/SAMPLES,
                 (se_tmr > 0.0) ? se_hpr[j]/se_tmr : 0.0);
        checks++;
        if (!(se_hpr[j] < se_single)) begin
          failures++;
          $display("FAIL Pf=%0.3f K=%0d: HPR MSE not below the unprotected multiplier's", pfs[ip], 2*j+2);
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
