// tb_hpr_mul: end-to-end self-check of the HPR multiplier at its default
// size (N = 8, K = 4; no parameter is overridden).
//
// Phase 1, fault free: all 65,536 operand pairs; the product must be A*B.
// Phase 2, fault injection: random operands with random flip masks on the
// inputs of the FP copy, of one RP copy, or of all three at once. The
// expected output comes from an arithmetic model of the scheme written here:
//   FP:  P' = A'*B' (A', B' = flipped operands), req' = (P' >> 2K) - A'_H*B'_H
//   RPi: R_i = A''_H*B''_H + req'           (A''_H, B''_H = its flipped inputs)
//   out = { bitwise_majority(P'[2N-1:2K], R_0, R_1), P'[2K-1:0] }
// Besides the comparison, the run counts how often each mechanism of the
// scheme was exercised and fails if one never was: the voter overriding the
// FP copy, overriding RP copy 0, overriding RP copy 1, an RP fault masked
// completely, an FP fault reaching the RP copies through req, and a fault
// passing into the unvoted lower 2K bits.
module tb_hpr_mul;
  localparam int N  = 8;
  localparam int K  = 4;
  localparam int H  = N - K;
  localparam int RW = 2 * H;

  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic [N-1:0]        a, b, fa, fb;
  logic [1:0][H-1:0]   ra, rb;
  logic [2*N-1:0]      p;

  hpr_mul dut (
    .a(a), .b(b),
    .fp_flip_a(fa), .fp_flip_b(fb),
    .rp_flip_a(ra), .rp_flip_b(rb),
    .p(p)
  );

  int n_fp_outvoted = 0, n_rp0_outvoted = 0, n_rp1_outvoted = 0;
  int n_rp_masked = 0, n_req_propagated = 0, n_low_bits_hit = 0;

  task automatic check(input string what, input int got, input int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures <= 10) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  function automatic logic [N-1:0] noise(input int pf_permille, input int width);
    logic [N-1:0] m;
    m = '0;
    for (int i = 0; i < width; i++) m[i] = ($urandom % 1000) < pf_permille;
    return m;
  endfunction

  initial begin
    ra = '0; rb = '0; fa = '0; fb = '0;
    // Phase 1: fault free, exhaustive.
    for (int i = 0; i < 65536; i++) begin
      {a, b} = 16'(i);
      #1;
      check($sformatf("fault-free %0d*%0d", a, b), int'(p), int'(a) * int'(b));
      if (i % 1024 == 0) @(posedge clk);
    end
    // Phase 2: fault injection.
    for (int i = 0; i < 20000; i++) begin
      int exact, pf, fp_prod, fp_hi, hh_fp, req, r0, r1, voted, exp;
      int scen;
      a = N'($urandom); b = N'($urandom);
      fa = '0; fb = '0; ra = '0; rb = '0;
      scen = i % 4;
      pf = 100;                            // 10 % per bit for the targeted copy
      case (scen)
        0: begin fa = noise(pf, N); fb = noise(pf, N); end
        1: begin ra[0] = H'(noise(pf, H)); rb[0] = H'(noise(pf, H)); end
        2: begin ra[1] = H'(noise(pf, H)); rb[1] = H'(noise(pf, H)); end
        default: begin
          fa = noise(50, N); fb = noise(50, N);
          ra[0] = H'(noise(50, H)); rb[0] = H'(noise(50, H));
          ra[1] = H'(noise(50, H)); rb[1] = H'(noise(50, H));
        end
      endcase
      #1;
      exact   = int'(a) * int'(b);
      fp_prod = int'(a ^ fa) * int'(b ^ fb);
      fp_hi   = fp_prod >> (2 * K);
      hh_fp   = int'((a ^ fa) >> K) * int'((b ^ fb) >> K);
      req     = (fp_hi - hh_fp) & ((1 << RW) - 1);
      r0      = (int'((a >> K) ^ ra[0]) * int'((b >> K) ^ rb[0]) + req) & ((1 << RW) - 1);
      r1      = (int'((a >> K) ^ ra[1]) * int'((b >> K) ^ rb[1]) + req) & ((1 << RW) - 1);
      voted   = (fp_hi & r0) | (fp_hi & r1) | (r0 & r1);
      exp     = (voted << (2 * K)) | (fp_prod & ((1 << (2 * K)) - 1));
      check($sformatf("faulty %0d*%0d", a, b), int'(p), exp);
      if (voted != fp_hi) n_fp_outvoted++;
      if (voted != r0)    n_rp0_outvoted++;
      if (voted != r1)    n_rp1_outvoted++;
      if ((scen == 1 || scen == 2) && (ra != '0 || rb != '0)) begin
        // A fault confined to one RP copy is always masked.
        n_rp_masked++;
        check($sformatf("RP fault masked %0d*%0d", a, b), int'(p), exact);
      end
      if (req != (((exact >> (2 * K)) - int'(a >> K) * int'(b >> K)) & ((1 << RW) - 1)))
        n_req_propagated++;
      if ((exp & ((1 << (2 * K)) - 1)) != (exact & ((1 << (2 * K)) - 1))) n_low_bits_hit++;
      if (i % 64 == 0) @(posedge clk);
    end
    $display("mechanisms: fp_outvoted=%0d rp0_outvoted=%0d rp1_outvoted=%0d rp_masked=%0d req_propagated=%0d low_bits_hit=%0d",
             n_fp_outvoted, n_rp0_outvoted, n_rp1_outvoted, n_rp_masked, n_req_propagated, n_low_bits_hit);
    checks++; if (n_fp_outvoted == 0)    begin failures++; $display("FAIL: FP copy never outvoted"); end
    checks++; if (n_rp0_outvoted == 0)   begin failures++; $display("FAIL: RP copy 0 never outvoted"); end
    checks++; if (n_rp1_outvoted == 0)   begin failures++; $display("FAIL: RP copy 1 never outvoted"); end
    checks++; if (n_rp_masked == 0)      begin failures++; $display("FAIL: no RP fault masked"); end
    checks++; if (n_req_propagated == 0) begin failures++; $display("FAIL: no FP fault reached req"); end
    checks++; if (n_low_bits_hit == 0)   begin failures++; $display("FAIL: lower bits never hit"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
