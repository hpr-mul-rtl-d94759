// tb_hpr_fault_harness: one HPR multiplier (N = 8, parameter K) with soft
// errors injected on its internal nets, used by tb_hpr_internal_faults.
//
// For each random operand pair the harness lets the datapath settle, then
// walks the internal nets in signal-flow order: the four FP sub-products,
// the two N-bit adder sums s1 and s2, the required signals req, the FP
// product, each RP copy's A_H*B_H product and each RP output. Every bit of
// every net is flipped with probability PF_PPM / 1e6 by forcing the net to
// its settled value XOR a random mask, and the design settles again before
// the next net. The constant zero padding of req is not faulted. The
// product is compared with an arithmetic model of the same
// faults; the mean square error against the exact product is reported for
// the HPR output and for the faulty FP product alone (an unprotected
// block-level multiplier with the same faults).
module tb_hpr_fault_harness #(
  parameter int K       = 4,
  parameter int PF_PPM  = 10000,
  parameter int SAMPLES = 5000
) (
  output logic done,
  output int   checks,
  output int   failures,
  output real  mse_hpr,
  output real  mse_fp
);
  localparam int N  = 8;
  localparam int H  = N - K;
  localparam int RW = 2 * H;
  // req is {zero padding, hc, hs, s2[N-1:K]}; the padding bits are constant
  // ties, not nets, so only the lower H+2 bits (at most RW) receive faults.
  localparam int REQ_NETS = (H + 2 < RW) ? H + 2 : RW;

  logic [N-1:0]      a, b;
  logic [N-1:0]      zero_n;
  logic [1:0][H-1:0] zero_h;
  logic [2*N-1:0]    p;

  hpr_mul #(.N(N), .K(K)) dut (.a(a), .b(b), .fp_flip_a(zero_n), .fp_flip_b(zero_n),
                                .rp_flip_a(zero_h), .rp_flip_b(zero_h), .p(p));

  function automatic longint unsigned rmask(input int width);
    longint unsigned m;
    m = 0;
    for (int i = 0; i < width; i++) begin
      int unsigned r;
      r = $urandom % 1000000;
      m[i] = (r < PF_PPM);
    end
    return m;
  endfunction

  // Forced values.
  logic [RW-1:0]  v_hh, v_req, v_rhh0, v_rhh1, v_rp0, v_rp1;
  logic [N-1:0]   v_hl, v_lh, v_s1, v_s2;
  logic [2*K-1:0] v_ll;
  logic [2*N-1:0] v_fpp;

  initial begin
    done = 1'b0; checks = 0; failures = 0; mse_hpr = 0.0; mse_fp = 0.0;
    zero_n = '0; zero_h = '0;
    for (int s = 0; s < SAMPLES; s++) begin
      longint unsigned m_hh, m_hl, m_lh, m_ll, m_s1, m_s2, m_req, m_fpp, m_rhh0, m_rhh1, m_rp0, m_rp1;
      int ah, al, bh, bl, hh, hl, lh, ll, sum1, s1, c1, sum2, s2, c2, req, fpp, rhh0, rhh1, rp0, rp1, v, model, exact;
      a = N'($urandom); b = N'($urandom);
      m_hh = rmask(RW); m_hl = rmask(N); m_lh = rmask(N); m_ll = rmask(2 * K);
      m_s1 = rmask(N); m_s2 = rmask(N); m_req = rmask(REQ_NETS); m_fpp = rmask(2 * N);
      m_rhh0 = rmask(RW); m_rhh1 = rmask(RW); m_rp0 = rmask(RW); m_rp1 = rmask(RW);
      #1;
      v_hh = dut.u_fp.p_hh ^ RW'(m_hh);  force dut.u_fp.p_hh = v_hh;
      v_hl = dut.u_fp.p_hl ^ N'(m_hl);   force dut.u_fp.p_hl = v_hl;
      v_lh = dut.u_fp.p_lh ^ N'(m_lh);   force dut.u_fp.p_lh = v_lh;
      v_ll = dut.u_fp.p_ll ^ (2*K)'(m_ll); force dut.u_fp.p_ll = v_ll;
      #1;
      v_s1 = dut.u_fp.s1 ^ N'(m_s1);     force dut.u_fp.s1 = v_s1;
      #1;
      v_s2 = dut.u_fp.s2 ^ N'(m_s2);     force dut.u_fp.s2 = v_s2;
      #1;
      v_req = dut.u_fp.req ^ RW'(m_req); force dut.u_fp.req = v_req;
      #1;
      v_fpp = dut.u_fp.p ^ (2*N)'(m_fpp); force dut.u_fp.p = v_fpp;
      v_rhh0 = dut.g_rp[0].u_rp.p_hh ^ RW'(m_rhh0); force dut.g_rp[0].u_rp.p_hh = v_rhh0;
      v_rhh1 = dut.g_rp[1].u_rp.p_hh ^ RW'(m_rhh1); force dut.g_rp[1].u_rp.p_hh = v_rhh1;
      #1;
      v_rp0 = dut.g_rp[0].u_rp.p_hi ^ RW'(m_rp0); force dut.g_rp[0].u_rp.p_hi = v_rp0;
      v_rp1 = dut.g_rp[1].u_rp.p_hi ^ RW'(m_rp1); force dut.g_rp[1].u_rp.p_hi = v_rp1;
      #1;
      // Model of the same faults.
      ah = int'(a) >> K; al = int'(a) & ((1 << K) - 1);
      bh = int'(b) >> K; bl = int'(b) & ((1 << K) - 1);
      hh = (ah * bh) ^ int'(m_hh);
      hl = (ah * bl) ^ int'(m_hl);
      lh = (al * bh) ^ int'(m_lh);
      ll = (al * bl) ^ int'(m_ll);
      sum1 = hl + lh;                c1 = sum1 >> N;  s1 = (sum1 & ((1 << N) - 1)) ^ int'(m_s1);
      sum2 = s1 + (ll >> K);         c2 = sum2 >> N;  s2 = (sum2 & ((1 << N) - 1)) ^ int'(m_s2);
      req  = ((((c1 & c2) << 1 | (c1 ^ c2)) << (N - K)) | (s2 >> K));
      req  = (req & ((1 << RW) - 1)) ^ int'(m_req);
      fpp  = ((((hh + req) & ((1 << RW) - 1)) << (2 * K)) | ((s2 & ((1 << K) - 1)) << K) | (ll & ((1 << K) - 1)))
             ^ int'(m_fpp);
      rhh0 = (ah * bh) ^ int'(m_rhh0);
      rhh1 = (ah * bh) ^ int'(m_rhh1);
      rp0  = ((rhh0 + req) & ((1 << RW) - 1)) ^ int'(m_rp0);
      rp1  = ((rhh1 + req) & ((1 << RW) - 1)) ^ int'(m_rp1);
      v    = ((fpp >> (2 * K)) & rp0) | ((fpp >> (2 * K)) & rp1) | (rp0 & rp1);
      model = (v << (2 * K)) | (fpp & ((1 << (2 * K)) - 1));
      exact = int'(a) * int'(b);
      checks++;
      if (int'(p) != model) begin
        failures++;
        if (failures <= 5) $display("FAIL K=%0d %0d*%0d: got %0d model %0d", K, a, b, p, model);
      end
      mse_hpr += real'(int'(p) - exact) ** 2;
      mse_fp  += real'(fpp - exact) ** 2;
      release dut.u_fp.p_hh; release dut.u_fp.p_hl; release dut.u_fp.p_lh; release dut.u_fp.p_ll;
      release dut.u_fp.s1;   release dut.u_fp.s2;   release dut.u_fp.req;  release dut.u_fp.p;
      release dut.g_rp[0].u_rp.p_hh; release dut.g_rp[1].u_rp.p_hh;
      release dut.g_rp[0].u_rp.p_hi; release dut.g_rp[1].u_rp.p_hi;
      #1;
    end
    mse_hpr /= SAMPLES;
    mse_fp  /= SAMPLES;
    done = 1'b1;
  end
endmodule
