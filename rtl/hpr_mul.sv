// hpr_mul: high-precision redundancy (HPR) multiplier, N x N bits, unsigned.
//
// A fault-tolerant multiplier with the structure of triple modular
// redundancy but with two of the three copies made smaller. One full
// precision (FP) multiplier computes the whole product at block level. Two
// reduced precision (RP) multipliers see only the upper N-K operand bits
// (A_H, B_H) and rebuild the upper 2(N-K) product bits by adding the FP
// multiplier's intermediate "required signals" (the carried-in contribution
// of A_H*B_L + A_L*B_H + A_L*B_L) to their own A_H*B_H. The upper 2(N-K) bits
// of the three results are equal when nothing is faulty and go to a
// 2(N-K)-bit majority voter; the lower 2K product bits are taken from the FP
// multiplier unvoted. K trades protection for area: see hpr_pkg::select_k
// for the rule that derives K from an error bound.
//
// Fault injection: every multiplier input passes through an XOR with a flip
// mask (fp_flip_a/b for the FP copy, rp_flip_a/b[i] for RP copy i), the noise
// source of the method's soft-error evaluation. In normal use the masks are
// tied to zero. Note that a fault on the FP operands also disturbs req and
// so reaches the RP copies; this coupling is inherent to the method.
//
// What follows the method: the partitioning, the sharing of req, the
// 2(N-K)-bit voter and where the lower bits come from. This design's
// choices: unsigned operands, a bitwise majority voter, the flip-mask ports
// and the defaults N = 8, K = 4 (the 8-bit, K = 4 configuration used for the
// image-processing evaluation).
//
// Interface: a, b [N-1:0] operands; p[2N-1:0] product. Purely combinational:
// no clock, no reset, p is valid one settling time after the inputs.
module hpr_mul #(
  parameter int unsigned N = 8,
  parameter int unsigned K = 4
) (
  input  logic [N-1:0]          a,
  input  logic [N-1:0]          b,
  input  logic [N-1:0]          fp_flip_a,
  input  logic [N-1:0]          fp_flip_b,
  input  logic [1:0][N-K-1:0]   rp_flip_a,
  input  logic [1:0][N-K-1:0]   rp_flip_b,
  output logic [2*N-1:0]        p
);

  localparam int unsigned H  = N - K;
  localparam int unsigned RW = 2 * H;

  if (K < 1 || K >= N) begin : g_bad_k
    $error("hpr_mul: K must satisfy 1 <= K <= N-1");
  end

  logic [N-1:0]   fp_a, fp_b;
  logic [2*N-1:0] fp_p;
  logic [RW-1:0]  req;
  logic [1:0][H-1:0]  rp_a, rp_b;
  logic [1:0][RW-1:0] rp_p;
  logic [RW-1:0]  voted;

  // Noise sources in front of the FP multiplier.
  always_comb begin
    fp_a = a ^ fp_flip_a;
    fp_b = b ^ fp_flip_b;
  end

  hpr_fp_mul #(.N(N), .K(K)) u_fp (.a(fp_a), .b(fp_b), .p(fp_p), .req(req));

  // Truncation: the RP copies take the upper N-K operand bits only,
  // each through its own noise source.
  for (genvar i = 0; i < 2; i++) begin : g_rp
    always_comb begin
      rp_a[i] = a[N-1:K] ^ rp_flip_a[i];
      rp_b[i] = b[N-1:K] ^ rp_flip_b[i];
    end
    hpr_rp_mul #(.H(H)) u_rp (.a_h(rp_a[i]), .b_h(rp_b[i]), .req(req), .p_hi(rp_p[i]));
  end

  hpr_tmr_voter #(.W(RW)) u_voter (
    .in0(fp_p[2*N-1:2*K]),
    .in1(rp_p[0]),
    .in2(rp_p[1]),
    .y  (voted)
  );

  always_comb p = {voted, fp_p[2*K-1:0]};

endmodule
