// hpr_fp_mul: full precision (FP) N x N multiplier of the HPR multiplier,
// built at block level so that its intermediate sums can be shared with the
// two reduced precision (RP) copies.
//
// Each operand is split into an upper part of N-K bits and a lower part of
// K bits: A = A_H*2^K + A_L, B = B_H*2^K + B_L. Four sub-multipliers form
// A_H*B_H (2(N-K) bits), A_H*B_L and A_L*B_H (N bits each) and A_L*B_L
// (2K bits). The summation follows the block-level structure of the method:
//   s1 = A_H*B_L + A_L*B_H                  (N-bit adder, carry c1)
//   s2 = s1 + (A_L*B_L >> K)                (N-bit adder, carry c2)
//   {hc,hs} = c1 + c2                       (half adder)
//   req = {0.., hc, hs, s2[N-1:K]}          (2(N-K) bits, "required signals")
//   P[2N-1:2K] = A_H*B_H + req               (2(N-K)-bit adder)
//   P[2K-1:K]  = s2[K-1:0],  P[K-1:0] = (A_L*B_L)[K-1:0]
// req is the exact weight-2^(2K) contribution of the three lower
// sub-products; it is exported so that each RP multiplier only needs its own
// A_H x B_H block and one 2(N-K)-bit adder. All of this follows the method's
// block diagram; for N-K = 1 the two zero bits disappear and the top bit hc
// is provably zero, so req is cut to 2(N-K) bits.
//
// Interface: a, b [N-1:0] in; p[2N-1:0] full product; req[2(N-K)-1:0] to the
// RP multipliers. Operands are unsigned. Purely combinational.
module hpr_fp_mul #(
  parameter int unsigned N = 8,
  parameter int unsigned K = 4
) (
  input  logic [N-1:0]       a,
  input  logic [N-1:0]       b,
  output logic [2*N-1:0]     p,
  output logic [2*(N-K)-1:0] req
);

  localparam int unsigned H  = N - K;      // width of the upper parts
  localparam int unsigned RW = 2 * H;      // width of the voted part

  logic [H-1:0]   a_h, b_h;
  logic [K-1:0]   a_l, b_l;
  logic [RW-1:0]  p_hh;                    // A_H x B_H
  logic [N-1:0]   p_hl, p_lh;              // A_H x B_L, A_L x B_H
  logic [2*K-1:0] p_ll;                    // A_L x B_L
  logic [N-1:0]   s1, s2;
  logic           c1, c2;
  logic           hs, hc;
  logic [RW-1:0]  s_hi;

  always_comb begin
    a_h = a[N-1:K];
    a_l = a[K-1:0];
    b_h = b[N-1:K];
    b_l = b[K-1:0];
  end

  hpr_block_mul #(.WA(H), .WB(H)) u_mul_hh (.a(a_h), .b(b_h), .p(p_hh));
  hpr_block_mul #(.WA(H), .WB(K)) u_mul_hl (.a(a_h), .b(b_l), .p(p_hl));
  hpr_block_mul #(.WA(K), .WB(H)) u_mul_lh (.a(a_l), .b(b_h), .p(p_lh));
  hpr_block_mul #(.WA(K), .WB(K)) u_mul_ll (.a(a_l), .b(b_l), .p(p_ll));

  // N-bit adder: the two cross products.
  hpr_adder #(.W(N)) u_add_cross (.x(p_hl), .y(p_lh), .s(s1), .co(c1));

  // N-bit adder: add the upper K bits of A_L x B_L, zero extended by N-K bits.
  hpr_adder #(.W(N)) u_add_low (
    .x (s1),
    .y ({{H{1'b0}}, p_ll[2*K-1:K]}),
    .s (s2),
    .co(c2)
  );

  // Half adder on the two carries. The three lower sub-products sum to less
  // than 2^(N+1), so in a fault-free datapath both carries are never set
  // together and hc stays 0; a fault on an internal net can set it.
  always_comb begin
    hs = c1 ^ c2;
    hc = c1 & c2;
  end

  // Required signals for the RP multipliers.
  always_comb req = RW'({hc, hs, s2[N-1:K]});

  // 2(N-K)-bit adder: upper part of the product. Its carry out cannot be set
  // (the product fits in 2N bits) and is left open.
  hpr_adder #(.W(RW)) u_add_hi (.x(p_hh), .y(req), .s(s_hi), .co());

  always_comb p = {s_hi, s2[K-1:0], p_ll[K-1:0]};

endmodule
