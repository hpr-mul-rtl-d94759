// hpr_rp_mul: reduced precision (RP) multiplier of the HPR multiplier.
//
// An RP copy sees only the upper N-K bits A_H, B_H of the operands (the K
// lower bits are dropped). On its own it would return A_H*B_H, the product
// of the truncated operands. Here it adds the "required signals" req from
// the full precision multiplier, the exact contribution of the lower
// sub-products at weight 2^(2K), so its 2(N-K)-bit output equals the upper
// 2(N-K) bits of the exact product A*B when no fault is present. The
// structure, one (N-K) x (N-K) multiplier and one 2(N-K)-bit adder, follows
// the method; the carry out of the adder cannot be set for fault-free inputs
// and is dropped.
//
// Interface: a_h, b_h [H-1:0] in, req[2H-1:0] in (from hpr_fp_mul),
// p_hi[2H-1:0] out, with H = N-K. Purely combinational.
module hpr_rp_mul #(
  parameter int unsigned H = 4
) (
  input  logic [H-1:0]   a_h,
  input  logic [H-1:0]   b_h,
  input  logic [2*H-1:0] req,
  output logic [2*H-1:0] p_hi
);

  logic [2*H-1:0] p_hh;

  hpr_block_mul #(.WA(H), .WB(H)) u_mul_hh (.a(a_h), .b(b_h), .p(p_hh));
  hpr_adder     #(.W(2*H))        u_add    (.x(p_hh), .y(req), .s(p_hi), .co());

endmodule
