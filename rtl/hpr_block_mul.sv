// hpr_block_mul: unsigned WA x WB multiplier, one of the "smaller blocks" from
// which the HPR multiplier is composed (A_H x B_H, A_H x B_L, A_L x B_H and
// A_L x B_L).
//
// The product is formed as a plain array multiplier: one partial product
// (a AND b[i]) per bit of b, shifted by i and accumulated. The internal
// structure of the sub-multipliers is not prescribed by the method; this
// array form is this design's choice, and any correct unsigned multiplier
// may replace it.
//
// Interface: a[WA-1:0], b[WB-1:0] in, p[WA+WB-1:0] out. Purely
// combinational, no clock; the product is valid one settling time after the
// operands.
module hpr_block_mul #(
  parameter int unsigned WA = 4,
  parameter int unsigned WB = 4
) (
  input  logic [WA-1:0]    a,
  input  logic [WB-1:0]    b,
  output logic [WA+WB-1:0] p
);

  always_comb begin
    logic [WA+WB-1:0] acc;
    acc = '0;
    for (int i = 0; i < int'(WB); i++) begin
      if (b[i]) acc = acc + ((WA+WB)'(a) << i);
    end
    p = acc;
  end

endmodule
