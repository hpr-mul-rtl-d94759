// hpr_tmr_voter: W-bit triple modular redundancy voter of the HPR multiplier.
//
// Each output bit is the majority of the three corresponding input bits, so
// any disagreement confined to one input per bit position is outvoted. In
// the HPR multiplier W = 2(N-K): only the upper part of the product is voted,
// because the lower 2K bits are computed once, by the full precision
// multiplier. That the voter is an ordinary TMR voter of this width is
// taken from the method; voting bit by bit, rather than word by word, is
// this design's choice.
//
// Interface: in0, in1, in2 [W-1:0] in; y[W-1:0] out. Purely combinational.
module hpr_tmr_voter #(
  parameter int unsigned W = 8
) (
  input  logic [W-1:0] in0,
  input  logic [W-1:0] in1,
  input  logic [W-1:0] in2,
  output logic [W-1:0] y
);

  always_comb y = (in0 & in1) | (in0 & in2) | (in1 & in2);

endmodule
