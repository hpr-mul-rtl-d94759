// hpr_adder: W-bit unsigned adder with carry out.
//
// It serves as the N-bit adders of the full precision multiplier (whose
// carries feed the half adder) and as the 2(N-K)-bit adder that closes both
// the full precision and the reduced precision multipliers. The adder
// architecture is not prescribed; a ripple-carry chain of full adders is
// written out here, which is this design's choice.
//
// Interface: x[W-1:0], y[W-1:0] in; s[W-1:0] sum and co carry out.
// Purely combinational.
module hpr_adder #(
  parameter int unsigned W = 8
) (
  input  logic [W-1:0] x,
  input  logic [W-1:0] y,
  output logic [W-1:0] s,
  output logic         co
);

  always_comb begin
    logic c;
    c = 1'b0;
    for (int i = 0; i < int'(W); i++) begin
      s[i] = x[i] ^ y[i] ^ c;
      c    = (x[i] & y[i]) | (x[i] & c) | (y[i] & c);
    end
    co = c;
  end

endmodule
