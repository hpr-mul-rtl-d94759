// hpr_pkg: shared design-time helpers of the high-precision redundancy
// multiplier (HPR multiplier).
//
// The HPR multiplier relaxes the K least significant bits of each operand in
// its two redundant copies. K is a design-time choice, derived from the
// operand width N and a quality degradation upper bound Q_DUB (in percent):
//
//   MTED = (2^N - 1) * Q_DUB / 100        maximum tolerable error distance
//   MTED is rounded down to a power of four, 2^(2m); then K = m,
//   i.e.  K = floor( floor(log2(MTED)) / 2 ).
//
// select_k() evaluates this with integer arithmetic only, so it can be used
// in parameter expressions (a constant function): floor(log2(x)) equals
// floor(log2(floor(x))) for x >= 1, so MTED is floored first. When MTED < 1
// nothing may be relaxed and K = 0 is returned; the multiplier itself needs
// 1 <= K <= N-1, which hpr_mul checks at elaboration.
//
// The formula for MTED follows the written equation of the method, whose
// worked example (N = 8, Q_DUB = 7 % gives MTED = 17.85 and K = 2) uses
// 2^N - 1; a drawing of the same flow writes 2^(2N) - 1, which would not give
// that example. Q_DUB is taken here as a whole percentage; this is this
// design's choice.
package hpr_pkg;

  // floor(log2(x)) for x >= 1; returns -1 for x == 0.
  function automatic int floor_log2(input longint unsigned x);
    int r;
    r = -1;
    while (x != 0) begin
      x = x >> 1;
      r++;
    end
    return r;
  endfunction

  // floor(MTED) = floor((2^N - 1) * qdub_percent / 100).
  function automatic longint unsigned mted_floor(input int n, input int qdub_percent);
    longint unsigned full_scale;
    full_scale = (longint'(1) << n) - 1;
    return (full_scale * longint'(qdub_percent)) / 100;
  endfunction

  // K = floor(floor(log2(MTED)) / 2), 0 when MTED < 1.
  function automatic int select_k(input int n, input int qdub_percent);
    int l;
    l = floor_log2(mted_floor(n, qdub_percent));
    if (l < 0) return 0;
    return l / 2;
  endfunction

endpackage
