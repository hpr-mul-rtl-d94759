// tb_hpr_pkg: self-check of the design-time K selection, hpr_pkg::select_k.
// The expected K is worked out with real arithmetic (MTED, then log2 and
// the rounding down to a power of four) for many (N, Q_DUB) pairs, and the
// worked example N = 8, Q_DUB = 7 % (MTED = 17.85, K = 2) is checked
// literally. K = 0 is expected whenever MTED < 1.
module tb_hpr_pkg;
  import hpr_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  // Elaboration-time use, as a parameter expression.
  localparam int KEX = select_k(8, 7);

  function automatic int ref_k(input int n, input int q);
    real mted;
    int  l;
    mted = (2.0 ** n - 1.0) * q / 100.0;
    if (mted < 1.0) return 0;
    l = 0;
    while (2.0 ** (l + 1) <= mted) l++;   // l = floor(log2(MTED))
    return l / 2;
  endfunction

  task automatic check(input string what, input int got, input int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures <= 10) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    @(posedge clk);
    check("example K (parameter)", KEX, 2);
    check("example K", select_k(8, 7), 2);
    check("example floor(MTED)", int'(mted_floor(8, 7)), 17);
    check("floor_log2(17)", floor_log2(17), 4);
    check("floor_log2(1)", floor_log2(1), 0);
    for (int n = 2; n <= 32; n++) begin
      for (int q = 0; q <= 100; q++) begin
        check($sformatf("select_k(%0d,%0d)", n, q), select_k(n, q), ref_k(n, q));
      end
      @(posedge clk);
    end
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
