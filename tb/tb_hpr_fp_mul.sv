// tb_hpr_fp_mul: self-check of the block-level full precision multiplier for
// N = 8 and every K from 1 to 7. All 65,536 operand pairs are applied; for
// each K the product must equal A*B, and the exported required signals must
// equal (A*B >> 2K) - A_H*B_H (mod 2^(2(N-K))), the value the RP copies need
// to rebuild the upper product bits. The worked examples are also checked
// literally: N = 8, K = 3, A = 151, B = 108 (intermediate sum 10100110,
// required value 10100, product 16308) and N = 8, K = 5, A = 77, B = 210
// (product 0011111100101010).
module tb_hpr_fp_mul;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  localparam int N = 8;
  logic [N-1:0]   a, b;
  logic [2*N-1:0] p   [1:7];
  logic [15:0]    req [1:7];   // zero extended

  for (genvar k = 1; k <= 7; k++) begin : g_k
    logic [2*(N-k)-1:0] r;
    hpr_fp_mul #(.N(N), .K(k)) dut (.a(a), .b(b), .p(p[k]), .req(r));
    assign req[k] = 16'(r);
  end

  task automatic check(input string what, input int got, input int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures <= 10) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    // Worked example with K = 3.
    a = 8'd151; b = 8'd108;
    @(posedge clk);
    check("example K=3 product", int'(p[3]), 16308);
    check("example K=3 second N-bit sum", int'(g_k[3].dut.s2), 'b10100110);
    check("example K=3 required value", int'(req[3]), 'b10100);
    // Worked example with K = 5.
    a = 8'b01001101; b = 8'b11010010;
    @(posedge clk);
    check("example K=5 product", int'(p[5]), 'b0011111100101010);
    // Exhaustive.
    for (int i = 0; i < 65536; i++) begin
      int prod;
      {a, b} = 16'(i);
      #1;
      prod = int'(a) * int'(b);
      for (int k = 1; k <= 7; k++) begin
        int hh, rexp;
        hh   = int'(a >> k) * int'(b >> k);
        rexp = ((prod >> (2 * k)) - hh) & ((1 << (2 * (N - k))) - 1);
        check($sformatf("K=%0d product %0d*%0d", k, a, b), int'(p[k]), prod);
        check($sformatf("K=%0d req %0d*%0d", k, a, b), int'(req[k]), rexp);
      end
      if (i % 1024 == 0) @(posedge clk);
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
