// tb_hpr_rp_mul: self-check of the reduced precision multiplier for H = N-K
// of 4 and 6. First random truncated operands with random required values
// (output = A_H*B_H + req mod 2^(2H)); then, for H = 4 (N = 8, K = 4), the
// required value is derived from full 8-bit operands as (A*B >> 8) - A_H*B_H,
// and the output must equal the upper 8 bits of the exact product.
module tb_hpr_rp_mul;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic [3:0] a4, b4; logic [7:0]  r4, p4;
  logic [5:0] a6, b6; logic [11:0] r6, p6;

  hpr_rp_mul #(.H(4)) u4 (.a_h(a4), .b_h(b4), .req(r4), .p_hi(p4));
  hpr_rp_mul #(.H(6)) u6 (.a_h(a6), .b_h(b6), .req(r6), .p_hi(p6));

  task automatic check(input string what, input int got, input int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures <= 10) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    for (int i = 0; i < 4000; i++) begin
      a4 = 4'($urandom); b4 = 4'($urandom); r4 = 8'($urandom);
      a6 = 6'($urandom); b6 = 6'($urandom); r6 = 12'($urandom);
      @(posedge clk);
      check("H=4", int'(p4), (int'(a4) * int'(b4) + int'(r4)) % 256);
      check("H=6", int'(p6), (int'(a6) * int'(b6) + int'(r6)) % 4096);
    end
    for (int i = 0; i < 65536; i++) begin
      int prod;
      logic [7:0] a, b;
      {a, b} = 16'(i);
      prod = int'(a) * int'(b);
      a4 = a[7:4]; b4 = b[7:4];
      r4 = 8'((prod >> 8) - int'(a4) * int'(b4));
      #1;
      check("upper product bits", int'(p4), prod >> 8);
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
