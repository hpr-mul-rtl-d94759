// tb_hpr_block_mul: exhaustive self-check of the unsigned sub-multiplier at
// the operand shapes the HPR multiplier uses for N = 8 (4x4, 6x2, 2x6, 7x1,
// 5x3). Each product is compared with the product computed by the
// testbench. A clock paces the vectors; a watchdog ends a hung run.
module tb_hpr_block_mul;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic [3:0] a44, b44; logic [7:0] p44;
  logic [5:0] a62; logic [1:0] b62; logic [7:0] p62;
  logic [1:0] a26; logic [5:0] b26; logic [7:0] p26;
  logic [6:0] a71; logic [0:0] b71; logic [7:0] p71;
  logic [4:0] a53; logic [2:0] b53; logic [7:0] p53;

  hpr_block_mul #(.WA(4), .WB(4)) u44 (.a(a44), .b(b44), .p(p44));
  hpr_block_mul #(.WA(6), .WB(2)) u62 (.a(a62), .b(b62), .p(p62));
  hpr_block_mul #(.WA(2), .WB(6)) u26 (.a(a26), .b(b26), .p(p26));
  hpr_block_mul #(.WA(7), .WB(1)) u71 (.a(a71), .b(b71), .p(p71));
  hpr_block_mul #(.WA(5), .WB(3)) u53 (.a(a53), .b(b53), .p(p53));

  task automatic check(input string what, input int got, input int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures <= 10) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    for (int x = 0; x < 256; x++) begin
      {a44, b44} = 8'(x);
      {a62, b62} = 8'(x);
      {a26, b26} = 8'(x);
      {a71, b71} = 8'(x);
      {a53, b53} = 8'(x);
      @(posedge clk);
      check("4x4", int'(p44), int'(a44) * int'(b44));
      check("6x2", int'(p62), int'(a62) * int'(b62));
      check("2x6", int'(p26), int'(a26) * int'(b26));
      check("7x1", int'(p71), int'(a71) * int'(b71));
      check("5x3", int'(p53), int'(a53) * int'(b53));
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
