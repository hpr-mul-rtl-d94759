// tb_hpr_adder: self-check of the adder with carry out. All 8-bit operand
// pairs are applied (the N-bit adder for N = 8), then random 12-bit pairs
// (the 2(N-K)-bit adder for N = 8, K = 2). Sum and carry are compared with
// the testbench's own wide addition.
module tb_hpr_adder;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic [7:0]  x8, y8, s8;   logic co8;
  logic [11:0] x12, y12, s12; logic co12;

  hpr_adder #(.W(8))  u8  (.x(x8),  .y(y8),  .s(s8),  .co(co8));
  hpr_adder #(.W(12)) u12 (.x(x12), .y(y12), .s(s12), .co(co12));

  initial begin
    for (int i = 0; i < 65536; i++) begin
      {x8, y8} = 16'(i);
      x12 = 12'($urandom);
      y12 = 12'($urandom);
      #1;
      checks++;
      if ({co8, s8} != 9'(int'(x8) + int'(y8))) begin
        failures++;
        if (failures <= 10) $display("FAIL 8-bit %0d+%0d -> %0d", x8, y8, {co8, s8});
      end
      checks++;
      if ({co12, s12} != 13'(int'(x12) + int'(y12))) begin
        failures++;
        if (failures <= 10) $display("FAIL 12-bit %0d+%0d -> %0d", x12, y12, {co12, s12});
      end
      if (i % 4096 == 0) @(posedge clk);
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
