// tb_hpr_tmr_voter: self-check of the 8-bit majority voter. Part 1: one
// correct word on all inputs, then one input replaced by a random word; the
// output must be the correct word (single faulty input outvoted). Part 2:
// three random words, output compared bit by bit with a counted majority.
module tb_hpr_tmr_voter;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic [7:0] in0, in1, in2, y;
  hpr_tmr_voter #(.W(8)) dut (.in0(in0), .in1(in1), .in2(in2), .y(y));

  initial begin
    for (int i = 0; i < 3000; i++) begin
      logic [7:0] good, bad;
      good = 8'($urandom);
      bad  = 8'($urandom);
      in0 = good; in1 = good; in2 = good;
      case (i % 3)
        0: in0 = bad;
        1: in1 = bad;
        default: in2 = bad;
      endcase
      @(posedge clk);
      checks++;
      if (y != good) begin
        failures++;
        if (failures <= 10) $display("FAIL single fault: %h %h %h -> %h", in0, in1, in2, y);
      end
    end
    for (int i = 0; i < 3000; i++) begin
      logic [7:0] exp;
      in0 = 8'($urandom); in1 = 8'($urandom); in2 = 8'($urandom);
      for (int j = 0; j < 8; j++) exp[j] = (int'(in0[j]) + int'(in1[j]) + int'(in2[j])) >= 2;
      @(posedge clk);
      checks++;
      if (y != exp) begin
        failures++;
        if (failures <= 10) $display("FAIL majority: %h %h %h -> %h", in0, in1, in2, y);
      end
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
