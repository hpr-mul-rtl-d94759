// tb_hpr_internal_faults: soft errors on internal nets of the HPR multiplier
// for N = 8 and K = 2, 4, 6, at bit-flip probabilities Pf = 0.001, 0.01 and
// 0.02 (nine harness instances running side by side, see
// tb_hpr_fault_harness). Every faulty product must match the model of the
// same faults; for every point the HPR output must have a lower mean square
// error than the faulty FP product on its own.
module tb_hpr_internal_faults;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  localparam int NK = 3, NP = 3;
  localparam int KS [NK] = '{2, 4, 6};
  localparam int PS [NP] = '{1000, 10000, 20000};

  logic done [NK][NP];
  int   hc   [NK][NP];
  int   hf   [NK][NP];
  real  mh   [NK][NP];
  real  mf   [NK][NP];

  for (genvar i = 0; i < NK; i++) begin : g_k
    for (genvar j = 0; j < NP; j++) begin : g_p
      tb_hpr_fault_harness #(.K(KS[i]), .PF_PPM(PS[j]), .SAMPLES(4000)) u (
        .done(done[i][j]), .checks(hc[i][j]), .failures(hf[i][j]),
        .mse_hpr(mh[i][j]), .mse_fp(mf[i][j]));
    end
  end

  initial begin
    bit all_done;
    do begin
      @(posedge clk);
      all_done = 1'b1;
      for (int i = 0; i < NK; i++) for (int j = 0; j < NP; j++) if (!done[i][j]) all_done = 1'b0;
    end while (!all_done);
    for (int i = 0; i < NK; i++)
      for (int j = 0; j < NP; j++) begin
        checks += hc[i][j];
        failures += hf[i][j];
        $display("internal faults K=%0d Pf=%0.3f  MSE HPR=%0.1f  FP alone=%0.1f  ratio=%0.3f",
                 KS[i], PS[j] / 1.0e6, mh[i][j], mf[i][j], (mf[i][j] > 0.0) ? mh[i][j] / mf[i][j] : 0.0);
        checks++;
        if (!(mh[i][j] < mf[i][j])) begin
          failures++;
          $display("FAIL K=%0d Pf=%0.3f: HPR MSE not below the unprotected FP product's", KS[i], PS[j] / 1.0e6);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
