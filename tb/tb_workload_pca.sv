// tb_workload_pca: runs the accelerator, at its default parameters, on two
// PCA workloads of the sizes of well-known data sets, side by side, each on
// its own instance (see workload_case):
//   * 1797 samples x 64 features (8x8-pixel handwritten digits), padded to
//     M = 1800;
//   * 45312 samples x 7 features (a breast-cancer feature set), padded to
//     N = 8 with a zero feature.
// The second one has so many samples that its data is kept smaller
// (strongest component amplitude 0.05) so that the covariance diagonal,
// about M times the feature variance, stays inside Q15.16.
// The testbench ends when both cases have finished, or at the watchdog, and
// prints the summed result. The workload sizes come from the original
// evaluation; the synthetic data is this testbench's own.
module tb_workload_pca;
  logic clk = 0;
  always #5 clk = ~clk;

  logic fin_a, fin_b;
  int   chk_a, chk_b, fail_a, fail_b;

  workload_case #(.NAME("digits-8x8"), .M_RAW(1797), .N_RAW(64), .AMP(0.1)) u_digits (
    .clk, .finished(fin_a), .checks(chk_a), .failures(fail_a)
  );
  workload_case #(.NAME("breast-cancer"), .M_RAW(45312), .N_RAW(7), .AMP(0.05)) u_bcancer (
    .clk, .finished(fin_b), .checks(chk_b), .failures(fail_b)
  );

  initial begin
    fork
      begin
        wait (fin_a && fin_b);
        $display("TB_RESULT checks=%0d failures=%0d", chk_a + chk_b, fail_a + fail_b);
      end
      begin
        repeat (60_000_000) @(posedge clk);
        $display("watchdog expired");
        $display("TB_RESULT checks=%0d failures=%0d", chk_a + chk_b, fail_a + fail_b + 1);
      end
    join_any
    $finish;
  end
endmodule
