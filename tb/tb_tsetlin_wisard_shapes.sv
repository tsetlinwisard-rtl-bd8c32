// tb_tsetlin_wisard_shapes - the TsetlinWiSARD core elaborated for the input shapes of two
// smaller benchmark sets, run side by side on synthetic data:
//   * 560 features, 6 classes (the shape of the human-activity-recognition set), 50 LUTs;
//   * 180 features, 5 classes (the shape of the gesture-phase set), 50 LUTs.
// The LUT count is 50 per class in both, the smallest size the benchmark study uses; 6-input
// LUTs and 32 TA states as by default.  Each bench checks every prediction against its
// reference model, the latency, the accuracy and the counted mechanisms (see tw_e2e_bench).
module tb_tsetlin_wisard_shapes;
  bit done_a, done_b;
  int checks_a, checks_b, failures_a, failures_b;

  tw_e2e_bench #(.FULL(1'b0), .NC(6), .L(50), .F(560), .MIN_ACC_PCT(85), .STANDALONE(1'b0))
    bench_a (.done(done_a), .checks_o(checks_a), .failures_o(failures_a));
  tw_e2e_bench #(.FULL(1'b0), .NC(5), .L(50), .F(180), .MIN_ACC_PCT(85), .STANDALONE(1'b0))
    bench_b (.done(done_b), .checks_o(checks_b), .failures_o(failures_b));

  initial begin
    fork
      wait (done_a && done_b);
      #5_000_000;
    join_any
    $display("TB_RESULT checks=%0d failures=%0d", checks_a + checks_b,
             failures_a + failures_b + ((done_a && done_b) ? 0 : 1));
    $finish;
  end
endmodule
