// tb_tsetlin_wisard_top - end-to-end test of the TsetlinWiSARD core at a reduced size:
// 10 classes of 30 six-input LUTs, 32 TA states, 784 features.  Only the number of LUTs per
// discriminator is smaller than the default; everything else, the stream format and the
// training rule included, is the same.  See tw_e2e_bench for what is checked.
module tb_tsetlin_wisard_top;
  bit done;  // the bench prints its result and finishes on its own
  int checks, failures;
  tw_e2e_bench #(.FULL(1'b0), .L(30), .MIN_ACC_PCT(85)) bench (
    .done(done), .checks_o(checks), .failures_o(failures));
endmodule
