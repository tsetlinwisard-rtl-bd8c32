// tb_tsetlin_wisard_full - end-to-end test of the TsetlinWiSARD core at its default size
// (TsetlinWiSARD-150: 10 classes, 150 six-input LUTs each, 32 TA states, 784 features), with
// no parameter overrides on the core.  Initialises the TAs, classifies 30 random vectors,
// trains 4 epochs of 120 samples,
// classifies 80 held-out samples; see tw_e2e_bench for what is checked.
module tb_tsetlin_wisard_full;
  bit done;  // the bench prints its result and finishes on its own
  int checks, failures;
  tw_e2e_bench #(.FULL(1'b1)) bench (
    .done(done), .checks_o(checks), .failures_o(failures));
endmodule
