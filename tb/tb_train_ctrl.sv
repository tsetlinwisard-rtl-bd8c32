// tb_train_ctrl - self-checking test of the training sequencer, with the vote sums driven
// directly by the testbench.
// Checks the initialisation walk (init_en for exactly 64 cycles, addresses 0..63), then for
// random samples: the result 2 cycles after sample_valid is seen, the predicted class (first
// maximum), and the feedback pattern: none for a correct or a classify-only sample, otherwise
// increment on the label and decrement on the prediction, for exactly one cycle.
module tb_train_ctrl;
  localparam int NC = 10, W = 8, LI = 6;
  logic                  clk = 0, rst_n = 0;
  logic [NC-1:0][W-1:0]  sums;
  logic                  sample_valid, sample_train, sample_ack;
  logic [7:0]            sample_label;
  logic                  init_en, init_done, res_valid;
  logic [LI-1:0]         init_addr;
  logic [NC-1:0]         feedback, feedback_dir;
  tw_pkg::result_t       res;
  int checks = 0, failures = 0, n_fb = 0, n_correct = 0, n_infer = 0;

  train_ctrl #(.N_CLASSES(NC), .SUM_W(W), .LUT_INPUTS(LI)) dut (
    .clk(clk), .rst_n(rst_n), .sums(sums), .sample_valid(sample_valid),
    .sample_label(sample_label), .sample_train(sample_train), .sample_ack(sample_ack),
    .init_en(init_en), .init_addr(init_addr), .init_done(init_done),
    .feedback(feedback), .feedback_dir(feedback_dir), .res_valid(res_valid), .res(res));

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_true(input logic c, input string what);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    sums = '0; sample_valid = 0; sample_train = 0; sample_label = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int a = 0; a < 64; a++) begin
      #1 expect_true(init_en && !init_done && int'(init_addr) == a, "init walk");
      expect_true(feedback == '0 && !res_valid, "quiet during init");
      @(negedge clk);
    end
    #1 expect_true(!init_en && init_done, "init ends after 64 cycles");

    for (int n = 0; n < 400; n++) begin
      int best, bi;
      @(negedge clk);
      for (int c = 0; c < NC; c++) sums[c] = W'($urandom_range(60, 70));
      best = -1; bi = 0;
      for (int c = 0; c < NC; c++) if (int'(sums[c]) > best) begin best = int'(sums[c]); bi = c; end
      sample_label = (n % 3 == 0) ? 8'(bi) : 8'($urandom_range(0, NC-1));
      sample_train = (n % 5 != 4);
      sample_valid = 1;
      // cycle 0: sums captured; change them afterwards to show they were registered
      @(negedge clk);
      sums = '0;
      expect_true(!res_valid && feedback == '0, "nothing in cycle 1");
      @(negedge clk);
      // cycle 2: result and feedback
      expect_true(res_valid && sample_ack, "result 2 cycles after valid");
      expect_true(int'(res.pred) == bi, "prediction");
      expect_true(res.label == sample_label && res.train == sample_train, "result fields");
      expect_true(res.mistake == (bi != int'(sample_label)), "mistake flag");
      if (sample_train && bi != int'(sample_label)) begin
        logic [NC-1:0] ef, ed;
        ef = '0; ed = '0;
        ef[sample_label] = 1; ed[sample_label] = 1; ef[bi] = 1;
        expect_true(feedback == ef && feedback_dir == ed, "feedback pattern");
        n_fb++;
      end else begin
        expect_true(feedback == '0, "no feedback");
        if (!sample_train) n_infer++; else n_correct++;
      end
      @(posedge clk);
      #1 sample_valid = 0;
      @(negedge clk);
      expect_true(!res_valid && feedback == '0, "single cycle");
    end
    expect_true(n_fb > 0 && n_correct > 0 && n_infer > 0, "all cases seen");
    $display("feedback=%0d correct=%0d classify-only=%0d", n_fb, n_correct, n_infer);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
