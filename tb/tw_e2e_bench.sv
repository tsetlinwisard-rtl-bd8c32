// tw_e2e_bench - end-to-end bench of the TsetlinWiSARD core, shared by the reduced-size and
// full-size testbenches.  With FULL = 1 the core is instantiated with no parameter overrides
// (10 classes, 150 six-input LUTs per class, 32 TA states, 784 features); otherwise with the
// sizes given here.
//
// The testbench builds a synthetic task: 10 random 784-bit class prototypes, each sample a
// prototype with 8% of its bits flipped.  It streams frames over AXI4-Stream, trains for a
// few epochs, then classifies held-out samples with the classify-only flag.
//
// A reference model kept here mirrors the whole algorithm independently of the RTL: the
// feature scatter formula, the LFSR banks (seeds from tw_pkg::lfsr_seed, 32,22,2,1 feedback),
// the random start at state N or N+1, the vote count, first-maximum argmax and the training
// rule (on a mistake, increment the true class and decrement the predicted class, per LUT if
// its LFSR stage is 1, saturating at states 1 and 2N).  Every result must match the model's
// prediction exactly, arrive 3 cycles after the last beat of its frame, and the test
// accuracy after training must exceed MIN_ACC_PCT.
//
// Mechanisms counted (each must occur): TA initialisation, stream back-pressure, feedback
// steps, correct training samples without feedback, classify-only samples, argmax ties,
// a dropped short frame.  TA saturation is counted and reported.
//
// With STANDALONE = 0 the bench does not finish the simulation; it raises done and reports its
// counts on the ports, so that one testbench can run several sizes side by side.
module tw_e2e_bench #(
  parameter bit FULL = 1'b1,                       // 1: core at its default parameters
  parameter int NC   = tw_pkg::N_CLASSES_DEF,
  parameter int L    = tw_pkg::N_LUTS_DEF,
  parameter int LI   = tw_pkg::LUT_INPUTS_DEF,
  parameter int SB   = tw_pkg::STATE_BITS_DEF,
  parameter int F    = tw_pkg::N_FEATURES_DEF,
  parameter int MIN_ACC_PCT = 90,
  parameter bit STANDALONE  = 1'b1   // 1: print TB_RESULT and finish; 0: report on the ports
) (
  output bit done,
  output int checks_o,
  output int failures_o
);
  localparam int NS = 1 << (SB - 1);               // N
  localparam int LW = 32;
  localparam int NL = (L + LW - 1) / LW;
  localparam int NB = (F + 31) / 32;
  localparam int TRAIN_PER_CLASS = 12, EPOCHS = 4, TEST_PER_CLASS = 8;

  typedef struct {
    logic [F-1:0] f;
    logic [7:0]   label;
    logic         train;
  } sample_t;

  logic            clk = 0, rst_n = 0;
  logic [31:0]     tdata;
  logic            tvalid, tlast, tready;
  logic            init_done, frame_err, res_valid;
  tw_pkg::result_t res;

  if (FULL) begin : g_full
    tsetlin_wisard_top dut (
      .clk(clk), .rst_n(rst_n), .s_axis_tdata(tdata), .s_axis_tvalid(tvalid),
      .s_axis_tlast(tlast), .s_axis_tready(tready), .init_done(init_done),
      .frame_err(frame_err), .res_valid(res_valid), .res(res));
  end else begin : g_small
    tsetlin_wisard_top #(
      .N_CLASSES(NC), .N_LUTS(L), .LUT_INPUTS(LI), .STATE_BITS(SB), .N_FEATURES(F)
    ) dut (
      .clk(clk), .rst_n(rst_n), .s_axis_tdata(tdata), .s_axis_tvalid(tvalid),
      .s_axis_tlast(tlast), .s_axis_tready(tready), .init_done(init_done),
      .frame_err(frame_err), .res_valid(res_valid), .res(res));
  end

  always #5 clk = ~clk;

  // ---------------- reference model ----------------
  byte unsigned st [NC][L][1<<LI];   // TA states 1 .. 2N
  logic [NL*LW-1:0] rnd [NC];
  int map_idx [L*LI];

  function automatic void lfsr_adv(int d);
    for (int j = 0; j < NL; j++) begin
      logic [31:0] r;
      r = rnd[d][j*LW +: LW];
      rnd[d][j*LW +: LW] = {r[30:0], r[31] ^ r[21] ^ r[1] ^ r[0]};
    end
  endfunction

  function automatic int lut_addr(logic [F-1:0] f, int l);
    int a = 0;
    for (int b = 0; b < LI; b++) a |= int'(f[map_idx[l*LI + b]]) << b;
    return a;
  endfunction

  int n_sat = 0, n_ties = 0;

  function automatic int model_predict(logic [F-1:0] f);
    int best = -1, bi = 0, nbest = 0;
    int s [NC];
    for (int d = 0; d < NC; d++) begin
      s[d] = 0;
      for (int l = 0; l < L; l++) if (int'(st[d][l][lut_addr(f, l)]) > NS) s[d]++;
      if (s[d] > best) begin best = s[d]; bi = d; end
    end
    for (int d = 0; d < NC; d++) if (s[d] == best) nbest++;
    if (nbest > 1) n_ties++;
    return bi;
  endfunction

  function automatic void model_feedback(logic [F-1:0] f, int d, bit inc);
    for (int l = 0; l < L; l++) if (rnd[d][l]) begin
      int a = lut_addr(f, l);
      if (inc) begin
        if (int'(st[d][l][a]) == 2*NS) n_sat++; else st[d][l][a]++;
      end else begin
        if (int'(st[d][l][a]) == 1) n_sat++; else st[d][l][a]--;
      end
    end
    lfsr_adv(d);
  endfunction

  // ---------------- stimulus ----------------
  logic [F-1:0] proto [NC];
  sample_t      train_set [$], test_set [$];
  sample_t      expq [$];          // frames sent, awaiting results
  int           last_beat_cycle [$];
  int           cycle = 0;
  int checks = 0, failures = 0;
  int n_stall = 0, n_fb = 0, n_correct_train = 0, n_infer = 0, n_frame_err = 0;
  int test_right = 0, test_total = 0, epoch_err = 0;
  bit init_seen = 0;
  int init_cycles = -1, rst_cycle = 0;

  function automatic sample_t make_sample(int c, bit tr);
    sample_t s;
    s.f = proto[c];
    for (int i = 0; i < F; i++) if ($urandom_range(0, 99) < 8) s.f[i] = ~s.f[i];
    s.label = 8'(c);
    s.train = tr;
    return s;
  endfunction

  // Drive at the falling edge; tready only changes at rising edges, so seeing it high at
  // the falling edge means the beat is taken at the next rising edge.
  task automatic put_beat(input logic [31:0] d, input logic last, output int acc_cycle);
    @(negedge clk);
    tdata = d; tlast = last; tvalid = 1;
    while (!tready) @(negedge clk);
    acc_cycle = init_done ? cycle : -1;
    @(posedge clk);
    #1 tvalid = 0; tlast = 0;
  endtask

  task automatic send(input sample_t s);
    logic [NB*32-1:0] v;
    int acc;
    v = '0;
    v[F-1:0] = s.f;
    expq.push_back(s);
    put_beat({23'd0, s.train, s.label}, 1'b0, acc);
    for (int k = 0; k < NB; k++) put_beat(v[k*32 +: 32], k == NB - 1, acc);
    last_beat_cycle.push_back(acc);
  endtask

  task automatic expect_true(input logic c, input string what);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL %s at cycle %0d", what, cycle); end
  endtask

  // ---------------- monitor ----------------
  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (rst_n && tvalid && !tready) n_stall++;
    if (rst_n && frame_err) n_frame_err++;
    if (rst_n && init_done && !init_seen) begin init_seen = 1; init_cycles = cycle; end
    if (rst_n && res_valid) begin
      sample_t s;
      int p, lb;
      if (expq.size() == 0) begin
        expect_true(0, "unexpected result");
      end else begin
        s  = expq.pop_front();
        lb = last_beat_cycle.pop_front();
        p  = model_predict(s.f);
        expect_true(int'(res.pred) == p, "prediction matches model");
        expect_true(res.label == s.label && res.train == s.train, "result header");
        expect_true(res.mistake == (p != int'(s.label)), "mistake flag");
        if (lb >= 0) expect_true(cycle - lb == 3, "latency 3 cycles after last beat");
        if (s.train) begin
          if (p != int'(s.label)) begin
            model_feedback(s.f, int'(s.label), 1);
            model_feedback(s.f, p, 0);
            n_fb++;
            epoch_err++;
          end else n_correct_train++;
        end else begin
          n_infer++;
          test_total++;
          if (p == int'(s.label)) test_right++;
        end
      end
    end
  end

  initial begin
    repeat (400000) @(posedge clk);
    if (STANDALONE) begin
      failures++;
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end

  assign checks_o   = checks;
  assign failures_o = failures;

  initial begin
    int acc;
    tvalid = 0; tlast = 0; tdata = 0;
    for (int p = 0; p < L * LI; p++) map_idx[p] = (263 * (p % F) + 97 * (p / F) + 11) % F;
    for (int d = 0; d < NC; d++)
      for (int j = 0; j < NL; j++) rnd[d][j*LW +: LW] = tw_pkg::lfsr_seed(d, j, LW);
    // model of the initialisation walk
    for (int a = 0; a < (1<<LI); a++)
      for (int d = 0; d < NC; d++) begin
        for (int l = 0; l < L; l++) st[d][l][a] = rnd[d][l] ? byte'(NS + 1) : byte'(NS);
        lfsr_adv(d);
      end
    for (int c = 0; c < NC; c++)
      for (int i = 0; i < F; i++) proto[c][i] = 1'($urandom);
    for (int k = 0; k < TRAIN_PER_CLASS; k++)
      for (int c = 0; c < NC; c++) train_set.push_back(make_sample(c, 1));
    for (int k = 0; k < TEST_PER_CLASS; k++)
      for (int c = 0; c < NC; c++) test_set.push_back(make_sample(c, 0));

    repeat (3) @(negedge clk);
    rst_n = 1;
    rst_cycle = cycle;
    // a header-only frame during initialisation: dropped with frame_err
    put_beat(32'h0000_0101, 1'b1, acc);
    // 30 random vectors classified by the untrained core (the first one is accepted while
    // the TAs are still being initialised); with every TA next to the boundary, vote ties
    // are common here
    for (int k = 0; k < 30; k++) begin
      sample_t s;
      for (int i = 0; i < F; i++) s.f[i] = 1'($urandom);
      s.label = 8'(k % NC);
      s.train = 1'b0;
      send(s);
    end
    while (expq.size() != 0) @(posedge clk);
    test_right = 0;
    test_total = 0;
    for (int e = 0; e < EPOCHS; e++) begin
      epoch_err = 0;
      foreach (train_set[i]) send(train_set[i]);
      while (expq.size() != 0) @(posedge clk);
      $display("epoch %0d: %0d training mistakes of %0d", e, epoch_err, train_set.size());
    end
    foreach (test_set[i]) send(test_set[i]);
    while (expq.size() != 0) @(posedge clk);
    repeat (5) @(posedge clk);

    $display("test accuracy %0d/%0d", test_right, test_total);
    expect_true(test_right * 100 > test_total * MIN_ACC_PCT, "test accuracy above threshold");
    expect_true(init_seen && init_cycles - rst_cycle == (1 << LI), "initialisation took 2^LUT_INPUTS cycles");
    expect_true(n_stall > 0, "back-pressure seen");
    expect_true(n_fb > 0, "feedback steps seen");
    expect_true(n_correct_train > 0, "correct training samples seen");
    expect_true(n_infer == test_total + 30 && test_total > 0, "classify-only samples seen");
    expect_true(n_ties > 0, "argmax ties seen");
    expect_true(n_frame_err == 1, "short frame flagged");
    $display("init=%0d cycles stalls=%0d feedback=%0d correct=%0d classify=%0d ties=%0d frame_err=%0d saturations=%0d",
             init_cycles - rst_cycle, n_stall, n_fb, n_correct_train, n_infer, n_ties, n_frame_err, n_sat);
    if (STANDALONE) begin
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
    done = 1'b1;
  end
endmodule
