// tsetlin_wisard_top - TsetlinWiSARD on-chip training core (default: TsetlinWiSARD-150).
//
// A WiSARD classifier whose LUT contents are learnt on chip by Tsetlin automata.  Samples
// (Boolean feature vectors with a label and a train/classify flag) arrive over an AXI4-Stream
// slave into a single sample buffer (sample_rx).  The fixed feature map (feature_map) turns the
// buffered vector into one address per LUT, shared by all N_CLASSES discriminators.  Each
// discriminator holds N_LUTS TA teams (LUT + automata in LUTRAMs) and counts their votes; the
// controller (train_ctrl) takes the argmax as the prediction and, for a misclassified training
// sample, increments the addressed TAs of the true class and decrements those of the predicted
// class, each LUT with probability about 0.5 from its LFSR stage.
//
// During the TA initialisation after reset the controller's init_addr replaces the mapped
// addresses for every LUT, and init_done stays low; samples wait in the stream meanwhile.
//
// Timing: a frame is 1 + ceil(N_FEATURES/32) beats (26 by default).  The result pulses on
// res_valid 3 cycles after the last beat is accepted (buffer full, then sums, argmax, feedback),
// and the stream is back-pressured for those cycles.  Initialisation takes 2^LUT_INPUTS cycles.
// The block structure follows the paper; the stream format, schedule and result port are this
// design's choices (see the submodules).
module tsetlin_wisard_top #(
  parameter int unsigned N_CLASSES  = tw_pkg::N_CLASSES_DEF,
  parameter int unsigned N_LUTS     = tw_pkg::N_LUTS_DEF,
  parameter int unsigned LUT_INPUTS = tw_pkg::LUT_INPUTS_DEF,
  parameter int unsigned STATE_BITS = tw_pkg::STATE_BITS_DEF,
  parameter int unsigned N_FEATURES = tw_pkg::N_FEATURES_DEF,
  parameter int unsigned LFSR_W     = tw_pkg::LFSR_W_DEF
) (
  input  logic            clk,
  input  logic            rst_n,
  // AXI4-Stream slave: samples from the host
  input  logic [31:0]     s_axis_tdata,
  input  logic            s_axis_tvalid,
  input  logic            s_axis_tlast,
  output logic            s_axis_tready,
  // status and results
  output logic            init_done,
  output logic            frame_err,
  output logic            res_valid,
  output tw_pkg::result_t res
);
  localparam int unsigned SUM_W = $clog2(N_LUTS + 1);

  logic                              sample_valid, sample_ack, sample_train;
  logic [7:0]                        sample_label;
  logic [N_FEATURES-1:0]             features;
  logic [N_LUTS-1:0][LUT_INPUTS-1:0] map_addr, lut_addr;
  logic                              init_en;
  logic [LUT_INPUTS-1:0]             init_addr;
  logic [N_CLASSES-1:0]              feedback, feedback_dir;
  logic [N_CLASSES-1:0][SUM_W-1:0]   sums;

  sample_rx #(.N_FEATURES(N_FEATURES)) u_rx (
    .clk           (clk),
    .rst_n         (rst_n),
    .s_axis_tdata  (s_axis_tdata),
    .s_axis_tvalid (s_axis_tvalid),
    .s_axis_tlast  (s_axis_tlast),
    .s_axis_tready (s_axis_tready),
    .sample_valid  (sample_valid),
    .features      (features),
    .label         (sample_label),
    .train         (sample_train),
    .sample_ack    (sample_ack),
    .frame_err     (frame_err)
  );

  feature_map #(
    .N_FEATURES (N_FEATURES),
    .N_LUTS     (N_LUTS),
    .LUT_INPUTS (LUT_INPUTS)
  ) u_map (
    .features (features),
    .addr     (map_addr)
  );

  always_comb begin
    for (int l = 0; l < N_LUTS; l++) lut_addr[l] = init_en ? init_addr : map_addr[l];
  end

  for (genvar c = 0; c < N_CLASSES; c++) begin : g_disc
    discriminator #(
      .N_LUTS     (N_LUTS),
      .LUT_INPUTS (LUT_INPUTS),
      .STATE_BITS (STATE_BITS),
      .LFSR_W     (LFSR_W),
      .DISC_ID    (c)
    ) u_disc (
      .clk          (clk),
      .rst_n        (rst_n),
      .addr         (lut_addr),
      .feedback     (feedback[c]),
      .feedback_dir (feedback_dir[c]),
      .init_en      (init_en),
      .sum          (sums[c])
    );
  end

  train_ctrl #(
    .N_CLASSES  (N_CLASSES),
    .SUM_W      (SUM_W),
    .LUT_INPUTS (LUT_INPUTS)
  ) u_ctrl (
    .clk          (clk),
    .rst_n        (rst_n),
    .sums         (sums),
    .sample_valid (sample_valid & init_done),
    .sample_label (sample_label),
    .sample_train (sample_train),
    .sample_ack   (sample_ack),
    .init_en      (init_en),
    .init_addr    (init_addr),
    .init_done    (init_done),
    .feedback     (feedback),
    .feedback_dir (feedback_dir),
    .res_valid    (res_valid),
    .res          (res)
  );
endmodule
