// train_ctrl - sequencer of the TsetlinWiSARD core: TA initialisation, classification and the
// feedback step of training.
//
// After reset it walks init_addr over all 2^LUT_INPUTS LUT addresses with init_en high, one
// address per cycle, so that every TA of every LUT is written with state N or N+1 (chosen by
// the discriminators' LFSRs).  Then, for each sample offered on sample_valid:
//   cycle 0 (IDLE)  the vote sums of all discriminators (combinational from the sample) are
//                   registered;
//   cycle 1 (ARG)   argmax of the registered sums gives the predicted class y_hat, registered;
//   cycle 2 (FB)    if the sample is a training sample and y_hat differs from the label y,
//                   discriminator y gets feedback with feedback_dir = 1 (increment) and
//                   discriminator y_hat gets feedback with feedback_dir = 0 (decrement); all
//                   other discriminators, and every discriminator when y_hat = y, are left
//                   alone.  In the same cycle res_valid pulses with the result and sample_ack
//                   releases the sample buffer.
// So a sample occupies the core for 3 cycles.  The feedback rule follows the paper; the cycle
// schedule, the initialisation walk and the result format are this design's choices.
// The winning vote sum from the argmax is not needed here and is left unused.
module train_ctrl #(
  parameter int unsigned N_CLASSES  = 10,
  parameter int unsigned SUM_W      = 8,
  parameter int unsigned LUT_INPUTS = 6,
  localparam int unsigned IDX_W     = (N_CLASSES > 1) ? $clog2(N_CLASSES) : 1
) (
  input  logic                            clk,
  input  logic                            rst_n,
  // vote sums from the discriminators
  input  logic [N_CLASSES-1:0][SUM_W-1:0] sums,
  // sample buffer
  input  logic                            sample_valid,
  input  logic [7:0]                      sample_label,
  input  logic                            sample_train,
  output logic                            sample_ack,
  // TA initialisation
  output logic                            init_en,
  output logic [LUT_INPUTS-1:0]           init_addr,
  output logic                            init_done,
  // feedback to the discriminators
  output logic [N_CLASSES-1:0]            feedback,
  output logic [N_CLASSES-1:0]            feedback_dir,
  // result
  output logic                            res_valid,
  output tw_pkg::result_t                 res
);
  typedef enum logic [1:0] {S_INIT, S_IDLE, S_ARG, S_FB} state_e;

  state_e                          state;
  logic [N_CLASSES-1:0][SUM_W-1:0] sums_q;
  logic [IDX_W-1:0]                pred_c;
  logic [SUM_W-1:0]                max_c;
  logic [7:0]                      pred_q;
  logic                            mistake;

  argmax #(.N_CLASSES(N_CLASSES), .SUM_W(SUM_W)) u_argmax (
    .sums    (sums_q),
    .idx     (pred_c),
    .max_sum (max_c)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_INIT;
      init_addr <= '0;
      sums_q    <= '0;
      pred_q    <= '0;
    end else begin
      case (state)
        S_INIT: begin
          init_addr <= init_addr + 1'b1;
          if (&init_addr) state <= S_IDLE;
        end
        S_IDLE: if (sample_valid) begin
          sums_q <= sums;
          state  <= S_ARG;
        end
        S_ARG: begin
          pred_q <= 8'(pred_c);
          state  <= S_FB;
        end
        S_FB:    state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  assign mistake   = (pred_q != sample_label);
  assign init_en   = (state == S_INIT);
  assign init_done = (state != S_INIT);

  always_comb begin
    feedback     = '0;
    feedback_dir = '0;
    if (state == S_FB && sample_train && mistake) begin
      for (int c = 0; c < N_CLASSES; c++) begin
        if (8'(c) == sample_label) begin
          feedback[c]     = 1'b1;
          feedback_dir[c] = 1'b1;
        end
        if (8'(c) == pred_q) feedback[c] = 1'b1;
      end
    end
  end

  assign sample_ack  = (state == S_FB);
  assign res_valid   = (state == S_FB);
  assign res.train   = sample_train;
  assign res.mistake = mistake;
  assign res.label   = sample_label;
  assign res.pred    = pred_q;

  // The sample must stay in the buffer until it is acknowledged.
  assert property (@(posedge clk) disable iff (!rst_n)
                   (state inside {S_ARG, S_FB}) |-> sample_valid)
    else $error("train_ctrl: sample withdrawn before acknowledge");
  // The two discriminators of a feedback step are distinct.
  assert property (@(posedge clk) disable iff (!rst_n)
                   $countones(feedback) inside {0, 2, 1})
    else $error("train_ctrl: feedback to more than two discriminators");
endmodule
