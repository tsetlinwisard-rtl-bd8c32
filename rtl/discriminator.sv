// discriminator - the learning elements of one class: N_LUTS TA teams, their LFSRs and the
// popcount of their outputs.
//
// Every TA team sees its own address from the feature map and drives one vote; sum is the
// number of votes (combinational from addr).  A feedback step is requested for the whole
// discriminator with feedback (and feedback_dir: 1 = increment, 0 = decrement), and LUT i
// takes the step only if stage i of the discriminator's LFSR bank is 1, so each LUT decides
// independently with probability about 0.5.  ceil(N_LUTS/LFSR_W) LFSRs of LFSR_W stages
// form the bank, each with its own seed from tw_pkg::lfsr_seed(DISC_ID, j).  During init_en
// the same bits choose state N+1 (bit 1) or N (bit 0) for the TA being initialised.
// The bank advances by one shift after every feedback or init cycle, so each step draws
// fresh bits.  Writes take effect on the rising edge of clk.
// Shared feedback/feedback_dir controls, one LFSR stage per LUT and unique seeds follow the
// paper; the LFSR width, seeds and when the bank advances are this design's choices.
// With 150 LUTs the bank has 160 stages; the 10 spare stages are left unused.
module discriminator #(
  parameter int unsigned N_LUTS     = 150,
  parameter int unsigned LUT_INPUTS = 6,
  parameter int unsigned STATE_BITS = 5,
  parameter int unsigned LFSR_W     = 32,
  parameter int unsigned DISC_ID    = 0,
  localparam int unsigned SUM_W     = $clog2(N_LUTS + 1)
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic [N_LUTS-1:0][LUT_INPUTS-1:0] addr,
  input  logic                              feedback,
  input  logic                              feedback_dir,
  input  logic                              init_en,
  output logic [SUM_W-1:0]                  sum
);
  localparam int unsigned N_LFSR = (N_LUTS + LFSR_W - 1) / LFSR_W;

  logic [N_LFSR*LFSR_W-1:0] rnd;
  logic [N_LUTS-1:0]        votes;
  logic                     step;

  assign step = feedback | init_en;

  for (genvar j = 0; j < N_LFSR; j++) begin : g_lfsr
    localparam logic [31:0] SEED32 = tw_pkg::lfsr_seed(DISC_ID, j, LFSR_W);
    lfsr #(
      .WIDTH (LFSR_W),
      .SEED  (SEED32[LFSR_W-1:0])
    ) u_lfsr (
      .clk   (clk),
      .rst_n (rst_n),
      .step  (step),
      .q     (rnd[j*LFSR_W +: LFSR_W])
    );
  end

  for (genvar i = 0; i < N_LUTS; i++) begin : g_team
    ta_team #(
      .LUT_INPUTS (LUT_INPUTS),
      .STATE_BITS (STATE_BITS)
    ) u_team (
      .clk          (clk),
      .addr         (addr[i]),
      .feedback_en  (feedback & rnd[i]),
      .feedback_dir (feedback_dir),
      .init_en      (init_en),
      .init_hi      (rnd[i]),
      .out          (votes[i])
    );
  end

  popcount #(.N(N_LUTS)) u_pop (
    .in    (votes),
    .count (sum)
  );
endmodule
