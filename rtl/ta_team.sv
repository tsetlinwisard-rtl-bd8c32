// ta_team - one WiSARD LUT together with the Tsetlin automata (TAs) that learn its contents.
//
// A LUT with LUT_INPUTS address bits has 2^LUT_INPUTS entries and one TA per entry.  A TA with
// 2N states is stored as the binary number state-1 (0 .. 2N-1) across STATE_BITS = log2(N)+1
// one-bit LUTRAMs that all share the LUT's address.  The LUT output is the MSB of the
// addressed state: 0 for states 1..N, 1 for states N+1..2N.
//
// Each LUTRAM bit is paired with a full adder; chained, they add +1 (feedback_dir = 1) or -1
// (feedback_dir = 0, all-ones operand) to the addressed state.  The carry out of the chain
// tells when the step would leave the state range: a TA at state 2N is not incremented and a TA
// at state 1 is not decremented, so it stays in its end state.
//
// Interface and timing (all writes on the rising edge of clk):
//   addr          LUT address; out follows it combinationally (asynchronous LUTRAM read).
//   feedback_en   this LUT's TA at addr takes one step in direction feedback_dir.
//   init_en       overrides feedback: the TA at addr is written with state N+1 if init_hi,
//                 else state N (the random start near the decision boundary).
// LUTRAMs, full-adder ripple chain, feedback_en and MSB-as-output follow the paper; the
// saturation through the carry out and the init port are this design's own choices.
module ta_team #(
  parameter int unsigned LUT_INPUTS = 6,
  parameter int unsigned STATE_BITS = 5
) (
  input  logic                  clk,
  input  logic [LUT_INPUTS-1:0] addr,
  input  logic                  feedback_en,
  input  logic                  feedback_dir,  // 1 = increment, 0 = decrement
  input  logic                  init_en,
  input  logic                  init_hi,
  output logic                  out
);
  logic [STATE_BITS-1:0] state_rd;   // addressed TA state (state - 1)
  logic [STATE_BITS-1:0] state_nx;   // state_rd +/- 1
  logic [STATE_BITS:0]   carry;
  logic [STATE_BITS-1:0] wdata;
  logic                  in_range;
  logic                  we;

  // -1 is added as the all-ones operand with carry-in 0, +1 as zero with carry-in 1.
  assign carry[0] = feedback_dir;

  for (genvar b = 0; b < STATE_BITS; b++) begin : g_bit
    lutram64x1 #(.ADDR_W(LUT_INPUTS)) u_ram (
      .clk (clk),
      .we  (we),
      .a   (addr),
      .d   (wdata[b]),
      .o   (state_rd[b])
    );
    full_adder u_fa (
      .a    (state_rd[b]),
      .b    (~feedback_dir),
      .cin  (carry[b]),
      .s    (state_nx[b]),
      .cout (carry[b+1])
    );
  end

  // Increment overflows (carry out 1) only from the top state; decrement borrows (carry out 0)
  // only from the bottom state.
  assign in_range = feedback_dir ? ~carry[STATE_BITS] : carry[STATE_BITS];

  localparam logic [STATE_BITS-1:0] STATE_N  = {1'b0, {(STATE_BITS-1){1'b1}}};  // state N
  localparam logic [STATE_BITS-1:0] STATE_N1 = {1'b1, {(STATE_BITS-1){1'b0}}};  // state N+1

  always_comb begin
    if (init_en) begin
      wdata = init_hi ? STATE_N1 : STATE_N;
      we    = 1'b1;
    end else begin
      wdata = state_nx;
      we    = feedback_en & in_range;
    end
  end

  assign out = state_rd[STATE_BITS-1];
endmodule
