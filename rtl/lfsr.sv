// lfsr - free-standing Fibonacci linear feedback shift register used as a bank of random bits.
//
// Each of the WIDTH stages is one pseudo-random bit with probability about 0.5 of being 1; the
// discriminator uses stage i to decide independently whether LUT i takes part in a feedback
// step.  The register loads SEED on reset and advances by one shift on every clock edge where
// step is high: q <= {q[WIDTH-2:0], xor of the tapped stages}.  Taps come from
// tw_pkg::lfsr_taps (maximal length, so a non-zero seed never reaches the all-zero state).
// A bitwise LFSR with a distinct seed per instance follows the paper; the width and taps are
// this design's choice.
module lfsr #(
  parameter int unsigned      WIDTH = 32,
  parameter logic [WIDTH-1:0] SEED  = WIDTH'(1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             step,
  output logic [WIDTH-1:0] q
);
  localparam logic [31:0] TAPS32 = tw_pkg::lfsr_taps(WIDTH);
  localparam logic [WIDTH-1:0] TAPS = TAPS32[WIDTH-1:0];

  initial assert (SEED != '0) else $error("lfsr: SEED must be non-zero");

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    q <= SEED;
    else if (step) q <= {q[WIDTH-2:0], ^(q & TAPS)};
  end
endmodule
