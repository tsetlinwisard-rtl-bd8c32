// popcount - number of ones in an N-bit vector: the vote sum of a discriminator.
//
// Purely combinational; the output is $clog2(N+1) bits wide.  The paper names a popcount
// stage; the plain adder loop (left to synthesis to shape into a tree) is this design's choice.
module popcount #(
  parameter int unsigned N = 150,
  localparam int unsigned W = $clog2(N + 1)
) (
  input  logic [N-1:0] in,
  output logic [W-1:0] count
);
  always_comb begin
    count = '0;
    for (int i = 0; i < N; i++) count += W'(in[i]);
  end
endmodule
