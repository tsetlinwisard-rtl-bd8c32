// argmax - index of the largest of N_CLASSES vote sums: the predicted class.
//
// Purely combinational.  On a tie the lowest class index wins (the paper does not say how ties
// are broken; this is this design's choice).  Also outputs the winning sum.
module argmax #(
  parameter int unsigned N_CLASSES = 10,
  parameter int unsigned SUM_W     = 8,
  localparam int unsigned IDX_W    = (N_CLASSES > 1) ? $clog2(N_CLASSES) : 1
) (
  input  logic [N_CLASSES-1:0][SUM_W-1:0] sums,
  output logic [IDX_W-1:0]                idx,
  output logic [SUM_W-1:0]                max_sum
);
  always_comb begin
    idx     = '0;
    max_sum = sums[0];
    for (int c = 1; c < N_CLASSES; c++) begin
      if (sums[c] > max_sum) begin
        idx     = IDX_W'(c);
        max_sum = sums[c];
      end
    end
  end
endmodule
