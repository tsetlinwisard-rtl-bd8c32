// feature_map - fixed wiring of the Boolean feature vector onto the LUT address inputs.
//
// Input bit b of LUT l (overall input number p = l*LUT_INPUTS + b) is driven by feature
// tw_pkg::feature_index(p, N_FEATURES), a fixed pseudo-random scatter that is a permutation
// of the features on each pass over them; when N_LUTS*LUT_INPUTS exceeds N_FEATURES (900
// inputs for 784 features by default) later passes reuse features in a different order.  The
// same mapping feeds every discriminator.  Pure wiring, no logic and no timing of its own.
// A fixed random feature subset per LUT, shared by all discriminators, follows the WiSARD
// model in the paper; the scatter formula is this design's own.
module feature_map #(
  parameter int unsigned N_FEATURES = 784,
  parameter int unsigned N_LUTS     = 150,
  parameter int unsigned LUT_INPUTS = 6
) (
  input  logic [N_FEATURES-1:0]                 features,
  output logic [N_LUTS-1:0][LUT_INPUTS-1:0]     addr
);
  for (genvar l = 0; l < N_LUTS; l++) begin : g_lut
    for (genvar b = 0; b < LUT_INPUTS; b++) begin : g_bit
      localparam int unsigned FIDX = tw_pkg::feature_index(l * LUT_INPUTS + b, N_FEATURES);
      assign addr[l][b] = features[FIDX];
    end
  end
endmodule
