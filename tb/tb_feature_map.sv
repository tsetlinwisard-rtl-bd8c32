// tb_feature_map - self-checking test of the feature-to-LUT wiring at its default size.
// For random feature vectors every LUT address bit is compared with the feature given by
// the scatter formula (263*(p mod 784) + 97*(p div 784) + 11) mod 784, computed here.  Walking
// a single one through the features checks that the first 784 LUT inputs use each feature
// exactly once.
module tb_feature_map;
  localparam int F = 784, L = 150, LI = 6;
  logic [F-1:0]         features;
  logic [L-1:0][LI-1:0] addr;
  int checks = 0, failures = 0;

  feature_map #(.N_FEATURES(F), .N_LUTS(L), .LUT_INPUTS(LI)) dut (.features(features), .addr(addr));

  function automatic int ref_idx(int p);
    return (263 * (p % F) + 97 * (p / F) + 11) % F;
  endfunction

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 50; n++) begin
      for (int i = 0; i < F; i++) features[i] = 1'($urandom);
      #1;
      for (int p = 0; p < L * LI; p++) begin
        checks++;
        if (addr[p / LI][p % LI] !== features[ref_idx(p)]) begin
          failures++;
          if (failures < 10) $display("FAIL input %0d", p);
        end
      end
    end
    for (int f = 0; f < F; f += 7) begin
      int hits;
      features = '0;
      features[f] = 1'b1;
      #1;
      hits = 0;
      for (int p = 0; p < F; p++) if (addr[p / LI][p % LI]) hits++;
      checks++;
      if (hits != 1) begin failures++; $display("FAIL feature %0d used %0d times in first pass", f, hits); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
