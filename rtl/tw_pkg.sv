// tw_pkg - constants and elaboration-time functions shared by the TsetlinWiSARD core.
//
// The default sizes are those of the TsetlinWiSARD-150 configuration: 10 discriminators
// (one per class), 150 LUTs per discriminator, 6 inputs per LUT, 32 Tsetlin automaton (TA)
// states and 784 Boolean input features (a thresholded 28x28 image).  A 2N-state TA is held
// in log2(N)+1 bits, so 32 states take 5 bits.
//
// Two functions fix the wiring and the random seeds:
//  * feature_index(p) gives the feature that drives LUT input p = lut*LUT_INPUTS + bit.  The
//    mapping is a fixed pseudo-random scatter, (MAP_A*(p mod F) + MAP_B*(p div F) + MAP_C)
//    mod F, a permutation of the features for each pass over them.  The idea of a fixed random
//    mapping shared by all discriminators follows the WiSARD model; the formula is this
//    design's own.
//  * lfsr_seed(d, j) gives the distinct non-zero seed of LFSR j of discriminator d.
//  * lfsr_taps(w) gives maximal-length feedback taps for a few LFSR widths.
package tw_pkg;

  localparam int unsigned N_CLASSES_DEF  = 10;
  localparam int unsigned N_LUTS_DEF     = 150;
  localparam int unsigned LUT_INPUTS_DEF = 6;
  localparam int unsigned TA_STATES_DEF  = 32;   // 2N
  localparam int unsigned STATE_BITS_DEF = $clog2(TA_STATES_DEF);  // log2(N)+1 = 5
  localparam int unsigned N_FEATURES_DEF = 784;
  localparam int unsigned LFSR_W_DEF     = 32;

  // Constants of the feature scatter.  MAP_A must be coprime with the feature count.
  localparam int unsigned MAP_A = 263;
  localparam int unsigned MAP_B = 97;
  localparam int unsigned MAP_C = 11;

  function automatic int unsigned feature_index(input int unsigned p, input int unsigned n_features);
    int unsigned q, r;
    q = p / n_features;
    r = p % n_features;
    return (MAP_A * r + MAP_B * q + MAP_C) % n_features;
  endfunction

  function automatic logic [31:0] lfsr_seed(input int unsigned disc, input int unsigned idx,
                                            input int unsigned width);
    logic [31:0] s, m;
    s = 32'hACE1_2D5B ^ (32'(disc) * 32'h9E37_79B9) ^ (32'(idx + 1) * 32'h85EB_CA6B);
    m = (width >= 32) ? 32'hFFFF_FFFF : ((32'd1 << width) - 32'd1);
    s = s & m;
    if (s == 32'd0) s = 32'd1;
    return s;
  endfunction

  // Tap masks (bit i set = stage i+1 is a tap) of maximal-length Fibonacci LFSRs.
  function automatic logic [31:0] lfsr_taps(input int unsigned width);
    case (width)
      8:       return 32'h0000_00B8;   // 8,6,5,4
      16:      return 32'h0000_B400;   // 16,14,13,11
      24:      return 32'h00E1_0000;   // 24,23,22,17
      default: return 32'h8020_0003;   // 32,22,2,1
    endcase
  endfunction

  // Result of one sample, as reported to the host.
  typedef struct packed {
    logic       train;     // sample was a training sample
    logic       mistake;   // predicted class differs from the label
    logic [7:0] label;     // true class
    logic [7:0] pred;      // predicted class
  } result_t;

endpackage
