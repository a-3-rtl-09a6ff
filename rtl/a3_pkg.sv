// a3_pkg: sizes, number formats and shared types of the attention accelerator.
//
// Every vector element (key, value, query) is a signed fixed-point number with
// I_BITS integer bits, F_BITS fraction bits and a sign bit (Q4.4 in 9 bits by
// default). Each later pipeline value gets the width it needs so that nothing
// overflows and no precision is lost:
//   product     key*query           2f fraction bits   PROD_W  = 2*DATA_W
//   dot product sum of d products   2f fraction bits   DP_W    = PROD_W + log2(d)
//   difference  max - dot product   one more bit       DIFF_W  = DP_W + 1
//   score       exp(-difference)    2f fraction bits   SCORE_W = 2f + 1 (holds 1.0)
//   expsum      sum of n scores     2f fraction bits   + log2(n) integer bits
//   weight      score / expsum      2f fraction bits   WEIGHT_W = 2f + 1
//   output      sum weight*value    3f fraction bits   1 + i + log2(n) + 3f
// The widths follow the bit-width rules of the design; the extra integer bit of
// SCORE_W and WEIGHT_W (so that exp(0) = 1.0 is exact) is this design's choice.
package a3_pkg;

  // Main configuration: n = 320 rows, d = 64 dimensions, i = 4, f = 4.
  parameter int N_ROWS  = 320;
  parameter int D_DIM   = 64;
  parameter int I_BITS  = 4;
  parameter int F_BITS  = 4;

  parameter int DATA_W   = 1 + I_BITS + F_BITS;
  parameter int PROD_W   = 2 * DATA_W;
  parameter int SCORE_W  = 2 * F_BITS + 1;
  parameter int WEIGHT_W = 2 * F_BITS + 1;
  // Input of the exponent tables: 16 bits, 8 integer and 8 fraction bits.
  parameter int EXP_IN_W = 16;

  // Candidate selection: depth of each component multiplication queue (c = 4).
  parameter int CMB_DEPTH = 4;
  // Entries examined per cycle by the greedy-score scan and the post-scoring selector.
  parameter int SCAN_W = 16;
  // Pipeline depth of the softmax divider.
  parameter int DIV_STAGES = 7;

  typedef logic signed [DATA_W-1:0] elem_t;
  typedef logic signed [PROD_W-1:0] prod_t;

  function automatic int dp_w(input int d);
    return PROD_W + $clog2(d);
  endfunction

  function automatic int expsum_w(input int n);
    return SCORE_W + $clog2(n);
  endfunction

  function automatic int out_w(input int n);
    return 1 + I_BITS + $clog2(n) + 3 * F_BITS;
  endfunction

  function automatic int gs_w(input int n);
    return PROD_W + $clog2(n) + 1;
  endfunction

endpackage
