// sole_pkg: constants shared by the SOLE Softmax and LayerNorm units.
//
// The vector width of 32 lanes and the maximum Softmax vector length of 1024 are the
// published configuration. The fixed-point formats (Q4.4 Softmax input, 15-bit fraction
// of the reduced sum, 20-bit 1/n, the statistic fractions) are this design's own choice:
// the source leaves them open.
package sole_pkg;
  // datapath width: one slice of 32 elements per cycle
  localparam int unsigned SOLE_LANES   = 32;
  // longest Softmax vector (and widest LayerNorm channel count) held by a buffer bank
  localparam int unsigned SOLE_MAX_LEN = 1024;

  // ---- E2Softmax ----
  localparam int unsigned SM_IN_W    = 8;   // signed input
  localparam int unsigned SM_IN_FRAC = 4;   // Q4.4
  localparam int unsigned EXP_W      = 4;   // log2-quantised exponent
  localparam int unsigned SUM_FRAC   = 15;  // 2^-15 is the smallest term
  localparam int unsigned SUM_W      = 26;  // 11 integer bits (sum <= 1024) + 15 fraction
  localparam int unsigned SM_OUT_W   = 8;   // unsigned Q0.8 output

  // ---- AILayerNorm ----
  localparam int unsigned LN_IN_W    = 8;   // unsigned quantised input
  localparam int unsigned ALPHA_W    = 2;   // power-of-two factor 0..3
  localparam int unsigned DIFF_W     = 9;   // X - zp, signed
  localparam int unsigned INV_W      = 20;  // fraction bits of 1/n
  localparam int unsigned MEAN_FRAC  = 4;   // fraction bits of the mean
  localparam int unsigned VAR_FRAC   = 8;   // fraction bits of E(x^2) and the variance
  localparam int unsigned STD_FRAC   = 16;  // fraction bits of 1/sigma
  localparam int unsigned STD_W      = 24;
  localparam int unsigned MEAN_W     = 18;  // signed, |mean| <= 2040, 4 fraction bits
  localparam int unsigned VAR_W      = 32;  // E(x^2) <= 2^22, 8 fraction bits
  localparam int unsigned GAMMA_FRAC = 6;   // gamma is Q1.6
  localparam int unsigned LN_OUT_FRAC= 4;   // beta and the output are Q3.4

  // Softmax divider constants (1.636 - 0.5 s)/2 in Q0.8: 0.818 and 0.568
  localparam logic [7:0] DIV_C0 = 8'd209;
  localparam logic [7:0] DIV_C1 = 8'd145;
endpackage
