// affine_unit: Affine Unit of AILayerNorm, y = (gamma * std_inv) * ((X - zp) << alpha - mean) + beta.
//
// Per lane, the first multiplier forms A = gamma * 1/sigma, the input is re-scaled by its
// power-of-two factor and the mean subtracted, the second multiplier forms A * X', and
// beta is added. Normalisation and the affine rescale are thus fused into two multiplies and
// two adds, as in the source. Formats are this design's: gamma is signed Q1.6, beta and the
// output are signed Q3.4 (LN_OUT_FRAC), mean has MEAN_FRAC and 1/sigma STD_FRAC fraction
// bits. The product is rounded half up and the sum saturated to int8. Combinational.
module affine_unit
  import sole_pkg::*;
#(
  parameter int unsigned LANES = SOLE_LANES
) (
  input  logic signed [DIFF_W-1:0] d     [LANES],  // X - zp
  input  logic [ALPHA_W-1:0]       alpha [LANES],
  input  logic signed [MEAN_W-1:0] mean,
  input  logic [STD_W-1:0]         std_inv,
  input  logic signed [7:0]        gamma [LANES],
  input  logic signed [7:0]        beta  [LANES],
  output logic signed [7:0]        y     [LANES]
);
  localparam int unsigned AW  = 8 + STD_W + 1;                    // A = gamma * std
  localparam int unsigned XW  = MEAN_W + 2;                       // X' with MEAN_FRAC
  localparam int unsigned PRW = AW + XW;
  localparam int unsigned SH  = GAMMA_FRAC + STD_FRAC + MEAN_FRAC - LN_OUT_FRAC;

  for (genvar g = 0; g < LANES; g++) begin : g_lane
    logic signed [AW-1:0]  a;
    logic signed [XW-1:0]  xs;
    logic signed [PRW-1:0] pr;
    logic signed [PRW-SH:0] q;
    always_comb begin
      a  = AW'(gamma[g]) * $signed({1'b0, std_inv});
      xs = ((XW'(d[g]) <<< alpha[g]) <<< MEAN_FRAC) - XW'(mean);
      pr = PRW'(a) * PRW'(xs);
      q  = (PRW-SH+1)'((pr + (PRW'(1) <<< (SH - 1))) >>> SH) + (PRW-SH+1)'(beta[g]);
      if (q > 127)       y[g] = 8'sd127;
      else if (q < -128) y[g] = -8'sd128;
      else               y[g] = q[7:0];
    end
  end
endmodule
