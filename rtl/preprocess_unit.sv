// preprocess_unit: turns the Stage-1 statistics into the parameters of Stage 2.
//
// From the mean E(x) (MEAN_FRAC fraction bits) and E(x^2) (VAR_FRAC = 2*MEAN_FRAC fraction
// bits) it forms the variance E(x^2) - E(x)^2, clamps a negative value (possible because
// E(x^2) is computed from compressed inputs) to zero, and feeds it to the x^-0.5 table.
// Outputs: the mean, passed on unchanged, and 1/sigma with STD_FRAC fraction bits. The
// square-subtract-x^-0.5 structure follows the source; the clamp and the formats are this
// design's. Combinational; the enclosing unit registers the results.
module preprocess_unit
  import sole_pkg::*;
(
  input  logic signed [MEAN_W-1:0] mean_i,
  input  logic [VAR_W-1:0]         ex2,
  output logic signed [MEAN_W-1:0] mean_o,
  output logic [STD_W-1:0]         std_inv
);
  logic signed [2*MEAN_W-1:0] msq;
  logic signed [VAR_W+1:0]    var_s;
  logic [VAR_W-1:0]           var_u;

  always_comb begin
    msq    = mean_i * mean_i;                       // E(x)^2, VAR_FRAC fraction bits
    var_s  = $signed({2'b00, ex2}) - (VAR_W+2)'(msq);
    var_u  = var_s[VAR_W+1] ? '0 : var_s[VAR_W-1:0];
    mean_o = mean_i;
  end

  rsqrt_lut u_rsqrt (.v(var_u), .r(std_inv));
endmodule
