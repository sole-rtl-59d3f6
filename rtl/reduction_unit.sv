// reduction_unit: sum over one slice of 2^-k, the de-quantised Log2Exp outputs.
//
// Each valid lane contributes the one-hot word 1 << (SUM_FRAC - k); with SUM_FRAC = 15
// every term 2^-k (k <= 15) is exact, so the adder tree introduces no rounding. The output
// has SUM_FRAC fraction bits and is at most LANES. The source gives only the function
// (Algorithm: Sum += 2^-Y); the fixed-point format is this design's. Combinational.
module reduction_unit #(
  parameter int unsigned LANES    = 32,
  parameter int unsigned KW       = 4,
  parameter int unsigned SUM_FRAC = 15,
  parameter int unsigned OW       = SUM_FRAC + 1 + $clog2(LANES)
) (
  input  logic [KW-1:0]    k [LANES],
  input  logic [LANES-1:0] mask,
  output logic [OW-1:0]    sum_o
);
  always_comb begin
    sum_o = '0;
    for (int i = 0; i < LANES; i++)
      if (mask[i]) sum_o = sum_o + (OW'(1) << (SUM_FRAC - int'(k[i])));
  end
endmodule
