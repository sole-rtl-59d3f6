// ex_unit: Ex Unit of the AILayerNorm statistics, mean = (1/n) * sum((X - zp) << alpha).
//
// Each lane scales its zero-point-corrected input by its power-of-two factor, giving a
// 12-bit signed term (|X - zp| <= 255, alpha <= 3). The lane terms are added and
// accumulated over the slices of one token: on a beat with `first` the accumulator loads
// the slice sum, otherwise it adds it. The mean is the accumulator times the 1/n input,
// with MEAN_FRAC fraction bits (floor). The shift, the 12-bit terms, the accumulator and the
// 1/n multiplier follow the source; widths and formats are this design's.
// Timing: the accumulator updates on the clock edge of an enabled beat; `mean` is
// combinational from the accumulator and inv_n.
module ex_unit
  import sole_pkg::*;
#(
  parameter int unsigned LANES = SOLE_LANES,
  parameter int unsigned ACC_W = 24
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      en,
  input  logic                      first,
  input  logic signed [DIFF_W-1:0]  d     [LANES],
  input  logic [ALPHA_W-1:0]        alpha [LANES],
  input  logic [LANES-1:0]          mask,
  input  logic [INV_W:0]            inv_n,   // 1/n with INV_W fraction bits
  output logic signed [MEAN_W-1:0]  mean
);
  localparam int unsigned PW = ACC_W + INV_W + 2;

  logic signed [ACC_W-1:0] slice_sum, acc;
  logic signed [PW-1:0]    prod;

  always_comb begin
    slice_sum = '0;
    for (int i = 0; i < LANES; i++)
      if (mask[i]) slice_sum = slice_sum + (ACC_W'(d[i]) <<< alpha[i]);
  end

  always_ff @(posedge clk) begin
    if (!rst_n)  acc <= '0;
    else if (en) acc <= first ? slice_sum : acc + slice_sum;
  end

  always_comb begin
    prod = PW'(acc) * $signed({1'b0, inv_n});
    mean = MEAN_W'(prod >>> (INV_W - MEAN_FRAC));
  end
endmodule
