// al_divider: Approximate Log-based Divider, y ~ 2^-k / S for the reduced sum S.
//
// S is written as 2^ks * (1 + s). A leading-one detector (LOD) over the integer part of S
// gives ks (S >= 1 always, since the maximum element contributes 2^0). S is shifted by the
// LOD result to pick the bit just below the leading one, q(s) in {0, 0.5}, which selects
// in a two-way mux between (1.636 - 0)/2 = 0.818 and (1.636 - 0.5)/2 = 0.568, the
// bias-corrected mantissas of the source. The mantissa is then shifted right by k + ks.
// The structure (LOD, shifter, mux with 0.818/0.568, right shifter, 8-bit output) follows
// the source; the Q0.8 output coding (209 and 145) is this design's. Combinational.
module al_divider #(
  parameter int unsigned SUM_W    = 26,
  parameter int unsigned SUM_FRAC = 15
) (
  input  logic [3:0]       k,
  input  logic [SUM_W-1:0] sum,
  output logic [7:0]       y
);
  localparam int unsigned IW = SUM_W - SUM_FRAC;  // integer bits of S

  logic [3:0]       ks;      // LOD of the integer part
  logic             sbit;    // bit next to the leading one
  logic [SUM_W-1:0] shifted;
  logic [5:0]       sh;
  logic [7:0]       mant;

  always_comb begin
    ks = '0;
    for (int i = 0; i < IW; i++)
      if (sum[SUM_FRAC + i]) ks = 4'(i);
    // bring the leading one to bit SUM_FRAC; the next bit down is q(s)
    shifted = sum >> ks;
    sbit    = shifted[SUM_FRAC-1];
    mant    = sbit ? sole_pkg::DIV_C1 : sole_pkg::DIV_C0;
    sh      = 6'(k) + 6'(ks);
    y       = (sh > 6'd7) ? 8'd0 : (mant >> sh);
  end
endmodule
