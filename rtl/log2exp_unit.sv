// log2exp_unit: log2-quantised exponent, k = clip(round(d * 1.4375), 0, 2^KW - 1).
//
// For a non-negative difference d = max - x (FRAC fraction bits), exp(x - max) is
// approximated by 2^-k. 1/ln2 is replaced by 1.4375 = 1 + 1/2 - 1/16, so the product is
// formed from shifted copies of d only: (d<<4) + (d<<3) - d carries 4 extra fraction bits
// and loses nothing to the >>4 term. Rounding is to nearest (ties up on the magnitude), and
// the result saturates at 15, the 4-bit log2 quantiser of the published algorithm. The
// shift-and-add structure and the 4-bit clip follow the source; the input format and the
// tie rule are this design's choice. Purely combinational.
module log2exp_unit #(
  parameter int unsigned DW   = 9,  // width of d
  parameter int unsigned FRAC = 4,  // fraction bits of d
  parameter int unsigned KW   = 4   // output width
) (
  input  logic [DW-1:0] diff,
  output logic [KW-1:0] k
);
  localparam int unsigned TW = DW + 5;
  localparam int unsigned SH = FRAC + 4;
  localparam logic [TW-1:0] HALF = TW'(1) << (SH - 1);
  localparam logic [TW-1:0] KMAX = TW'((1 << KW) - 1);

  logic [TW-1:0] t, r;
  always_comb begin
    // d * 1.4375 with SH fraction bits
    t = (TW'(diff) << 4) + (TW'(diff) << 3) - TW'(diff);
    r = (t + HALF) >> SH;
    k = (r > KMAX) ? KMAX[KW-1:0] : r[KW-1:0];
  end
endmodule
