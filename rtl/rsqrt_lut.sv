// rsqrt_lut: x^-0.5 unit, 1/sqrt(v) from a 32-entry table and shifts.
//
// v has VAR_FRAC fraction bits. A leading-one detector gives its exponent p, so
// v = 2^p (1 + f). With p = 2h + r the result is 2^(VAR_FRAC/2 - h) / sqrt(2^r (1 + f)).
// The table is indexed by r and the four bits of f below the leading one and holds
// round(256 / sqrt(2^r (1 + (f4 + 0.5)/16))), i.e. the midpoint of each mantissa bin, in
// 8 fraction bits. The entries are computed at elaboration by an integer square root, so
// no numbers are typed in. The output has STD_FRAC fraction bits. A zero input is treated
// as one LSB. The source says only that this unit is a LUT; its size and indexing are this
// design's. Combinational.
module rsqrt_lut
  import sole_pkg::*;
#(
  parameter int unsigned VW = VAR_W
) (
  input  logic [VW-1:0]    v,
  output logic [STD_W-1:0] r
);
  // integer square root, bit by bit (results below 2^14)
  function automatic longint unsigned isqrt(input longint unsigned n);
    longint unsigned res, t;
    res = 0;
    for (int b = 13; b >= 0; b--) begin
      t = res | (64'd1 << b);
      if (t * t <= n) res = t;
    end
    return res;
  endfunction

  // entry(r, f4) = round(256 / sqrt(2^r * (33 + 2 f4) / 32)) = round(sqrt(2^21 / (2^r (33 + 2 f4))))
  function automatic logic [8:0] entry(input int unsigned rr, input int unsigned f4);
    longint unsigned den, q16;
    den = (64'd1 << rr) * (33 + 2 * f4);
    q16 = isqrt((64'd1 << 29) / den);   // 16 * sqrt(2^21 / den)
    return 9'((q16 + 8) >> 4);
  endfunction

  logic [8:0] lut [32];
  always_comb
    for (int i = 0; i < 32; i++) lut[i] = entry(i / 16, i % 16);

  localparam int unsigned BASE_SH = VAR_FRAC / 2 + STD_FRAC - 8;

  logic [VW-1:0]          vv, norm;
  logic [$clog2(VW)-1:0]  p;
  logic [3:0]             f4;
  logic [STD_W+8:0]       wide;

  always_comb begin
    vv = (v == '0) ? VW'(1) : v;
    p  = '0;
    for (int i = 0; i < VW; i++) if (vv[i]) p = ($clog2(VW))'(i);
    norm = vv << (($clog2(VW))'(VW - 1) - p);       // leading one at the top
    f4   = norm[VW-2 -: 4];
    wide = (STD_W+9)'(lut[{p[0], f4}]) << BASE_SH;
    r    = STD_W'(wide >> (p >> 1));
  end
endmodule
