// dyn_compress: dynamic compression of an 8-bit unsigned value to 4 bits.
//
// If either of the two top bits is set (s = x[7] | x[6]) the value is large and is coded
// as round(x / 16) from x[7:3]; otherwise as round(x / 4) from x[5:1]. Both are clipped to
// 15. The flag s tells the decompressor to scale the square back by 2^8 (s = 1) or 2^4
// (s = 0). Small values lose relatively more, which matters little for a sum of squares.
// The coding, the bit fields and the OR-driven select follow the source. Combinational.
module dyn_compress (
  input  logic [7:0] x,
  output logic [3:0] y,
  output logic       s
);
  logic [5:0] r_hi, r_lo;  // rounded candidates before the clip
  always_comb begin
    s    = x[7] | x[6];
    r_hi = (6'(x[7:3]) + 6'd1) >> 1;
    r_lo = (6'(x[5:1]) + 6'd1) >> 1;
    if (s) y = (r_hi > 6'd15) ? 4'd15 : r_hi[3:0];
    else   y = (r_lo > 6'd15) ? 4'd15 : r_lo[3:0];
  end
endmodule
