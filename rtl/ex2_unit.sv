// ex2_unit: Ex^2 Unit of the AILayerNorm statistics, E(x^2) with 4-bit arithmetic.
//
// Each lane compresses |X - zp| to 4 bits plus a flag s (dyn_compress), squares it with a
// 16-entry table, and decompresses by a left shift of 4 when s is set and then by 2*alpha
// for the power-of-two factor. The lanes are added and accumulated over the slices of one
// token (`first` loads, otherwise add). The missing common factor 2^4 is applied once,
// after accumulation, and the result is multiplied by 1/n to give E(x^2) with VAR_FRAC
// fraction bits. Compression, the 16-entry square table, the decompress shifts and the
// final <<4 follow the source (its figure; its algorithm listing applies <<4 twice).
// Widths and formats are this design's. Timing as ex_unit: `ex2` is combinational from the
// accumulator.
module ex2_unit
  import sole_pkg::*;
#(
  parameter int unsigned LANES = SOLE_LANES,
  parameter int unsigned ACC_W = 30
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 en,
  input  logic                 first,
  input  logic [7:0]           mag   [LANES],  // |X - zp|
  input  logic [ALPHA_W-1:0]   alpha [LANES],
  input  logic [LANES-1:0]     mask,
  input  logic [INV_W:0]       inv_n,
  output logic [VAR_W-1:0]     ex2,
  output logic [LANES-1:0]     s_flags       // compression select per lane (observation)
);
  localparam int unsigned DW = 8 + 4 + 2 * ((1 << ALPHA_W) - 1);  // decompressed term
  localparam int unsigned PW = ACC_W + 4 + INV_W + 1;

  // 16-entry square table
  localparam logic [7:0] SQ_LUT [16] = '{8'd0, 8'd1, 8'd4, 8'd9, 8'd16, 8'd25, 8'd36, 8'd49,
                                         8'd64, 8'd81, 8'd100, 8'd121, 8'd144, 8'd169, 8'd196, 8'd225};

  logic [3:0]       y   [LANES];
  logic [DW-1:0]    dec [LANES];
  logic [ACC_W-1:0] slice_sum, acc;
  logic [PW-1:0]    prod;

  for (genvar g = 0; g < LANES; g++) begin : g_lane
    logic [7:0] sq;
    dyn_compress u_cmp (.x(mag[g]), .y(y[g]), .s(s_flags[g]));
    always_comb begin
      sq     = SQ_LUT[y[g]];
      dec[g] = (DW'(sq) << (s_flags[g] ? 4 : 0)) << (2 * alpha[g]);
    end
  end

  always_comb begin
    slice_sum = '0;
    for (int i = 0; i < LANES; i++)
      if (mask[i]) slice_sum = slice_sum + ACC_W'(dec[i]);
  end

  always_ff @(posedge clk) begin
    if (!rst_n)  acc <= '0;
    else if (en) acc <= first ? slice_sum : acc + slice_sum;
  end

  always_comb begin
    prod = (PW'(acc) << 4) * PW'(inv_n);
    ex2  = VAR_W'(prod >> (INV_W - VAR_FRAC));
  end
endmodule
