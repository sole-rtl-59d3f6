// sole_top: SOLE hardware, an E2Softmax Unit and an AILayerNorm Unit side by side.
//
// The two units are independent pipelines that share a clock and reset. Each exposes its
// own valid/ready slice streams, which in a full system would be fed from and drained to
// the shared on-chip memory under a controller; both of those lie outside this RTL, so their
// connections are the ports of this module (prefix sm_ for Softmax, ln_ for LayerNorm).
// Slices are LANES = 32 elements wide; a Softmax vector and a LayerNorm token can be up to
// MAX_LEN = 1024 elements long. The one-unit-of-each arrangement follows the source's
// overview; the port grouping is this design's.
module sole_top
  import sole_pkg::*;
#(
  parameter int unsigned LANES   = SOLE_LANES,
  parameter int unsigned MAX_LEN = SOLE_MAX_LEN
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // ---- E2Softmax Unit
  input  logic                       sm_in_valid,
  output logic                       sm_in_ready,
  input  logic signed [SM_IN_W-1:0]  sm_in_data  [LANES],
  input  logic [LANES-1:0]           sm_in_mask,
  input  logic                       sm_in_last,
  output logic                       sm_out_valid,
  input  logic                       sm_out_ready,
  output logic [SM_OUT_W-1:0]        sm_out_data [LANES],
  output logic [LANES-1:0]           sm_out_mask,
  output logic                       sm_out_last,
  // ---- AILayerNorm Unit
  input  logic [LN_IN_W-1:0]         ln_zp,
  input  logic [INV_W:0]             ln_inv_n,
  input  logic                       ln_in_valid,
  output logic                       ln_in_ready,
  input  logic [LN_IN_W-1:0]         ln_in_data  [LANES],
  input  logic [ALPHA_W-1:0]         ln_in_alpha [LANES],
  input  logic [LANES-1:0]           ln_in_mask,
  input  logic                       ln_in_last,
  input  logic                       ln_w_valid,
  output logic                       ln_w_ready,
  input  logic signed [7:0]          ln_w_gamma  [LANES],
  input  logic signed [7:0]          ln_w_beta   [LANES],
  output logic                       ln_out_valid,
  input  logic                       ln_out_ready,
  output logic signed [7:0]          ln_out_data [LANES],
  output logic [LANES-1:0]           ln_out_mask,
  output logic                       ln_out_last
);
  e2softmax_unit #(.LANES(LANES), .MAX_LEN(MAX_LEN)) u_softmax (
    .clk, .rst_n,
    .in_valid(sm_in_valid), .in_ready(sm_in_ready), .in_data(sm_in_data),
    .in_mask(sm_in_mask), .in_last(sm_in_last),
    .out_valid(sm_out_valid), .out_ready(sm_out_ready), .out_data(sm_out_data),
    .out_mask(sm_out_mask), .out_last(sm_out_last));

  ailayernorm_unit #(.LANES(LANES), .MAX_C(MAX_LEN)) u_layernorm (
    .clk, .rst_n, .zp(ln_zp), .inv_n(ln_inv_n),
    .in_valid(ln_in_valid), .in_ready(ln_in_ready), .in_data(ln_in_data),
    .in_alpha(ln_in_alpha), .in_mask(ln_in_mask), .in_last(ln_in_last),
    .w_valid(ln_w_valid), .w_ready(ln_w_ready), .w_gamma(ln_w_gamma), .w_beta(ln_w_beta),
    .out_valid(ln_out_valid), .out_ready(ln_out_ready), .out_data(ln_out_data),
    .out_mask(ln_out_mask), .out_last(ln_out_last));
endmodule
