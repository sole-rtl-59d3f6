// max_unit: local maximum of one input slice, found with a balanced comparison tree.
//
// LANES signed values enter with a lane-valid mask; masked lanes are replaced by the most
// negative value so they never win. The tree has clog2(LANES) levels of two-input signed
// comparators. The source names the unit and says it uses a comparison tree; the masking is
// this design's way of carrying vectors whose length is not a multiple of LANES.
// Combinational. With an all-zero mask the output is the most negative value.
module max_unit #(
  parameter int unsigned LANES = 32,
  parameter int unsigned W     = 8
) (
  input  logic signed [W-1:0] x [LANES],
  input  logic [LANES-1:0]    mask,
  output logic signed [W-1:0] max_o
);
  localparam int unsigned LEVELS = $clog2(LANES);
  localparam int unsigned N      = 1 << LEVELS;
  localparam logic signed [W-1:0] MINV = {1'b1, {(W-1){1'b0}}};

  // node[0] is the root; leaves start at N-1
  logic signed [W-1:0] node [2*N-1];
  always_comb begin
    for (int i = 0; i < N; i++)
      node[N-1+i] = (i < LANES && mask[i % LANES]) ? x[i % LANES] : MINV;
    for (int j = N-2; j >= 0; j--)
      node[j] = (node[2*j+1] > node[2*j+2]) ? node[2*j+1] : node[2*j+2];
    max_o = node[0];
  end
endmodule
