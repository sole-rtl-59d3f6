// pingpong_buffer: two-bank buffer between the two stages of a SOLE unit.
//
// Stage 1 writes one bank while Stage 2 reads the other, so a new vector can enter while
// the previous one is being normalised. Each bank holds DEPTH words of W bits. One write
// port (registered, on the rising clock edge) and one read port (combinational, the word is
// valid in the same cycle as the address). Which bank is full or free is tracked by the
// enclosing unit. The contents are not reset; every slot is written before it is read.
// Ping-pong operation follows the source; the register-array organisation is this
// design's choice.
module pingpong_buffer #(
  parameter int unsigned W     = 8,
  parameter int unsigned DEPTH = 32,
  parameter int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic          we,
  input  logic          wbank,
  input  logic [AW-1:0] waddr,
  input  logic [W-1:0]  wdata,
  input  logic          rbank,
  input  logic [AW-1:0] raddr,
  output logic [W-1:0]  rdata
);
  logic [W-1:0] mem [2][DEPTH];

  always_ff @(posedge clk)
    if (we) mem[wbank][waddr] <= wdata;

  assign rdata = mem[rbank][raddr];
endmodule
