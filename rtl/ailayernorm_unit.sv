// ailayernorm_unit: AILayerNorm Unit, a two-stage pipelined integer LayerNorm.
//
// A token of C <= MAX_C channels arrives as slices of LANES unsigned 8-bit inputs with
// their power-of-two factors alpha, a lane mask and in_last on the final slice. The zero
// point zp and inv_n = round(2^INV_W / C) are held stable for the token.
//
// Stage 1, Statistic Calculation (one slice per cycle): X - zp goes to the Ex Unit
// (mean), to the Ex^2 Unit (mean square from 4-bit compressed values) and, with alpha and
// the mask, into the Input Buffer. In the cycle after the last slice the Preprocess Unit
// turns the two accumulators into the mean and 1/sigma, which are registered with the bank.
// Stage 2, Affine Transform (one slice per cycle): each buffered slice is combined with a
// slice of gamma/beta from the weight stream (w_valid/w_ready) in the Affine Unit and
// leaves on out_valid/out_ready as signed int8 (Q3.4).
// The Input Buffer and the statistic registers are ping-pong, so Stage 1 can take the
// next token while Stage 2 emits the current one. A token of N slices is ready for Stage 2
// two cycles after its last slice entered.
// The subunits, their order and the ping-pong scheme follow the source. The streaming
// interfaces, the mask, the separate weight stream and every number format are this
// design's. The buffer holds X - zp as 9 bits (plus alpha), as the source's dataflow
// implies, although its summary speaks of 8-bit buffering.
module ailayernorm_unit
  import sole_pkg::*;
#(
  parameter int unsigned LANES = SOLE_LANES,
  parameter int unsigned MAX_C = SOLE_MAX_LEN
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // configuration, stable during a token
  input  logic [LN_IN_W-1:0]       zp,
  input  logic [INV_W:0]           inv_n,
  // input slices
  input  logic                     in_valid,
  output logic                     in_ready,
  input  logic [LN_IN_W-1:0]       in_data  [LANES],
  input  logic [ALPHA_W-1:0]       in_alpha [LANES],
  input  logic [LANES-1:0]         in_mask,
  input  logic                     in_last,
  // affine weights, one slice per output slice
  input  logic                     w_valid,
  output logic                     w_ready,
  input  logic signed [7:0]        w_gamma  [LANES],
  input  logic signed [7:0]        w_beta   [LANES],
  // output slices
  output logic                     out_valid,
  input  logic                     out_ready,
  output logic signed [7:0]        out_data [LANES],
  output logic [LANES-1:0]         out_mask,
  output logic                     out_last
);
  localparam int unsigned DEPTH = MAX_C / LANES;
  localparam int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int unsigned EW    = DIFF_W + ALPHA_W;        // per element in the buffer
  localparam int unsigned BW    = LANES * EW + LANES;      // slice + mask

  // ---------------------------------------------------------------- bank state
  logic [1:0]    full;
  logic          wbank, rbank;
  logic [AW-1:0] wptr, rptr;
  logic          first;
  logic          stat_pend;      // statistics of bank stat_bank are computed this cycle
  logic          stat_bank;
  logic [AW-1:0] last_q [2];
  logic signed [MEAN_W-1:0] mean_q [2];
  logic [STD_W-1:0]         std_q  [2];

  // ---------------------------------------------------------------- Stage 1
  logic signed [DIFF_W-1:0] d   [LANES];
  logic [7:0]               mag [LANES];
  logic                     in_fire;
  logic signed [MEAN_W-1:0] mean_s1, mean_pp;
  logic [VAR_W-1:0]         ex2_s1;
  logic [STD_W-1:0]         std_pp;
  logic [LANES-1:0]         s_flags;

  always_comb
    for (int i = 0; i < LANES; i++) begin
      d[i]   = $signed({1'b0, in_data[i]}) - $signed({1'b0, zp});
      mag[i] = d[i][DIFF_W-1] ? 8'(-d[i]) : d[i][7:0];
    end

  assign in_ready = !full[wbank];
  assign in_fire  = in_valid && in_ready;

  ex_unit #(.LANES(LANES)) u_ex (
    .clk, .rst_n, .en(in_fire), .first, .d, .alpha(in_alpha), .mask(in_mask), .inv_n,
    .mean(mean_s1));
  ex2_unit #(.LANES(LANES)) u_ex2 (
    .clk, .rst_n, .en(in_fire), .first, .mag, .alpha(in_alpha), .mask(in_mask), .inv_n,
    .ex2(ex2_s1), .s_flags);
  preprocess_unit u_pre (.mean_i(mean_s1), .ex2(ex2_s1), .mean_o(mean_pp), .std_inv(std_pp));

  logic [BW-1:0] ib_wdata, ib_rdata;
  always_comb begin
    for (int i = 0; i < LANES; i++) ib_wdata[i*EW +: EW] = {in_alpha[i], d[i]};
    ib_wdata[LANES*EW +: LANES] = in_mask;
  end

  pingpong_buffer #(.W(BW), .DEPTH(DEPTH)) u_input_buf (
    .clk, .we(in_fire), .wbank, .waddr(wptr), .wdata(ib_wdata),
    .rbank, .raddr(rptr), .rdata(ib_rdata));

  // ---------------------------------------------------------------- Stage 2
  logic signed [DIFF_W-1:0] rd_d     [LANES];
  logic [ALPHA_W-1:0]       rd_alpha [LANES];
  logic signed [7:0]        y        [LANES];
  logic                     out_fire;

  always_comb
    for (int i = 0; i < LANES; i++) {rd_alpha[i], rd_d[i]} = ib_rdata[i*EW +: EW];

  affine_unit #(.LANES(LANES)) u_aff (
    .d(rd_d), .alpha(rd_alpha), .mean(mean_q[rbank]), .std_inv(std_q[rbank]),
    .gamma(w_gamma), .beta(w_beta), .y);

  assign out_mask  = ib_rdata[LANES*EW +: LANES];
  assign out_valid = full[rbank] && w_valid;
  assign w_ready   = full[rbank] && out_ready;
  assign out_last  = (rptr == last_q[rbank]);
  assign out_fire  = out_valid && out_ready;
  always_comb
    for (int i = 0; i < LANES; i++) out_data[i] = out_mask[i] ? y[i] : '0;

  // ---------------------------------------------------------------- control
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      full      <= '0;
      wbank     <= 1'b0;
      rbank     <= 1'b0;
      wptr      <= '0;
      rptr      <= '0;
      first     <= 1'b1;
      stat_pend <= 1'b0;
      stat_bank <= 1'b0;
      for (int b = 0; b < 2; b++) begin
        last_q[b] <= '0;
        mean_q[b] <= '0;
        std_q[b]  <= '0;
      end
    end else begin
      stat_pend <= in_fire && in_last;
      if (in_fire) begin
        first <= in_last;
        if (in_last) begin
          wptr          <= '0;
          wbank         <= ~wbank;
          stat_bank     <= wbank;
          last_q[wbank] <= wptr;
        end else begin
          wptr <= wptr + 1'b1;
        end
      end
      if (stat_pend) begin
        mean_q[stat_bank] <= mean_pp;
        std_q[stat_bank]  <= std_pp;
      end
      if (out_fire) begin
        if (out_last) begin
          rptr  <= '0;
          rbank <= ~rbank;
        end else begin
          rptr  <= rptr + 1'b1;
        end
      end
      for (int b = 0; b < 2; b++) begin
        if (stat_pend && stat_bank == 1'(b))             full[b] <= 1'b1;
        else if (out_fire && out_last && rbank == 1'(b)) full[b] <= 1'b0;
      end
    end
  end

  // Stage 1 may not reuse a bank before its statistics are stored and it is drained
  a_len:  assert property (@(posedge clk) disable iff (!rst_n)
                           in_fire && !in_last |-> wptr != AW'(DEPTH-1));
  a_mask: assert property (@(posedge clk) disable iff (!rst_n) in_fire |-> in_mask != '0);
  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
                           out_valid && !out_ready |=> full[rbank]);
endmodule
