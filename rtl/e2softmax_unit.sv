// e2softmax_unit: E2Softmax Unit, a two-stage pipelined approximate Softmax.
//
// A vector of up to MAX_LEN signed Q4.4 elements arrives as slices of LANES elements, one
// slice per accepted in_valid/in_ready beat, with a lane mask and in_last on the final
// slice. Its softmax leaves as slices of unsigned Q0.8 values on out_valid/out_ready.
//
// Stage 1, Unnormed Softmax (one slice per cycle): the Max Unit finds the slice's local max;
// the running max m = max(local, global) is formed; the Log2Exp Unit turns every x - m into
// a 4-bit exponent Y (exp ~ 2^-Y) and the previous global max minus m into the Correction.
// Y goes to the Output Buffer and to the Reduction Unit; the Sum Buffer value is shifted
// right by the Correction and the slice's reduction is added (online normalisation). The
// running max of each slice is kept in the Max Buffer.
// Stage 2, Normalization (one slice per cycle): for every slice, Log2Exp(slice max - global
// max) is added to the stored Y's and the Approximate Log2 Divider divides by the reduced
// sum.
// The Output, Max and Sum Buffers are ping-pong: Stage 1 fills one bank while Stage 2 drains
// the other, so in steady state a vector of N slices costs N cycles. Output data are
// combinational from registers and buffers; the first output slice is offered the cycle
// after the last input slice is accepted.
// The stages, subunits, buffers and arithmetic follow the source. The valid/ready
// interface, the lane mask, the slice-granular running max and all fixed-point formats
// are this design's choices.
module e2softmax_unit
  import sole_pkg::*;
#(
  parameter int unsigned LANES   = SOLE_LANES,
  parameter int unsigned MAX_LEN = SOLE_MAX_LEN
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // input slices
  input  logic                        in_valid,
  output logic                        in_ready,
  input  logic signed [SM_IN_W-1:0]   in_data [LANES],
  input  logic [LANES-1:0]            in_mask,
  input  logic                        in_last,
  // output slices
  output logic                        out_valid,
  input  logic                        out_ready,
  output logic [SM_OUT_W-1:0]         out_data [LANES],
  output logic [LANES-1:0]            out_mask,
  output logic                        out_last
);
  localparam int unsigned DEPTH = MAX_LEN / LANES;
  localparam int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int unsigned RW    = SUM_FRAC + 1 + $clog2(LANES);
  localparam int unsigned OBW   = LANES * EXP_W + LANES;  // exponents + mask
  localparam int unsigned SBW   = SUM_W + SM_IN_W + AW;   // sum, global max, last slot

  // ---------------------------------------------------------------- bank state
  logic [1:0]    full;          // bank holds a finished Stage-1 vector
  logic          wbank, rbank;  // bank used by Stage 1 / Stage 2
  logic [AW-1:0] wptr, rptr;    // slice index in Stage 1 / Stage 2
  logic          first;         // next Stage-1 slice starts a vector

  // ---------------------------------------------------------------- Stage 1
  logic signed [SM_IN_W-1:0] local_max, gmax_q, gmax_prev, run_max;
  logic [SUM_W-1:0]          sum_q, sum_next;
  logic [EXP_W-1:0]          y    [LANES];
  logic [SM_IN_W:0]          diff [LANES];
  logic [SM_IN_W:0]          cdiff;
  logic [EXP_W-1:0]          corr;
  logic [RW-1:0]             red;
  logic                      in_fire;

  max_unit #(.LANES(LANES), .W(SM_IN_W)) u_max (.x(in_data), .mask(in_mask), .max_o(local_max));

  always_comb begin
    gmax_prev = first ? local_max : gmax_q;
    run_max   = (local_max > gmax_prev) ? local_max : gmax_prev;
    cdiff     = (SM_IN_W+1)'(run_max) - (SM_IN_W+1)'(gmax_prev);
    for (int i = 0; i < LANES; i++)
      diff[i] = in_mask[i] ? (SM_IN_W+1)'(run_max) - (SM_IN_W+1)'(in_data[i]) : '0;
  end

  for (genvar g = 0; g < LANES; g++) begin : g_l2e
    log2exp_unit #(.DW(SM_IN_W+1), .FRAC(SM_IN_FRAC), .KW(EXP_W)) u_l2e (.diff(diff[g]), .k(y[g]));
  end
  log2exp_unit #(.DW(SM_IN_W+1), .FRAC(SM_IN_FRAC), .KW(EXP_W)) u_l2e_corr (.diff(cdiff), .k(corr));

  reduction_unit #(.LANES(LANES), .KW(EXP_W), .SUM_FRAC(SUM_FRAC), .OW(RW)) u_red (
    .k(y), .mask(in_mask), .sum_o(red));

  always_comb sum_next = (first ? '0 : (sum_q >> corr)) + SUM_W'(red);

  assign in_ready = !full[wbank];
  assign in_fire  = in_valid && in_ready;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      first  <= 1'b1;
      gmax_q <= '0;
      sum_q  <= '0;
    end else if (in_fire) begin
      first  <= in_last;
      gmax_q <= run_max;
      sum_q  <= sum_next;
    end
  end

  // ---------------------------------------------------------------- buffers
  logic [OBW-1:0]     ob_wdata, ob_rdata;
  logic [SM_IN_W-1:0] mb_rdata;
  logic [SBW-1:0]     sb_wdata, sb_rdata;

  always_comb begin
    for (int i = 0; i < LANES; i++) ob_wdata[i*EXP_W +: EXP_W] = y[i];
    ob_wdata[LANES*EXP_W +: LANES] = in_mask;
    sb_wdata = {sum_next, run_max, wptr};
  end

  pingpong_buffer #(.W(OBW), .DEPTH(DEPTH)) u_output_buf (
    .clk, .we(in_fire), .wbank, .waddr(wptr), .wdata(ob_wdata),
    .rbank, .raddr(rptr), .rdata(ob_rdata));
  pingpong_buffer #(.W(SM_IN_W), .DEPTH(DEPTH)) u_max_buf (
    .clk, .we(in_fire), .wbank, .waddr(wptr), .wdata(run_max),
    .rbank, .raddr(rptr), .rdata(mb_rdata));
  pingpong_buffer #(.W(SBW), .DEPTH(1)) u_sum_buf (
    .clk, .we(in_fire && in_last), .wbank, .waddr(1'b0), .wdata(sb_wdata),
    .rbank, .raddr(1'b0), .rdata(sb_rdata));

  // ---------------------------------------------------------------- Stage 2
  logic [SUM_W-1:0]          rsum;
  logic signed [SM_IN_W-1:0] rgmax;
  logic [AW-1:0]             rlast;
  logic [SM_IN_W:0]          sdiff;
  logic [EXP_W-1:0]          sub;
  logic [EXP_W-1:0]          k2 [LANES];
  logic [SM_OUT_W-1:0]       q  [LANES];
  logic                      out_fire;

  assign {rsum, rgmax, rlast} = sb_rdata;
  assign sdiff = (SM_IN_W+1)'(rgmax) - (SM_IN_W+1)'($signed(mb_rdata));
  log2exp_unit #(.DW(SM_IN_W+1), .FRAC(SM_IN_FRAC), .KW(EXP_W)) u_l2e_s2 (.diff(sdiff), .k(sub));

  for (genvar g = 0; g < LANES; g++) begin : g_div
    logic [EXP_W:0] ksum;
    always_comb begin
      ksum  = (EXP_W+1)'(ob_rdata[g*EXP_W +: EXP_W]) + (EXP_W+1)'(sub);
      k2[g] = ksum[EXP_W] ? '1 : ksum[EXP_W-1:0];  // saturate to 4 bits
    end
    al_divider #(.SUM_W(SUM_W), .SUM_FRAC(SUM_FRAC)) u_div (.k(k2[g]), .sum(rsum), .y(q[g]));
    assign out_data[g] = ob_rdata[LANES*EXP_W + g] ? q[g] : '0;
  end

  assign out_valid = full[rbank];
  assign out_mask  = ob_rdata[LANES*EXP_W +: LANES];
  assign out_last  = (rptr == rlast);
  assign out_fire  = out_valid && out_ready;

  // ---------------------------------------------------------------- control
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      full  <= '0;
      wbank <= 1'b0;
      rbank <= 1'b0;
      wptr  <= '0;
      rptr  <= '0;
    end else begin
      if (in_fire) begin
        if (in_last) begin
          wptr  <= '0;
          wbank <= ~wbank;
        end else begin
          wptr  <= wptr + 1'b1;
        end
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
        if (in_fire && in_last && wbank == 1'(b))        full[b] <= 1'b1;
        else if (out_fire && out_last && rbank == 1'(b)) full[b] <= 1'b0;
      end
    end
  end

  // a slice beyond the buffer depth would overwrite slot 0
  a_len: assert property (@(posedge clk) disable iff (!rst_n)
                          in_fire && !in_last |-> wptr != AW'(DEPTH-1));
  a_mask: assert property (@(posedge clk) disable iff (!rst_n) in_fire |-> in_mask != '0);
  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
                           out_valid && !out_ready |=> out_valid);
endmodule
