// tb_sole_top: whole-design test of sole_top at its default parameters (32 lanes,
// vectors and tokens up to 1024 elements).
//
// The Softmax and LayerNorm units are driven at the same time with the vector lengths of
// the evaluated models: attention rows of 785 tokens (DeiT-Tiny at 448x448), 197
// (DeiT at 224x224), 128 and 384 (BERT-Base sequence lengths), 1024 (the longest vector a
// bank holds); LayerNorm tokens of 192 (DeiT-Tiny), 384 (DeiT-Small), 768 (DeiT-Base,
// BERT-Base) and 1024 (Swin-B last stage) channels. Inputs have random gaps, outputs random
// back-pressure, and the weight stream random gaps. Every output element is compared with
// the reference models. The test also counts how often each mechanism of the design
// happened and fails if one never did: input stall on a full ping-pong bank, both stages
// of a unit busy in the same cycle, output back-pressure, partial (masked) slices, the
// online-normalisation correction, both divider constants, both compression ranges, a
// non-zero power-of-two factor, and Stage 2 waiting for weights.
module tb_sole_top;
  import sole_ref_pkg::*;
  localparam int L = 32;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  int cyc = 0;

  // softmax side
  logic sm_in_valid = 0, sm_in_ready, sm_in_last = 0, sm_out_valid, sm_out_ready = 0, sm_out_last;
  logic signed [7:0] sm_in_data [L];
  logic [L-1:0]      sm_in_mask = '0, sm_out_mask;
  logic [7:0]        sm_out_data [L];
  // layernorm side
  logic [7:0]  ln_zp = 8'd128;
  logic [20:0] ln_inv_n = 0;
  logic ln_in_valid = 0, ln_in_ready, ln_in_last = 0, ln_w_valid = 0, ln_w_ready;
  logic ln_out_valid, ln_out_ready = 0, ln_out_last;
  logic [7:0]        ln_in_data [L];
  logic [1:0]        ln_in_alpha [L];
  logic [L-1:0]      ln_in_mask = '0, ln_out_mask;
  logic signed [7:0] ln_w_gamma [L], ln_w_beta [L], ln_out_data [L];

  sole_top dut (.clk, .rst_n,
    .sm_in_valid, .sm_in_ready, .sm_in_data, .sm_in_mask, .sm_in_last,
    .sm_out_valid, .sm_out_ready, .sm_out_data, .sm_out_mask, .sm_out_last,
    .ln_zp, .ln_inv_n, .ln_in_valid, .ln_in_ready, .ln_in_data, .ln_in_alpha, .ln_in_mask,
    .ln_in_last, .ln_w_valid, .ln_w_ready, .ln_w_gamma, .ln_w_beta,
    .ln_out_valid, .ln_out_ready, .ln_out_data, .ln_out_mask, .ln_out_last);

  always #5 clk = ~clk;
  always @(negedge clk) cyc++;

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------ mechanism counters
  int n_sm_stall = 0, n_sm_overlap = 0, n_sm_bp = 0, n_sm_partial = 0, n_sm_corr = 0;
  int n_div_c0 = 0, n_div_c1 = 0;
  int n_ln_stall = 0, n_ln_overlap = 0, n_ln_bp = 0, n_ln_partial = 0, n_ln_wwait = 0;
  int n_cmp_hi = 0, n_cmp_lo = 0, n_ptf = 0;

  always @(negedge clk) if (rst_n) begin
    if (sm_in_valid && !sm_in_ready) n_sm_stall++;
    if (sm_in_valid && sm_in_ready && sm_out_valid && sm_out_ready) n_sm_overlap++;
    if (sm_out_valid && !sm_out_ready) n_sm_bp++;
    if (sm_in_valid && sm_in_ready && sm_in_mask != '1) n_sm_partial++;
    if (dut.u_softmax.in_fire && !dut.u_softmax.first && dut.u_softmax.corr != 0 &&
        dut.u_softmax.sum_q != 0) n_sm_corr++;
    if (sm_out_valid && sm_out_ready && sm_out_mask[0]) begin
      if (dut.u_softmax.g_div[0].u_div.sbit) n_div_c1++; else n_div_c0++;
    end
    if (ln_in_valid && !ln_in_ready) n_ln_stall++;
    if (ln_in_valid && ln_in_ready && ln_out_valid && ln_out_ready) n_ln_overlap++;
    if (ln_out_valid && !ln_out_ready) n_ln_bp++;
    if (ln_in_valid && ln_in_ready && ln_in_mask != '1) n_ln_partial++;
    if (ln_out_ready && dut.u_layernorm.full[dut.u_layernorm.rbank] && !ln_w_valid) n_ln_wwait++;
    if (ln_in_valid && ln_in_ready) begin
      if ((dut.u_layernorm.s_flags & ln_in_mask) != '0) n_cmp_hi++;
      if ((~dut.u_layernorm.s_flags & ln_in_mask) != '0) n_cmp_lo++;
      for (int i = 0; i < L; i++) if (ln_in_mask[i] && ln_in_alpha[i] != 0) begin n_ptf++; break; end
    end
  end

  // ------------------------------------------------------------ softmax traffic
  typedef int vec_t[];
  vec_t sq[$];
  int sm_lens[] = '{785, 785, 197, 128, 384, 1024, 785, 128, 384, 197};
  bit sm_done = 0, ln_done = 0;

  task automatic sm_send(input vec_t v);
    int ns;
    ns = (v.size() + L - 1) / L;
    for (int j = 0; j < ns; j++) begin
      @(negedge clk);
      while ($urandom % 100 < 10) begin sm_in_valid = 0; @(negedge clk); end
      sm_in_valid = 1;
      sm_in_last  = (j == ns - 1);
      for (int i = 0; i < L; i++) begin
        sm_in_mask[i] = (j*L + i < v.size());
        sm_in_data[i] = sm_in_mask[i] ? 8'(v[j*L + i]) : 8'd0;
      end
      #1;
      while (!sm_in_ready) @(negedge clk);
    end
  endtask

  initial begin : sm_consumer
    vec_t v, y;
    int j, ns;
    forever begin
      wait (sq.size() > 0);
      v = sq[0];
      softmax_model(v, y);
      ns = (v.size() + L - 1) / L;
      j = 0;
      while (j < ns) begin
        @(negedge clk);
        sm_out_ready = ($urandom % 100 >= 20);
        #1;
        if (sm_out_valid && sm_out_ready) begin
          checks++;
          if (sm_out_last != (j == ns - 1)) begin failures++; $display("FAIL sm framing"); end
          for (int i = 0; i < L; i++) begin
            int idx, e;
            idx = j*L + i;
            e = (idx < v.size()) ? y[idx] : 0;
            checks++;
            if (sm_out_mask[i] != (idx < v.size()) || int'(sm_out_data[i]) != e) begin
              failures++;
              if (failures < 10) $display("FAIL sm len=%0d idx=%0d got=%0d exp=%0d", v.size(), idx, sm_out_data[i], e);
            end
          end
          j++;
        end
      end
      void'(sq.pop_front());
    end
  end

  // ------------------------------------------------------------ layernorm traffic
  typedef struct { vec_t x, a, g, b; } tok_t;
  tok_t lq[$];
  int ln_widths[] = '{192, 384, 768, 1024, 200};

  task automatic ln_send(input tok_t t);
    int ns, c;
    c = t.x.size();
    ns = (c + L - 1) / L;
    for (int j = 0; j < ns; j++) begin
      @(negedge clk);
      while ($urandom % 100 < 10) begin ln_in_valid = 0; @(negedge clk); end
      ln_in_valid = 1;
      ln_in_last  = (j == ns - 1);
      for (int i = 0; i < L; i++) begin
        ln_in_mask[i]  = (j*L + i < c);
        ln_in_data[i]  = ln_in_mask[i] ? 8'(t.x[j*L + i]) : 8'd0;
        ln_in_alpha[i] = ln_in_mask[i] ? 2'(t.a[j*L + i]) : 2'd0;
      end
      #1;
      while (!ln_in_ready) @(negedge clk);
    end
  endtask

  initial begin : ln_consumer
    tok_t t;
    vec_t y;
    longint mean, stdi;
    int j, ns, c;
    forever begin
      wait (lq.size() > 0);
      t = lq[0];
      c = t.x.size();
      layernorm_model(t.x, t.a, int'(ln_zp), longint'(ln_inv_n), t.g, t.b, y, mean, stdi);
      ns = (c + L - 1) / L;
      j = 0;
      while (j < ns) begin
        @(negedge clk);
        ln_out_ready = ($urandom % 100 >= 20);
        ln_w_valid   = ($urandom % 100 >= 15);
        for (int i = 0; i < L; i++) begin
          ln_w_gamma[i] = (j*L + i < c) ? 8'(t.g[j*L + i]) : 8'd0;
          ln_w_beta[i]  = (j*L + i < c) ? 8'(t.b[j*L + i]) : 8'd0;
        end
        #1;
        if (ln_out_valid && ln_out_ready) begin
          checks++;
          if (ln_out_last != (j == ns - 1)) begin failures++; $display("FAIL ln framing"); end
          for (int i = 0; i < L; i++) begin
            int idx, e;
            idx = j*L + i;
            e = (idx < c) ? y[idx] : 0;
            checks++;
            if (ln_out_mask[i] != (idx < c) || int'(ln_out_data[i]) != e) begin
              failures++;
              if (failures < 10) $display("FAIL ln c=%0d idx=%0d got=%0d exp=%0d", c, idx, ln_out_data[i], e);
            end
          end
          j++;
        end
      end
      void'(lq.pop_front());
    end
  end

  // ------------------------------------------------------------ stimulus
  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    fork
      begin : sm_stim
        foreach (sm_lens[r]) begin
          vec_t v;
          v = new[sm_lens[r]];
          foreach (v[i])
            v[i] = (r % 3 == 0) ? -100 + (i * 200) / sm_lens[r] + int'($urandom % 16)   // rising scores
                 : int'($urandom % 160) - 96;
          sq.push_back(v);
          sm_send(v);
        end
        @(negedge clk);
        sm_in_valid = 0;
        wait (sq.size() == 0);
        sm_done = 1;
      end
      begin : ln_stim
        foreach (ln_widths[w]) begin
          int c;
          c = ln_widths[w];
          wait (lq.size() == 0);
          @(negedge clk);
          ln_in_valid = 0;
          repeat (2) @(negedge clk);
          ln_inv_n = 21'(((1 << 20) + c / 2) / c);
          for (int t = 0; t < 3; t++) begin
            tok_t tk;
            tk.x = new[c]; tk.a = new[c]; tk.g = new[c]; tk.b = new[c];
            for (int i = 0; i < c; i++) begin
              tk.x[i] = (t == 1 && i % 40 == 7) ? 255 : 128 + int'($urandom % 120) - 60;
              tk.a[i] = (i % 16 == 3) ? 2 : (i % 16 == 9) ? 1 : 0;   // a few wide channels
              tk.g[i] = 40 + int'($urandom % 48);
              tk.b[i] = int'($urandom % 32) - 16;
            end
            lq.push_back(tk);
            ln_send(tk);
          end
        end
        @(negedge clk);
        ln_in_valid = 0;
        wait (lq.size() == 0);
        ln_done = 1;
      end
    join
    $display("finished after %0d cycles", cyc);
    $display("mechanisms: sm_stall=%0d sm_overlap=%0d sm_backpressure=%0d sm_partial=%0d sm_correction=%0d div_0.818=%0d div_0.568=%0d",
             n_sm_stall, n_sm_overlap, n_sm_bp, n_sm_partial, n_sm_corr, n_div_c0, n_div_c1);
    $display("mechanisms: ln_stall=%0d ln_overlap=%0d ln_backpressure=%0d ln_partial=%0d ln_weight_wait=%0d compress_hi=%0d compress_lo=%0d ptf=%0d",
             n_ln_stall, n_ln_overlap, n_ln_bp, n_ln_partial, n_ln_wwait, n_cmp_hi, n_cmp_lo, n_ptf);
    begin
      int cnt[];
      cnt = '{n_sm_stall, n_sm_overlap, n_sm_bp, n_sm_partial, n_sm_corr, n_div_c0, n_div_c1,
                    n_ln_stall, n_ln_overlap, n_ln_bp, n_ln_partial, n_ln_wwait, n_cmp_hi, n_cmp_lo, n_ptf};
      foreach (cnt[k]) begin
        checks++;
        if (cnt[k] == 0) begin
          failures++;
          $display("FAIL mechanism %0d never happened", k);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
