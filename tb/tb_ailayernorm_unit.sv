// tb_ailayernorm_unit: end-to-end check of the AILayerNorm Unit at its default size.
//
// Phase 1 streams four 6-slice tokens back to back with weights always available and no
// back-pressure, and checks the cycle count: Stage 2 of a token starts two cycles after
// its last input slice, so four tokens span 5*6 + 1 cycles from the first input slice to
// the last output slice. Phase 2 streams tokens of 1..1024 channels (including 192, 384,
// 768 and 1024, the DeiT/BERT/Swin widths) with input gaps, weight gaps and output
// back-pressure. Every output is compared with the bit-level reference, and with a
// floating-point LayerNorm of the same quantised data within a tolerance that covers the
// compression and table errors.
module tb_ailayernorm_unit;
  import sole_ref_pkg::*;
  localparam int L = 32;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic [7:0]  zp = 0;
  logic [20:0] inv_n = 0;
  logic in_valid = 0, in_ready, in_last = 0, w_valid = 0, w_ready, out_valid, out_ready = 0, out_last;
  logic [7:0]        in_data [L];
  logic [1:0]        in_alpha [L];
  logic [L-1:0]      in_mask = '0, out_mask;
  logic signed [7:0] w_gamma [L], w_beta [L], out_data [L];
  int cyc = 0;

  ailayernorm_unit dut (.clk, .rst_n, .zp, .inv_n, .in_valid, .in_ready, .in_data, .in_alpha,
                        .in_mask, .in_last, .w_valid, .w_ready, .w_gamma, .w_beta,
                        .out_valid, .out_ready, .out_data, .out_mask, .out_last);
  always #5 clk = ~clk;
  always @(negedge clk) cyc++;

  initial begin : watchdog
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef int vec_t[];
  typedef struct { vec_t x, a, g, b; } tok_t;
  tok_t tq[$];
  int gap_pct = 0, bp_pct = 0, wgap_pct = 0;
  int first_in = -1, last_out = -1;
  real max_err = 0.0;

  function automatic tok_t make_tok(input int c, input int mode);
    tok_t t;
    t.x = new[c]; t.a = new[c]; t.g = new[c]; t.b = new[c];
    for (int i = 0; i < c; i++) begin
      case (mode)
        0: t.x[i] = int'($urandom % 256);
        1: t.x[i] = 128 + int'($urandom % 40) - 20;             // narrow around zp
        default: t.x[i] = (i % 50 == 3) ? 250 : int'($urandom % 64) + 100;  // outliers
      endcase
      t.a[i] = (mode == 0) ? 0 : int'($urandom % 4);
      t.g[i] = 32 + int'($urandom % 64);                         // 0.5 .. 1.5 in Q1.6
      t.b[i] = int'($urandom % 32) - 16;                         // -1 .. 1 in Q3.4
    end
    return t;
  endfunction

  task automatic send(input tok_t t);
    int ns, c;
    c = t.x.size();
    ns = (c + L - 1) / L;
    for (int j = 0; j < ns; j++) begin
      @(negedge clk);
      while ($urandom % 100 < gap_pct) begin
        in_valid = 0;
        @(negedge clk);
      end
      in_valid = 1;
      in_last  = (j == ns - 1);
      for (int i = 0; i < L; i++) begin
        in_mask[i]  = (j*L + i < c);
        in_data[i]  = in_mask[i] ? 8'(t.x[j*L + i]) : 8'($urandom);
        in_alpha[i] = in_mask[i] ? 2'(t.a[j*L + i]) : 2'($urandom);
      end
      #1;
      while (!in_ready) @(negedge clk);
      if (first_in < 0) first_in = cyc;
    end
  endtask

  task automatic idle();
    @(negedge clk);
    in_valid = 0;
  endtask

  initial begin : consumer
    tok_t t;
    vec_t y;
    longint mean, stdi;
    int j, ns, c;
    forever begin
      wait (tq.size() > 0);
      t = tq[0];
      c = t.x.size();
      layernorm_model(t.x, t.a, int'(zp), longint'(inv_n), t.g, t.b, y, mean, stdi);
      ns = (c + L - 1) / L;
      j = 0;
      while (j < ns) begin
        @(negedge clk);
        out_ready = ($urandom % 100 >= bp_pct);
        w_valid   = ($urandom % 100 >= wgap_pct);
        for (int i = 0; i < L; i++) begin
          w_gamma[i] = (j*L + i < c) ? 8'(t.g[j*L + i]) : 8'($urandom);
          w_beta[i]  = (j*L + i < c) ? 8'(t.b[j*L + i]) : 8'($urandom);
        end
        #1;
        if (out_valid != (w_valid && dut.full[dut.rbank])) begin
          failures++;
          $display("FAIL out_valid without weights");
        end
        if ((w_valid && w_ready) != (out_valid && out_ready)) begin
          failures++;
          $display("FAIL weights taken without an output slice");
        end
        if (out_valid && out_ready) begin
          checks++;
          if (out_last != (j == ns - 1) || !w_ready) begin
            failures++;
            $display("FAIL framing slice %0d of %0d", j, ns);
          end
          for (int i = 0; i < L; i++) begin
            int idx, e;
            idx = j*L + i;
            e = (idx < c) ? y[idx] : 0;
            checks++;
            if (out_mask[i] != (idx < c) || int'(out_data[i]) != e) begin
              failures++;
              if (failures < 10) $display("FAIL c=%0d idx=%0d got=%0d exp=%0d", c, idx, out_data[i], e);
            end
          end
          j++;
          last_out = cyc;
        end
      end
      // floating-point LayerNorm of the same quantised data
      if (c >= 32) begin
        real mu, var_r, xr, yr, err;
        int  yi;
        mu = 0.0; var_r = 0.0;
        for (int i = 0; i < c; i++) mu += real'(t.x[i] - int'(zp)) * (2.0 ** t.a[i]);
        mu /= c;
        for (int i = 0; i < c; i++) begin
          xr = real'(t.x[i] - int'(zp)) * (2.0 ** t.a[i]) - mu;
          var_r += xr * xr;
        end
        var_r /= c;
        for (int i = 0; i < c; i++) begin
          xr = real'(t.x[i] - int'(zp)) * (2.0 ** t.a[i]);
          yr = (xr - mu) / $sqrt(var_r) * (real'(t.g[i]) / 64.0) * 16.0 + real'(t.b[i]);
          if (yr > 127.0) yr = 127.0;
          if (yr < -128.0) yr = -128.0;
          yi = y[i];
          err = real'(yi) - yr;
          if (err < 0) err = -err;
          if (err > max_err) max_err = err;
          checks++;
          if (err > 2.0 + 0.08 * (yr < 0 ? -yr : yr)) begin
            failures++;
            if (failures < 10) $display("FAIL accuracy c=%0d i=%0d y=%0d float=%f", c, i, yi, yr);
          end
        end
      end
      void'(tq.pop_front());
    end
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    zp = 8'd128;
    // ---- phase 1: throughput, 4 tokens of 6 slices
    inv_n = 21'(((1 << 20) + 96) / 192);
    for (int t = 0; t < 4; t++) begin
      tok_t tk;
      tk = make_tok(192, t % 3);
      tq.push_back(tk);
      send(tk);
    end
    idle();
    wait (tq.size() == 0);
    checks++;
    if (last_out - first_in != 5*6 + 1) begin
      failures++;
      $display("FAIL throughput: span %0d cycles, expected %0d", last_out - first_in, 5*6 + 1);
    end else $display("throughput: 4 tokens of 6 slices in %0d cycles", last_out - first_in + 1);
    // ---- phase 2: random widths with gaps and back-pressure (same width per group)
    gap_pct = 20; bp_pct = 25; wgap_pct = 20;
    for (int grp = 0; grp < 8; grp++) begin
      int c;
      c = (grp == 0) ? 384 : (grp == 1) ? 768 : (grp == 2) ? 1024 : (grp == 3) ? 17 : 1 + $urandom % 1024;
      wait (tq.size() == 0);
      repeat (4) @(negedge clk);
      inv_n = 21'(((1 << 20) + c / 2) / c);
      zp = 8'(100 + $urandom % 56);
      for (int t = 0; t < 3; t++) begin
        tok_t tk;
        tk = make_tok(c, (grp + t) % 3);
        tq.push_back(tk);
        send(tk);
      end
      idle();
    end
    wait (tq.size() == 0);
    $display("largest deviation from floating-point LayerNorm: %f LSB", max_err);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
