// tb_e2softmax_unit: end-to-end check of the E2Softmax Unit at its default size.
//
// Phase 1 streams four 8-slice vectors back to back with no back-pressure and checks the
// cycle count: with ping-pong buffers the last output slice must leave exactly
// 4*8 + 8 - 1 cycles after the first input slice entered. Phase 2 streams random vectors of
// 1..1024 elements (including 785, the DeiT token count used in the evaluation) with input
// gaps and output back-pressure; vectors include rising ramps so that the online
// normalisation correction is exercised. Every output element is compared with the
// reference model and, within a factor of 2.2 plus one LSB, with the exact softmax of the
// same inputs; the output framing (mask, last) is checked.
module tb_e2softmax_unit;
  import sole_ref_pkg::*;
  localparam int L = 32;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, in_last = 0, out_valid, out_ready = 0, out_last;
  logic signed [7:0] in_data [L];
  logic [L-1:0]      in_mask = '0, out_mask;
  logic [7:0]        out_data [L];
  int cyc = 0;

  e2softmax_unit dut (.clk, .rst_n, .in_valid, .in_ready, .in_data, .in_mask, .in_last,
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
  vec_t vq[$];            // vectors in flight, in order
  int   gap_pct = 0, bp_pct = 0;
  int   first_in = -1, last_out = -1;
  int   n_corr = 0;

  function automatic vec_t make_vec(input int len, input int mode);
    vec_t v;
    v = new[len];
    foreach (v[i])
      case (mode)
        0: v[i] = int'($urandom % 256) - 128;
        1: v[i] = -128 + (i * 255) / len;                  // rising ramp
        2: v[i] = int'($urandom % 48) - 24;                // narrow
        default: v[i] = (i % 97 == 5) ? 100 : int'($urandom % 64) - 100;
      endcase
    return v;
  endfunction

  task automatic send(input vec_t v);
    int ns;
    ns = (v.size() + L - 1) / L;
    for (int j = 0; j < ns; j++) begin
      @(negedge clk);
      while ($urandom % 100 < gap_pct) begin
        in_valid = 0;
        @(negedge clk);
      end
      in_valid = 1;
      in_last  = (j == ns - 1);
      for (int i = 0; i < L; i++) begin
        in_mask[i] = (j*L + i < v.size());
        in_data[i] = in_mask[i] ? 8'(v[j*L + i]) : 8'($urandom);
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

  // consumer: compares every output slice with the model
  initial begin : consumer
    vec_t v, y;
    int   j, ns, vmax;
    forever begin
      wait (vq.size() > 0);
      v = vq[0];
      softmax_model(v, y);
      vmax = -1000;
      foreach (v[q]) if (v[q] > vmax) vmax = v[q];
      ns = (v.size() + L - 1) / L;
      j = 0;
      while (j < ns) begin
        @(negedge clk);
        out_ready = ($urandom % 100 >= bp_pct);
        #1;
        if (out_valid && out_ready) begin
          checks++;
          if (out_last != (j == ns - 1)) begin
            failures++;
            $display("FAIL framing slice %0d of %0d last=%0d", j, ns, out_last);
          end
          for (int i = 0; i < L; i++) begin
            int idx, e;
            idx = j*L + i;
            e = (idx < v.size()) ? y[idx] : 0;
            checks++;
            if (out_mask[i] != (idx < v.size()) || int'(out_data[i]) != e) begin
              failures++;
              if (failures < 10) $display("FAIL len=%0d idx=%0d got=%0d exp=%0d", v.size(), idx, out_data[i], e);
            end
          end
          // closeness to the exact softmax of the same Q4.4 inputs
          for (int i = 0; i < L; i++) begin
            int idx;
            real ex, got;
            idx = j*L + i;
            if (idx < v.size()) begin
              ex = 0.0;
              foreach (v[q]) ex += $exp((real'(v[q]) - real'(vmax)) / 16.0);
              ex = $exp((real'(v[idx]) - real'(vmax)) / 16.0) / ex;
              got = real'(out_data[i]) / 256.0;
              checks++;
              if (got > 2.2 * ex + 1.0/256.0 || got < ex / 2.2 - 1.0/256.0) begin
                failures++;
                if (failures < 10) $display("FAIL accuracy len=%0d idx=%0d got=%f exact=%f", v.size(), idx, got, ex);
              end
            end
          end
          j++;
          last_out = cyc;
        end
      end
      void'(vq.pop_front());
    end
  end

  always @(posedge clk)
    if (dut.in_fire && !dut.first && dut.corr != 0 && dut.sum_q != 0) n_corr++;

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    // ---- phase 1: throughput
    for (int t = 0; t < 4; t++) begin
      vec_t v;
      v = make_vec(8 * L, t % 4);
      vq.push_back(v);
      send(v);
    end
    idle();
    wait (vq.size() == 0);
    checks++;
    if (last_out - first_in != 4*8 + 8 - 1) begin
      failures++;
      $display("FAIL throughput: span %0d cycles, expected %0d", last_out - first_in, 4*8 + 8 - 1);
    end else $display("throughput: 4 vectors of 8 slices in %0d cycles", last_out - first_in + 1);
    // ---- phase 2: random lengths, gaps and back-pressure
    gap_pct = 20; bp_pct = 30;
    for (int t = 0; t < 40; t++) begin
      vec_t v;
      int len;
      len = (t == 0) ? 785 : (t == 1) ? 1024 : (t == 2) ? 1 : 1 + $urandom % 1024;
      v = make_vec(len, t % 4);
      vq.push_back(v);
      send(v);
    end
    idle();
    wait (vq.size() == 0);
    checks++;
    if (n_corr == 0) begin
      failures++;
      $display("FAIL online-normalisation correction never exercised");
    end
    $display("corrections applied: %0d", n_corr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
