// tb_preprocess_unit: random (mean, E(x^2)) pairs, including pairs whose difference is
// negative; checks the passed-on mean and that 1/sigma equals the reference table model of
// max(E(x^2) - mean^2, 0) and lies within 3.5 % of the exact value.
module tb_preprocess_unit;
  import sole_ref_pkg::*;
  int checks = 0, failures = 0;
  logic signed [17:0] mean_i, mean_o;
  logic [31:0]        ex2;
  logic [23:0]        std_inv;
  preprocess_unit dut (.mean_i, .ex2, .mean_o, .std_inv);

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 3000; t++) begin
      longint m, v, e;
      m = longint'($urandom % 65000) - 32500;
      v = longint'($urandom % (1 << (8 + t % 22)));
      mean_i = 18'(m);
      ex2 = (t % 10 == 0) ? 32'(m * m / 2) : 32'(m * m + v);
      #1;
      e = longint'(ex2) - m * m;
      if (e < 0) e = 0;
      checks++;
      if (longint'(mean_o) != m) failures++;
      checks++;
      if (longint'(std_inv) != rsqrt(e)) begin
        failures++;
        if (failures < 10) $display("FAIL m=%0d ex2=%0d std=%0d exp=%0d", m, ex2, std_inv, rsqrt(e));
      end
      if (e >= 16) begin
        real exact;
        exact = 65536.0 / $sqrt(real'(e) / 256.0);
        checks++;
        if (real'(std_inv) > exact * 1.035 || real'(std_inv) < exact * 0.965) begin
          failures++;
          if (failures < 10) $display("FAIL accuracy e=%0d std=%0d exact=%f", e, std_inv, exact);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
