// tb_affine_unit: random lanes, statistics and weights; each output is compared with the
// reference y = round(gamma*std*(d<<alpha - mean)) + beta, saturated, and with the same
// expression in real arithmetic to within one LSB where it does not saturate.
module tb_affine_unit;
  import sole_ref_pkg::*;
  localparam int L = 32;
  int checks = 0, failures = 0;
  logic signed [8:0]  d [L];
  logic [1:0]         alpha [L];
  logic signed [17:0] mean;
  logic [23:0]        std_inv;
  logic signed [7:0]  gamma [L], beta [L], y [L];
  affine_unit #(.LANES(L)) dut (.d, .alpha, .mean, .std_inv, .gamma, .beta, .y);

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 300; t++) begin
      mean = 18'($signed($urandom % 8000) - 4000);
      std_inv = 24'(64 + $urandom % (1 << (8 + t % 12)));
      for (int i = 0; i < L; i++) begin
        d[i] = 9'($signed(9'($urandom % 511) - 9'sd255));
        alpha[i] = 2'($urandom);
        gamma[i] = 8'($urandom);
        beta[i] = 8'($urandom);
      end
      #1;
      for (int i = 0; i < L; i++) begin
        int e;
        real r;
        e = affine(int'(d[i]), int'(alpha[i]), longint'(mean), longint'(std_inv), int'(gamma[i]), int'(beta[i]));
        checks++;
        if (int'(y[i]) != e) begin
          failures++;
          if (failures < 10) $display("FAIL t=%0d lane=%0d y=%0d exp=%0d", t, i, y[i], e);
        end
        r = (real'(gamma[i]) / 64.0) * (real'(std_inv) / 65536.0) *
            (real'(d[i]) * (2.0 ** alpha[i]) - real'(mean) / 16.0) * 16.0 + real'(beta[i]);
        if (r < 126.0 && r > -127.0) begin
          checks++;
          if (real'(y[i]) > r + 1.0 || real'(y[i]) < r - 1.0) begin
            failures++;
            if (failures < 10) $display("FAIL accuracy t=%0d y=%0d real=%f", t, y[i], r);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
