// tb_ex_unit: accumulates random tokens of 1..32 slices with random masks and
// power-of-two factors and compares the mean with a per-element reference sum times 1/n.
module tb_ex_unit;
  import sole_ref_pkg::*;
  localparam int L = 32;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, en = 0, first = 0;
  logic signed [8:0] d [L];
  logic [1:0]        alpha [L];
  logic [L-1:0]      mask;
  logic [20:0]       inv_n;
  logic signed [17:0] mean;
  ex_unit #(.LANES(L)) dut (.clk, .rst_n, .en, .first, .d, .alpha, .mask, .inv_n, .mean);
  always #5 clk = ~clk;

  initial begin : watchdog
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      int ns, n;
      int dv[$], av[$];
      int darr[], aarr[];
      longint exp_mean;
      ns = 1 + $urandom % 32;
      n = 0; dv = {}; av = {};
      for (int j = 0; j < ns; j++) begin
        @(negedge clk);
        en = 1; first = (j == 0);
        mask = (j == ns - 1 && t % 2) ? L'($urandom) | L'(1) : '1;
        for (int i = 0; i < L; i++) begin
          d[i] = (t % 5 == 0) ? 9'sd255 - 9'(i) : 9'($signed(9'($urandom % 511) - 9'sd255));
          alpha[i] = 2'($urandom);
          if (mask[i]) begin dv.push_back(int'(d[i])); av.push_back(int'(alpha[i])); n++; end
        end
      end
      @(negedge clk);
      en = 0;
      inv_n = 21'(((1 << 20) + n / 2) / n);
      #1;
      darr = dv; aarr = av;
      exp_mean = ln_mean(darr, aarr, longint'(inv_n));
      checks++;
      if (longint'(mean) != exp_mean) begin
        failures++;
        if (failures < 10) $display("FAIL t=%0d n=%0d mean=%0d exp=%0d", t, n, mean, exp_mean);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
