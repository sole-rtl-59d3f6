// tb_ex2_unit: accumulates random tokens and compares E(x^2) with a per-element
// reference (compress, square, decompress, sum, x16, x 1/n). Also checks that the
// compressed E(x^2) stays within 10 % of the exact mean square for uniform inputs.
module tb_ex2_unit;
  import sole_ref_pkg::*;
  localparam int L = 32;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, en = 0, first = 0;
  logic [7:0]   mag [L];
  logic [1:0]   alpha [L];
  logic [L-1:0] mask, s_flags;
  logic [20:0]  inv_n;
  logic [31:0]  ex2;
  ex2_unit #(.LANES(L)) dut (.clk, .rst_n, .en, .first, .mag, .alpha, .mask, .inv_n, .ex2, .s_flags);
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
      longint e;
      real exact;
      ns = 1 + $urandom % 32;
      n = 0; dv = {}; av = {}; exact = 0.0;
      for (int j = 0; j < ns; j++) begin
        @(negedge clk);
        en = 1; first = (j == 0);
        mask = (j == ns - 1 && t % 2) ? L'($urandom) | L'(1) : '1;
        for (int i = 0; i < L; i++) begin
          mag[i] = 8'($urandom);
          alpha[i] = (t % 3 == 0) ? 2'd0 : 2'($urandom);
          if (mask[i]) begin
            dv.push_back(int'(mag[i])); av.push_back(int'(alpha[i])); n++;
            exact += (real'(mag[i]) * (2.0 ** alpha[i])) ** 2;
          end
        end
      end
      @(negedge clk);
      en = 0;
      inv_n = 21'(((1 << 20) + n / 2) / n);
      #1;
      darr = dv; aarr = av;
      e = ln_ex2(darr, aarr, longint'(inv_n));
      checks++;
      if (longint'(ex2) != e) begin
        failures++;
        if (failures < 10) $display("FAIL t=%0d n=%0d ex2=%0d exp=%0d", t, n, ex2, e);
      end
      if (n >= 64) begin
        exact = exact / n * 256.0;
        checks++;
        if (real'(ex2) > exact * 1.1 || real'(ex2) < exact * 0.9) begin
          failures++;
          if (failures < 10) $display("FAIL accuracy t=%0d ex2=%0d exact=%f", t, ex2, exact);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
