// tb_reduction_unit: random 4-bit exponents and masks; the slice sum is compared with
// the sum of 2^-k over the valid lanes computed in real arithmetic (scaled by 2^15).
module tb_reduction_unit;
  localparam int LANES = 32;
  int checks = 0, failures = 0;
  logic [3:0]        k [LANES];
  logic [LANES-1:0]  mask;
  logic [20:0]       sum_o;
  reduction_unit #(.LANES(LANES), .KW(4), .SUM_FRAC(15)) dut (.k, .mask, .sum_o);

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 2000; t++) begin
      real e;
      for (int i = 0; i < LANES; i++) k[i] = (t % 3 == 0) ? 4'($urandom % 3) : 4'($urandom);
      mask = (t % 2) ? '1 : LANES'($urandom);
      #1;
      e = 0.0;
      for (int i = 0; i < LANES; i++) if (mask[i]) e += 2.0 ** (-real'(k[i]));
      checks++;
      if (real'(sum_o) != e * 32768.0) begin
        failures++;
        if (failures < 10) $display("FAIL t=%0d sum=%0d exp=%f", t, sum_o, e * 32768.0);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
