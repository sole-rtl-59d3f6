// tb_log2exp_unit: exhaustive check of the log2-quantised exponent against
// round(d/16 * 1.4375) clipped to 15, computed in real arithmetic, for every 9-bit d.
module tb_log2exp_unit;
  import sole_ref_pkg::*;
  int checks = 0, failures = 0;
  logic [8:0] diff;
  logic [3:0] k;
  log2exp_unit #(.DW(9), .FRAC(4), .KW(4)) dut (.diff, .k);

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int d = 0; d < 512; d++) begin
      diff = 9'(d);
      #1;
      checks++;
      if (int'(k) != l2e(d)) begin
        failures++;
        if (failures < 10) $display("FAIL d=%0d k=%0d exp=%0d", d, k, l2e(d));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
