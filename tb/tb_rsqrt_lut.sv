// tb_rsqrt_lut: compares the table-based 1/sqrt(v) with the reference table model
// exactly and with the exact value 2^16/sqrt(v/256) within 3.5 % (4-bit mantissa bins),
// over random inputs spanning every exponent.
module tb_rsqrt_lut;
  import sole_ref_pkg::*;
  int checks = 0, failures = 0;
  logic [31:0] v;
  logic [23:0] r;
  rsqrt_lut dut (.v, .r);

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 3000; t++) begin
      int p;
      real exact;
      p = t % 31;
      v = (32'd1 << p) | (32'($urandom) & ((32'd1 << p) - 1));
      #1;
      checks++;
      if (longint'(r) != rsqrt(longint'(v))) begin
        failures++;
        if (failures < 10) $display("FAIL v=%0d r=%0d exp=%0d", v, r, rsqrt(longint'(v)));
      end
      exact = 65536.0 / $sqrt(real'(v) / 256.0);
      if (p >= 4 && exact > 64.0) begin
        checks++;
        if (real'(r) > exact * 1.035 || real'(r) < exact * 0.965) begin
          failures++;
          if (failures < 10) $display("FAIL accuracy v=%0d r=%0d exact=%f", v, r, exact);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
