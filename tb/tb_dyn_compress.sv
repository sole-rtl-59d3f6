// tb_dyn_compress: exhaustive check of all 256 inputs against the compression rule
// (round(x/16) if x >= 64 else round(x/4), clipped to 15) and of the decompressed square's
// relative error for inputs above 16.
module tb_dyn_compress;
  import sole_ref_pkg::*;
  int checks = 0, failures = 0;
  logic [7:0] x;
  logic [3:0] y;
  logic       s;
  dyn_compress dut (.x, .y, .s);

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 256; v++) begin
      int es, ey;
      real sq;
      x = 8'(v);
      #1;
      ey = compress(v, es);
      checks++;
      if (int'(y) != ey || int'(s) != es) begin
        failures++;
        if (failures < 10) $display("FAIL x=%0d y=%0d s=%0d exp %0d %0d", v, y, s, ey, es);
      end
      if (v >= 16) begin
        sq = real'(int'(y) * int'(y)) * (s ? 256.0 : 16.0);
        checks++;
        if (sq > 1.6 * v * v || sq < 0.5 * v * v) begin
          failures++;
          if (failures < 10) $display("FAIL accuracy x=%0d sq=%f", v, sq);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
