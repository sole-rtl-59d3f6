// tb_max_unit: random slices with random lane masks; the local maximum is compared with a
// linear scan over the valid lanes. Includes single-lane masks and all-equal slices.
module tb_max_unit;
  localparam int LANES = 32;
  int checks = 0, failures = 0;
  logic signed [7:0] x [LANES];
  logic [LANES-1:0]  mask;
  logic signed [7:0] max_o;
  max_unit #(.LANES(LANES), .W(8)) dut (.x, .mask, .max_o);

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 2000; t++) begin
      int e;
      for (int i = 0; i < LANES; i++) x[i] = 8'($urandom);
      case (t % 4)
        0: mask = '1;
        1: mask = LANES'(1) << ($urandom % LANES);
        default: mask = LANES'($urandom) | LANES'(1);
      endcase
      #1;
      e = -1000;
      for (int i = 0; i < LANES; i++) if (mask[i] && int'(x[i]) > e) e = int'(x[i]);
      checks++;
      if (int'(max_o) != e) begin
        failures++;
        if (failures < 10) $display("FAIL t=%0d max=%0d exp=%0d", t, max_o, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
