// tb_al_divider: random exponents k and reduced sums S >= 1. Each output is compared
// exactly with the reference approximate log division, and its distance to the exact
// quotient 2^-k / S is bounded (the approximation's worst case is below 23 % of 2^-k/S
// plus truncation of one LSB).
module tb_al_divider;
  import sole_ref_pkg::*;
  int checks = 0, failures = 0;
  logic [3:0]  k;
  logic [25:0] sum;
  logic [7:0]  y;
  al_divider #(.SUM_W(26), .SUM_FRAC(15)) dut (.k, .sum, .y);

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 4000; t++) begin
      real exact, got;
      k = (t % 2) ? 4'($urandom % 4) : 4'($urandom);
      case (t % 3)
        0: sum = 26'(32768 + $urandom % 32768);                 // S in [1,2)
        1: sum = 26'(32768 + $urandom % (32768 * 40));          // S up to 41
        default: sum = 26'(32768 + $urandom % (32768 * 1023));  // S up to 1024
      endcase
      #1;
      checks++;
      if (int'(y) != aldiv(int'(k), longint'(sum))) begin
        failures++;
        if (failures < 10) $display("FAIL k=%0d sum=%0d y=%0d exp=%0d", k, sum, y, aldiv(int'(k), longint'(sum)));
      end
      exact = (2.0 ** (-real'(k))) / (real'(sum) / 32768.0);
      got   = real'(y) / 256.0;
      checks++;
      if (got > exact * 1.23 + 1.0/256.0 || got < exact * 0.77 - 1.0/256.0) begin
        failures++;
        if (failures < 10) $display("FAIL accuracy k=%0d sum=%0d got=%f exact=%f", k, sum, got, exact);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
