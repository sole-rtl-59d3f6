// tb_pingpong_buffer: fills both banks with different random words, then reads every
// slot of both banks back while the other bank is being rewritten, and compares with a
// scoreboard.
module tb_pingpong_buffer;
  localparam int W = 16, DEPTH = 32;
  int checks = 0, failures = 0;
  logic clk = 0;
  logic we, wbank, rbank;
  logic [4:0] waddr, raddr;
  logic [W-1:0] wdata, rdata;
  logic [W-1:0] sb [2][DEPTH];
  pingpong_buffer #(.W(W), .DEPTH(DEPTH)) dut (.clk, .we, .wbank, .waddr, .wdata, .rbank, .raddr, .rdata);
  always #5 clk = ~clk;

  initial begin : watchdog
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; wbank = 0; rbank = 0; waddr = 0; raddr = 0; wdata = 0;
    for (int b = 0; b < 2; b++)
      for (int a = 0; a < DEPTH; a++) begin
        @(negedge clk);
        we = 1; wbank = 1'(b); waddr = 5'(a); wdata = W'($urandom);
        sb[b][a] = wdata;
      end
    for (int round = 0; round < 4; round++) begin
      int rb;
      rb = round % 2;
      for (int a = 0; a < DEPTH; a++) begin
        @(negedge clk);
        // read bank rb while writing the other bank
        we = 1; wbank = 1'(1 - rb); waddr = 5'(a); wdata = W'($urandom);
        rbank = 1'(rb); raddr = 5'(DEPTH - 1 - a);
        #1;
        checks++;
        if (rdata != sb[rb][DEPTH-1-a]) begin
          failures++;
          if (failures < 10) $display("FAIL bank=%0d addr=%0d got=%h exp=%h", rb, DEPTH-1-a, rdata, sb[rb][DEPTH-1-a]);
        end
        @(posedge clk);
        sb[1-rb][a] = wdata;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
