// Testbench of lowpass1: checks the recursion y <= y + ((x - y) >>> shift) against an integer
// model for every shift value, the one-clock bypass at shift 0, and the step response: after
// a step the output must cross 1 - 1/e of the step within about 2^shift clocks.
module tb_lowpass1;
  localparam int W = 26;
  logic clk = 0, rst = 1;
  logic signed [W-1:0] x = '0, y;
  logic [3:0] shift = '0;
  lowpass1 #(.W(W), .SHIFT_W(4)) dut (.*);
  always #4 clk = ~clk;
  int checks = 0, failures = 0;
  longint m = 0;

  initial begin
    repeat (3) @(negedge clk);
    rst = 0;
    for (int sh = 0; sh < 16; sh++) begin
      automatic int t63 = -1;
      shift = 4'(sh);
      // Step from the current value to full scale and back to a random level.
      for (int i = 0; i < 3000; i++) begin
        longint xi;
        if (i < 1500) xi = (longint'(1) <<< 25) - 1;
        else          xi = -(longint'(1) <<< 24) + longint'($urandom_range(1000));
        x = W'(xi);
        @(posedge clk);
        m = m + (((xi - m)) >>> sh);
        @(negedge clk);
        checks++;
        if (longint'(y) != m) begin
          failures++;
          if (failures < 10) $display("FAIL sh=%0d i=%0d got %0d want %0d", sh, i, y, m);
        end
        if (sh == 6 && t63 < 0 && i < 1500 && longint'(y) > 0) t63 = i;
      end
      if (sh == 6) begin
        checks++;
        if (t63 < 0 || t63 > 200) begin failures++; $display("FAIL sh=6 zero crossing at %0d", t63); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
