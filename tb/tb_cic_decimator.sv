// Testbench of cic_decimator (R = 4, N = 2, M = 1): every output must equal the input
// convolved with the CIC impulse response h = [1 2 3 4 3 2 1], divided by (RM)^N = 16
// (arithmetic shift), with the newest contributing sample taken 3 clocks before the output
// appears; strobes must come exactly every 4 clocks. DC gain is checked at full scale.
module tb_cic_decimator;
  localparam int W = 26;
  logic clk = 0, rst = 1;
  logic signed [W-1:0] din = '0;
  logic signed [W-1:0] dout;
  logic dout_valid;
  cic_decimator #(.W(W), .R(4), .N(2), .M(1)) dut (.*);
  always #4 clk = ~clk;
  int checks = 0, failures = 0;
  longint xs [0:5000];
  int cyc = 0, last_v = -1, nout = 0;
  localparam int H [7] = '{1, 2, 3, 4, 3, 2, 1};

  // Sample index n = clock edge at which din was taken.
  always @(posedge clk) begin
    if (!rst) begin
      xs[cyc] = longint'(din);
      cyc++;
    end
  end
  always @(negedge clk) begin
    if (!rst && dout_valid) begin
      automatic longint acc = 0;
      automatic int q = cyc - 1;   // index of the last edge
      for (int i = 0; i < 7; i++) if (q - 3 - i >= 0) acc += H[i] * xs[q - 3 - i];
      acc = acc >>> 4;
      checks++;
      if (longint'(dout) != acc) begin
        failures++;
        if (failures < 10) $display("FAIL at %0d: got %0d want %0d", q, dout, acc);
      end
      if (last_v >= 0) begin
        checks++;
        if (q - last_v != 4) begin failures++; $display("FAIL strobe spacing %0d", q - last_v); end
      end
      last_v = q;
      nout++;
    end
  end

  initial begin
    repeat (3) @(negedge clk);
    rst = 0;
    for (int i = 0; i < 3000; i++) begin
      if (i < 1000)      din = W'($urandom);
      else if (i < 1200) din = {1'b0, {(W-1){1'b1}}};   // full-scale positive DC
      else if (i < 1400) din = {1'b1, {(W-1){1'b0}}};   // full-scale negative DC
      else               din = W'($signed($urandom_range(2000)) - 1000);
      @(negedge clk);
      if (i == 1190) begin
        checks++;
        if (dout != {1'b0, {(W-1){1'b1}}} - 0) begin
          // 16 * max >>> 4 = max exactly
          failures++; $display("FAIL DC gain: %0d", dout);
        end
      end
    end
    checks++;
    if (nout < 700) begin failures++; $display("FAIL output count %0d", nout); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
