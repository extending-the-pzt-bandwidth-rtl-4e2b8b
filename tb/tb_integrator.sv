// Testbench of integrator: accumulation of e * ki every clock with saturation, hold and clear,
// and the 16-bit output sampled once every 125 clocks (1 MHz strobe, checked for spacing).
module tb_integrator;
  logic clk = 0, rst = 1, hold = 0, clr = 0;
  logic signed [25:0] e = '0;
  logic signed [17:0] ki = '0;
  logic signed [15:0] out;
  logic out_stb, sat;
  integrator #(.IN_W(26), .IN_FRAC(25), .KI_W(18), .KI_FRAC(24), .OUT_W(16), .DECIM(125)) dut (.*);
  always #4 clk = ~clk;
  int checks = 0, failures = 0, nstb = 0, last = -1, cyc = 0, nsat = 0;
  longint acc = 0;
  localparam longint HI = (longint'(1) <<< 49) - 1, LO = -(longint'(1) <<< 49);

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  // Model updated at each edge with the inputs seen there.
  longint acc_prev = 0;
  always @(posedge clk) begin
    cyc++;
    acc_prev = acc;
    if (rst || clr) acc = 0;
    else if (!hold) begin
      acc = acc + longint'(e) * longint'(ki);
      if (acc > HI) acc = HI;
      if (acc < LO) acc = LO;
    end
  end
  always @(negedge clk) begin
    if (!rst) begin
      if (sat) nsat++;
      if (out_stb) begin
        if (last >= 0) chk(cyc - last == 125, $sformatf("strobe spacing %0d", cyc - last));
        last = cyc;
        nstb++;
      end
    end
  end
  // The output taken at a strobe is the accumulator as it was before that edge (acc_prev).

  initial begin
    repeat (3) @(negedge clk);
    rst = 0;
    for (int i = 0; i < 20000; i++) begin
      @(negedge clk);
      if (out_stb) chk(longint'(out) == (acc_prev >>> 34), $sformatf("out %0d want %0d", out, acc_prev >>> 34));
      e    = 26'($urandom);
      ki   = (i < 5000) ? 18'($urandom_range(2000)) : (i < 12000) ? 18'sh1ffff : 18'($urandom);
      hold = (i % 700) < 50;
      clr  = (i == 15000);
      if (i % 7 == 0) e = (i < 9000) ? 26'sh1ffffff : 26'sh2000000;
    end
    chk(nstb > 150, "strobes");
    chk(nsat > 0, "saturation reached");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
