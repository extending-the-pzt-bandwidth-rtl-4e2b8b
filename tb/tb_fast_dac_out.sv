// Testbench of fast_dac_out: in control mode the 26-bit word is rounded half up to 14 bits
// with saturation at positive full scale; in system-identification mode wn is passed; both
// appear one clock after the inputs.
module tb_fast_dac_out;
  logic clk = 0, rst = 1, mode_sysid = 0;
  logic signed [25:0] x = '0;
  logic signed [13:0] wn = '0, dac;
  logic sat;
  fast_dac_out #(.IN_W(26), .DAC_W(14)) dut (.*);
  always #4 clk = ~clk;
  int checks = 0, failures = 0, nsat = 0, nmode = 0;
  initial begin
    longint want; bit wsat;
    repeat (3) @(negedge clk);
    rst = 0;
    for (int i = 0; i < 5000; i++) begin
      x  = (i % 97 == 0) ? 26'sh1ffffff : (i % 89 == 0) ? 26'sh2000000 : 26'($urandom);
      wn = 14'($urandom);
      mode_sysid = (i / 500) % 2 == 1;
      if (mode_sysid) begin want = longint'(wn); wsat = 0; nmode++; end
      else begin
        want = (longint'(x) + 2048) >>> 12;
        wsat = want > 8191;
        if (wsat) want = 8191;
      end
      @(negedge clk);
      checks++;
      if (longint'(dac) != want || sat != wsat) begin
        failures++;
        if (failures < 10) $display("FAIL i=%0d dac=%0d want %0d", i, dac, want);
      end
      nsat += sat;
    end
    checks++;
    if (nsat == 0 || nmode == 0) begin failures++; $display("FAIL saturation or mode never seen"); end
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
