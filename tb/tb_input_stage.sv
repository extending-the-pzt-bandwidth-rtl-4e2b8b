// Testbench of input_stage: e = sat((sat14(adc + offset)) * k) with a two-clock latency,
// checked against an integer model for random and extreme samples, offsets and gains.
module tb_input_stage;
  import pzt_pkg::*;
  logic clk = 0, rst = 1;
  logic signed [ADC_W-1:0] adc = '0, offset = '0;
  logic signed [K_W-1:0]   k = '0;
  sig_t e;
  logic sat;
  input_stage dut (.*);
  always #4 clk = ~clk;
  int checks = 0, failures = 0, nsat = 0;
  longint exp_e [$];
  bit     exp_s [$];

  function automatic void model(longint a, longint o, longint g);
    longint s, p;
    bit st = 0;
    s = a + o;
    if (s > 8191) s = 8191;
    if (s < -8192) s = -8192;
    p = s * g;   // 13 + 12 = 25 fractional bits
    if (p > (longint'(1) <<< 25) - 1) begin p = (longint'(1) <<< 25) - 1; st = 1; end
    if (p < -(longint'(1) <<< 25))    begin p = -(longint'(1) <<< 25);    st = 1; end
    exp_e.push_back(p);
    exp_s.push_back(st);
  endfunction

  initial begin
    repeat (3) @(negedge clk);
    rst = 0;
    // Fill the two-stage pipeline with known zeros.
    exp_e.push_back(0); exp_s.push_back(0);
    exp_e.push_back(0); exp_s.push_back(0);
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      begin
        longint w; bit ws;
        w = exp_e.pop_front(); ws = exp_s.pop_front();
        checks++;
        if (longint'(e) != w || sat != ws) begin
          failures++;
          if (failures < 10) $display("FAIL i=%0d e=%0d want %0d sat=%0b want %0b", i, e, w, sat, ws);
        end
        if (sat) nsat++;
      end
      adc    = (i % 50 == 0) ? 14'sh1fff : (i % 50 == 1) ? 14'sh2000 : ADC_W'($urandom);
      offset = (i < 1000) ? '0 : ADC_W'($urandom);
      k      = (i % 3 == 0) ? K_W'(1 <<< K_FRAC) : (i % 3 == 1) ? K_W'($urandom_range(8 <<< K_FRAC)) - K_W'(4 <<< K_FRAC) : K_W'($urandom);
      model(longint'(adc), longint'(offset), longint'(k));
    end
    checks++;
    if (nsat == 0) begin failures++; $display("FAIL saturation never seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
