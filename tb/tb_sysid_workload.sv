// System-identification workload: the white-noise method run through the whole controller.
//
// A plant model closes the loop from dac_fast back to adc: a short FIR response g, defined
// on the 5 MHz chip grid (the M-sequence holds each chip for 25 clocks), plus ADC
// quantisation. The controller is put in identification mode and records one set of
// NSAMP = 20,000 (u, y) pairs, the set size of the reference measurement (4,000,000 samples
// in 200 sets). The testbench then does the host's job: h(k) = (1/N) sum y(m) u(m-k), and
// checks that h reproduces g, taps and zeros alike, within the correlation noise.
module tb_sysid_workload;
  import pzt_pkg::*;
  localparam int NSAMP = 20000;
  localparam int AMP = 2000;
  localparam int NG = 8;
  localparam real G [NG] = '{0.0, 0.6, 0.35, -0.25, 0.1, 0.0, -0.05, 0.0};

  logic clk = 0, rst = 1;
  logic signed [13:0] adc = '0;
  logic signed [13:0] dac_fast;
  logic signed [15:0] dac_slow;
  logic dac_slow_stb, bus_we = 0, cap_valid;
  logic [7:0] bus_addr = '0;
  logic [31:0] bus_wdata = '0, bus_rdata;
  logic [15:0] cap_data;
  pzt_controller #(.NSAMP(NSAMP)) dut (.*);
  always #4 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 15) $display("FAIL %s", what); end
  endtask
  task automatic wr(logic [7:0] a, logic [31:0] d);
    @(negedge clk); bus_we = 1; bus_addr = a; bus_wdata = d;
    @(negedge clk); bus_we = 0;
  endtask

  // Plant: y(t) = sum_j G[j] * dac(t - 25 j), i.e. a response on the chip grid.
  real hist [0:25*NG];
  always @(posedge clk) begin
    automatic real y;
    for (int i = 25 * NG; i > 0; i--) hist[i] = hist[i-1];
    hist[0] = real'(dac_fast);
    y = 0.0;
    for (int j = 0; j < NG; j++) y += G[j] * hist[25 * j];
    adc <= 14'($rtoi(y + (y >= 0.0 ? 0.5 : -0.5)));
  end

  function automatic real fabs(real v);
    return (v < 0.0) ? -v : v;
  endfunction

  int  ys [$];
  int  us [$];
  always @(negedge clk) begin
    if (!rst && cap_valid) begin
      ys.push_back(int'($signed(cap_data[13:0])));
      us.push_back(cap_data[15] ? 1 : -1);
    end
  end

  initial begin
    real h [NG + 4];
    int lag0;
    for (int i = 0; i <= 25 * NG; i++) hist[i] = 0.0;
    repeat (4) @(negedge clk);
    rst = 0;
    wr(8'h02, 32'd0);                 // integrator gain 0: open loop on the slow DAC
    wr(8'h05, 32'(AMP));
    wr(8'h04, 32'h1);                 // identification mode
    repeat (25 * 20) @(negedge clk);  // let the plant fill with noise
    wr(8'h04, 32'h11);                // start a record
    wait (us.size() == NSAMP);
    repeat (10) @(negedge clk);
    chk(dut.cap_done, "record complete");
    // Cross-correlation, normalised by the number of terms and the noise amplitude.
    for (int k = 0; k < NG + 4; k++) begin
      automatic real s = 0.0;
      for (int m = k; m < NSAMP; m++) s += real'(ys[m]) * real'(us[m - k]);
      h[k] = s / real'(NSAMP - k) / real'(AMP);
    end
    // The captured y lags the captured u by a fixed offset of whole chips: find it from the
    // first non-zero tap, then compare the whole response.
    lag0 = 0;
    for (int k = 0; k < 4; k++) if (fabs(h[k]) < 0.05) lag0 = k + 1; else break;
    $display("lag offset %0d chips; h = %5.3f %5.3f %5.3f %5.3f %5.3f %5.3f %5.3f %5.3f",
             lag0 - 1, h[lag0], h[lag0+1], h[lag0+2], h[lag0+3], h[lag0+4], h[lag0+5], h[lag0+6], h[lag0+7]);
    chk(lag0 >= 1 && lag0 <= 3, $sformatf("capture lag %0d", lag0));
    for (int j = 1; j < NG; j++)
      chk(fabs(h[lag0 - 1 + j] - G[j]) < 0.03, $sformatf("tap %0d: %f vs %f", j, h[lag0 - 1 + j], G[j]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (25 * NSAMP + 50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
