// Closed-loop workload: the two branches of the controller against simple plant models.
//
// Part 1, integral lock. The slow DAC drives a plant of unit gain, and the testbench closes
// the loop as an interferometer error signal does: adc = 8192 (d - p), with a disturbance d
// made of a DC step of 0.3 and a 500 Hz sine of 0.1 (full scale 1). With loop gain k = 1 the
// integrator adds ki e to its output every clock, so the loop is an integrator of crossover
// w_c = ki f_clk (4.9 kHz for ki = 2^-12). Checked: the DC step is nulled to within 3 ADC
// LSB, and the 500 Hz residual equals |S| = |jw / (jw + w_c e^(-jw tau))| (tau = 1 us) within 10 %.
// The analog low-pass after the slow DAC is left out of this plant.
//
// Part 2, resonance cancellation. The fast DAC drives a plant with one mechanical resonance,
// 100 kHz wide 3 kHz (a resonant second-order response of unit DC gain, stepped at 125 MHz),
// and the loop is open: adc carries a sine of amplitude 0.5 and the plant output is measured
// by lock-in. With F passing the signal through, |FG| shows the resonance (about 33 at
// 100 kHz). With section 0 of F loaded with the cancelling section (zeros on the plant's
// poles, a double real pole at the resonance frequency), FG becomes the smooth response
// w0^2 / (s + w0)^2 (0.5 at 100 kHz). Checked at 20 and 100 kHz in both settings: the
// measured |FG| within 5 % of the product of the plant, the filter (quantised coefficients),
// the CIC and the 4-clock hold.
module tb_closed_loop_workload;
  import pzt_pkg::*;
  import iir_ref_pkg::*;
  localparam real FCLK = 125.0e6;
  localparam real FS = 31.25e6;
  localparam real PI = 3.14159265358979;
  localparam real F0 = 100.0e3;
  localparam real DF = 3.0e3;

  logic clk = 0, rst = 1;
  logic signed [13:0] adc = '0;
  logic signed [13:0] dac_fast;
  logic signed [15:0] dac_slow;
  logic dac_slow_stb, bus_we = 0, cap_valid;
  logic [7:0] bus_addr = '0;
  logic [31:0] bus_wdata = '0, bus_rdata;
  logic [15:0] cap_data;
  pzt_controller #(.NSAMP(1000)) dut (.*);
  always #4 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask
  task automatic wr(logic [7:0] a, logic [31:0] d);
    @(negedge clk); bus_we = 1; bus_addr = a; bus_wdata = d;
    @(negedge clk); bus_we = 0;
  endtask
  task automatic wr_sec(int s, real b0, real b1, real b2, real a0, real a1);
    wr(8'(128 + 8 * s + 0), 32'(coef(b0)));
    wr(8'(128 + 8 * s + 1), 32'(coef(b1)));
    wr(8'(128 + 8 * s + 2), 32'(coef(b2)));
    wr(8'(128 + 8 * s + 3), 32'(coef(a0)));
    wr(8'(128 + 8 * s + 4), 32'(coef(a1)));
  endtask
  function automatic real q(real v);
    return real'(coef(v)) / (2.0 ** COEF_FRAC);
  endfunction

  function automatic int sat14(real v);
    automatic int i = $rtoi(v >= 0.0 ? v + 0.5 : v - 0.5);
    return (i > 8191) ? 8191 : (i < -8192) ? -8192 : i;
  endfunction

  // |H(e^jw)| of b0 + b1 z^-1 + b2 z^-2 over 1 - a0 z^-1 - a1 z^-2.
  function automatic real sos_mag(real w, real b0, real b1, real b2, real a0, real a1);
    real nr, ni, dr, di;
    nr = b0 + b1 * $cos(w) + b2 * $cos(2.0 * w);
    ni = -b1 * $sin(w) - b2 * $sin(2.0 * w);
    dr = 1.0 - a0 * $cos(w) - a1 * $cos(2.0 * w);
    di = a0 * $sin(w) + a1 * $sin(2.0 * w);
    return $sqrt((nr * nr + ni * ni) / (dr * dr + di * di));
  endfunction

  // Plant resonance at 125 MHz: y = pa0 y1 + pa1 y2 + pg x.
  real pr, pa0, pa1, pg;
  // Cancelling section at 31.25 MS/s.
  real cb0, cb1, cb2, ca0, ca1;

  // Plant state, stepped every clock from the DAC values.
  real yp1 = 0.0, yp2 = 0.0, ypl = 0.0;
  bit  part2 = 0;
  real dist_dc = 0.0, dist_amp = 0.0, dist_f = 0.0, drive_amp = 0.0, drive_f = 0.0;
  longint tclk = 0;

  always @(posedge clk) begin
    automatic real ph, yn;
    tclk <= tclk + 1;
    if (!part2) begin
      // Part 1: adc = 8192 (d - p) with p the slow DAC output.
      ph = 2.0 * PI * dist_f * real'(tclk) / FCLK;
      adc <= 14'(sat14(8192.0 * (dist_dc + dist_amp * $sin(ph) - real'(dac_slow) / 32768.0)));
    end else begin
      ph = 2.0 * PI * drive_f * real'(tclk) / FCLK;
      adc <= 14'(sat14(8192.0 * drive_amp * $sin(ph)));
      yn  = pa0 * yp1 + pa1 * yp2 + pg * real'(dac_fast) / 8192.0;
      yp2 <= yp1;
      yp1 <= yn;
      ypl <= yn;
    end
  end

  // Lock-in of a sampled quantity at frequency f over n clocks; returns amplitude and mean.
  task automatic lockin(input real f, input int n, input bit of_plant, output real amp,
                        output real mean);
    real re = 0.0, im = 0.0, sum = 0.0, v, ph;
    for (int i = 0; i < n; i++) begin
      @(negedge clk);
      v  = of_plant ? ypl : real'(adc) / 8192.0;
      ph = 2.0 * PI * f * real'(tclk) / FCLK;
      re += v * $cos(ph);
      im += v * $sin(ph);
      sum += v;
    end
    amp  = 2.0 * $sqrt(re * re + im * im) / n;
    mean = sum / n;
  endtask

  task automatic measure_fg(input real f, input bit cancel, input string name);
    real amp, mean, w, wf, exp_m, cic, zoh;
    int n;
    drive_f = f;
    repeat (80000) @(negedge clk);                 // plant and filter settle
    n = $rtoi(FCLK / f * $floor(100.0e-6 * f) + 0.5);
    lockin(f, n, 1'b1, amp, mean);
    amp = amp / drive_amp;
    w  = 2.0 * PI * f / FCLK;
    wf = 2.0 * PI * f / FS;
    cic = 0.0;
    begin
      real cr = 0.0, ci = 0.0;
      for (int j = 0; j < 7; j++) begin
        automatic real h = (j < 4) ? (j + 1) / 16.0 : (7 - j) / 16.0;
        cr += h * $cos(w * j);
        ci -= h * $sin(w * j);
      end
      cic = $sqrt(cr * cr + ci * ci);
    end
    zoh = $sin(2.0 * w) / (4.0 * $sin(0.5 * w));
    exp_m = sos_mag(w, pg, 0.0, 0.0, pa0, pa1) * cic * zoh;
    if (cancel) exp_m = exp_m * sos_mag(wf, q(cb0), q(cb1), q(cb2), q(ca0), q(ca1));
    $display("%s f=%6.0f Hz |FG| measured %8.4f expected %8.4f", name, f, amp, exp_m);
    chk(amp > exp_m * 0.95 && amp < exp_m * 1.05, $sformatf("%s |FG| at %0.0f Hz", name, f));
  endtask

  initial begin
    real amp, mean, wc, w, sr, si, s_exp;
    repeat (5) @(negedge clk);
    rst = 0;
    // ---------------- Part 1: integral lock ----------------
    wr(8'h03, 32'd0);                              // low-pass bypassed
    for (int s = 0; s < 12; s++) wr_sec(s, 0.0, 0.0, 0.0, 0.0, 0.0);
    wr(8'h02, 32'd4096);                           // ki = 2^-12
    wr(8'h04, 32'h8); wr(8'h04, 32'h0);            // clear the filter
    dist_dc = 0.3; dist_amp = 0.1; dist_f = 500.0;
    repeat (100000) @(negedge clk);
    lockin(dist_f, 2 * 250000, 1'b0, amp, mean);
    wc = 4096.0 / (2.0 ** KI_FRAC) * FCLK;
    w  = 2.0 * PI * dist_f;
    // S = jw / (jw + wc e^{-jw tau})
    sr = wc * $cos(w * 1.0e-6);
    si = w - wc * $sin(w * 1.0e-6);
    s_exp = w / $sqrt(sr * sr + si * si);
    $display("lock: residual at 500 Hz %f (|S| %f, expected %f), mean error %g", amp,
             amp / dist_amp, s_exp, mean);
    chk(amp / dist_amp > s_exp * 0.9 && amp / dist_amp < s_exp * 1.1, "500 Hz suppression");
    chk(mean < 3.0 / 8192.0 && mean > -3.0 / 8192.0, "DC step nulled");
    chk(real'(dac_slow) / 32768.0 > 0.19 && real'(dac_slow) / 32768.0 < 0.41,
        "slow DAC holds the DC step plus the opposed sine");

    // ---------------- Part 2: resonance cancellation ----------------
    wr(8'h02, 32'd0);
    wr(8'h04, 32'h4); wr(8'h04, 32'h0);            // empty the integrator
    pr  = $exp(-PI * DF / FCLK);
    pa0 = 2.0 * pr * $cos(2.0 * PI * F0 / FCLK);
    pa1 = -pr * pr;
    pg  = 1.0 - pa0 - pa1;
    begin
      real rz, pz;
      rz = $exp(-PI * DF / FS);
      pz = $exp(-2.0 * PI * F0 / FS);
      ca0 = 2.0 * pz;
      ca1 = -pz * pz;
      cb0 = (1.0 - ca0 - ca1) / (1.0 - 2.0 * rz * $cos(2.0 * PI * F0 / FS) + rz * rz);
      cb1 = -2.0 * cb0 * rz * $cos(2.0 * PI * F0 / FS);
      cb2 = cb0 * rz * rz;
    end
    drive_amp = 0.5;
    part2 = 1;
    // F passes through: every section b0 = 1.
    for (int s = 0; s < 12; s++) wr_sec(s, 1.0, 0.0, 0.0, 0.0, 0.0);
    wr(8'h04, 32'h8); wr(8'h04, 32'h0);
    measure_fg(20.0e3, 1'b0, "F = 1     ");
    measure_fg(F0, 1'b0, "F = 1     ");
    // Section 0 cancels the resonance.
    wr_sec(0, cb0, cb1, cb2, ca0, ca1);
    wr(8'h04, 32'h8); wr(8'h04, 32'h0);
    measure_fg(20.0e3, 1'b1, "F = 1/G   ");
    measure_fg(F0, 1'b1, "F = 1/G   ");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
