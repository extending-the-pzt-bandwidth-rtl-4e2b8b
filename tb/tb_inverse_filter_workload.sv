// Inverse-filter workload: a 24th-order cancelling filter for a PZT with twelve mechanical
// resonances, run through the full-size iir_cascade (3 modules x 4 sections).
//
// The plant is assumed to have twelve resonances at 20, 40, ... 240 kHz with 1 kHz linewidth
// and an anti-resonance 8 % above each. Section s of the filter puts its zeros on the plant's
// resonance poles (radius 1 - pi*1 kHz/fs, fs = 31.25 MS/s) and its poles on the
// anti-resonance, damped to 3 kHz linewidth, with unit DC gain. Coefficients are rounded to
// 22 fractional bits. The gain is measured as on the bench: clear, drive a sine scaled to
// the largest gain at any section output, let it settle for 20,000 samples, then lock in
// over a whole number of periods. At each of the 24 zero and pole frequencies:
//   - the measured |F| is within 2 % of the response of the quantised coefficients (the
//     arithmetic), with no clipping;
//   - the quantised response is within 10 % of the unquantised design (the coefficient
//     width). Quantisation alone moves the 20 kHz pair by a few percent.
//
// Rounding the fed-back output to 25 bits gives a dead band: once a signal has decayed, the
// 20 kHz section can hold a constant of up to 0.5 LSB / (1 - a0 - a1), about 8e-4. The
// lock-in rejects that constant. A separate check drives an impulse and bounds the constant
// left after it has decayed.
module tb_inverse_filter_workload;
  import pzt_pkg::*;
  import iir_ref_pkg::*;
  localparam int NS = 12;
  localparam int NSETTLE = 20000;
  localparam int NMEAS = 12000;
  localparam real FS = 31.25e6;
  localparam real PI = 3.14159265358979;

  logic clk = 0, rst = 1, clr = 0;
  sig_t x = '0;
  logic x_valid = 0;
  logic cfg_we = 0;
  logic [3:0] cfg_sec = '0;
  logic [2:0] cfg_idx = '0;
  coef_t cfg_data = '0;
  sig_t y;
  logic y_valid, clip, overrun;
  iir_cascade dut (.*);
  always #4 clk = ~clk;

  int checks = 0, failures = 0, nclip = 0, novr = 0;
  real cb [NS][3];
  real ca [NS][2];
  real fz [NS], fp [NS];

  task automatic wr(int s, int i, real v);
    @(negedge clk);
    cfg_we = 1; cfg_sec = 4'(s); cfg_idx = 3'(i); cfg_data = coef_t'(coef(v));
    @(negedge clk);
    cfg_we = 0;
  endtask

  task automatic clear();
    @(negedge clk); clr = 1; @(negedge clk); clr = 0;
  endtask

  // Response of the cascade at frequency f: |F| with quantised (q=1) or unquantised
  // coefficients, and the largest gain seen at any section output.
  function automatic real mag(real f, bit q, output real peak);
    real w = 2.0 * PI * f / FS, m = 1.0;
    peak = 1.0;
    for (int s = 0; s < NS; s++) begin
      real nr, ni, dr, di, b [3], a [2];
      for (int i = 0; i < 3; i++) b[i] = q ? real'(coef(cb[s][i])) / (2.0 ** COEF_FRAC) : cb[s][i];
      for (int i = 0; i < 2; i++) a[i] = q ? real'(coef(ca[s][i])) / (2.0 ** COEF_FRAC) : ca[s][i];
      nr = b[0] + b[1] * $cos(w) + b[2] * $cos(2.0 * w);
      ni = -b[1] * $sin(w) - b[2] * $sin(2.0 * w);
      dr = 1.0 - a[0] * $cos(w) - a[1] * $cos(2.0 * w);
      di = a[0] * $sin(w) + a[1] * $sin(2.0 * w);
      m = m * $sqrt((nr * nr + ni * ni) / (dr * dr + di * di));
      if (m > peak) peak = m;
    end
    return m;
  endfunction

  // One sample into the cascade (one every 4 clocks, the CIC output rate); returns y.
  task automatic push(input real v, output real yo);
    @(negedge clk);
    x = sig_t'($rtoi(v * (2.0 ** 25)));
    x_valid = 1;
    @(negedge clk); x_valid = 0;
    repeat (2) @(negedge clk);
    yo = real'(y) / (2.0 ** 25);
  endtask

  // Steady-state lock-in gain at frequency f with input amplitude a.
  task automatic measure(input real f, input real a, output real g);
    real w = 2.0 * PI * f / FS, re = 0.0, im = 0.0, yo;
    int nper = $rtoi(NMEAS * f / FS + 0.5);
    int n_meas = $rtoi(nper * FS / f + 0.5);
    clear();
    for (int n = 0; n < NSETTLE + n_meas; n++) begin
      push(a * $sin(w * n), yo);
      if (n >= NSETTLE) begin
        re += yo * $cos(w * n);
        im += yo * $sin(w * n);
      end
    end
    g = 2.0 * $sqrt(re * re + im * im) / n_meas / a;
  endtask

  always @(posedge clk) if (!rst && clip) nclip++;
  always @(posedge clk) if (!rst && overrun) novr++;

  initial begin
    repeat (3) @(negedge clk);
    rst = 0;
    for (int s = 0; s < NS; s++) begin
      real rz, tz, rp, tp, g;
      fz[s] = 20.0e3 * (s + 1);
      fp[s] = fz[s] * 1.08;
      rz = 1.0 - PI * 1.0e3 / FS;
      tz = 2.0 * PI * fz[s] / FS;
      rp = 1.0 - PI * 3.0e3 / FS;
      tp = 2.0 * PI * fp[s] / FS;
      ca[s][0] = 2.0 * rp * $cos(tp);
      ca[s][1] = -rp * rp;
      g = (1.0 - ca[s][0] - ca[s][1]) / (1.0 - 2.0 * rz * $cos(tz) + rz * rz);
      cb[s][0] = g;
      cb[s][1] = -2.0 * g * rz * $cos(tz);
      cb[s][2] = g * rz * rz;
      wr(s, 0, cb[s][0]); wr(s, 1, cb[s][1]); wr(s, 2, cb[s][2]);
      wr(s, 3, ca[s][0]); wr(s, 4, ca[s][1]);
    end
    // Frequency response at the zero and pole frequencies.
    for (int k = 0; k < 2 * NS; k++) begin
      automatic real f = (k % 2 == 0) ? fz[k / 2] : fp[k / 2];
      real mq, mi, mr, pk, pk_i;
      mq = mag(f, 1'b1, pk);
      mi = mag(f, 1'b0, pk_i);
      measure(f, 0.25 / pk, mr);
      checks += 2;
      if (mr < mq * 0.98 || mr > mq * 1.02) begin
        failures++;
        $display("FAIL f=%0.0f Hz: |F| rtl %f, quantised design %f", f, mr, mq);
      end
      if (mq < mi * 0.9 || mq > mi * 1.1) begin
        failures++;
        $display("FAIL f=%0.0f Hz: quantised design %f, unquantised %f", f, mq, mi);
      end
      $display("f=%7.0f Hz |F| rtl %9.4f quantised %9.4f unquantised %9.4f", f, mr, mq, mi);
    end
    checks++;
    if (nclip != 0 || novr != 0) begin
      failures++;
      $display("FAIL clipping %0d overrun %0d", nclip, novr);
    end
    // Impulse: the constant left after decay stays inside the dead band.
    begin
      automatic real yo, off = 0.0, band = 0.0;
      clear();
      for (int n = 0; n < 40000; n++) begin
        push((n == 0) ? 0.0625 : 0.0, yo);
        if (n >= 30000) off += yo;
      end
      off = off / 10000.0;
      for (int s = 0; s < NS; s++) band += 0.5 * (2.0 ** -25) / (1.0 - ca[s][0] - ca[s][1]);
      $display("offset after impulse %g, dead band %g", off, band);
      checks++;
      if (off > band || off < -band) begin failures++; $display("FAIL offset"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (4 * (2 * NS * (NSETTLE + NMEAS + 2000) + 50000)) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
