// Shared body of the end-to-end testbenches of pzt_controller. The including module declares
// the localparam NSAMP (length of a system-identification record) and instantiates the
// controller as dut, connected to the signals declared here.
//
// Sequence: program gains and all 60 coefficients over the register bus; run control mode
// with random ADC samples and compare every new fast-DAC value with a reference chain
// (input stage model, CIC convolution, twelve direct-form sections, rounding), and every
// slow-DAC update with an integrator model; check the ADC-to-DAC latency; exercise the
// low-pass, integrator hold and saturation, filter clipping, DAC saturation, then switch to
// system identification, check the white noise on the DAC and capture a full record.
  import pzt_pkg::*;
  import iir_ref_pkg::*;

  logic clk = 0, rst = 1;
  localparam logic signed [13:0] QUIET = 14'sd100;   // cancels the offset of -100: e = 0
  logic signed [13:0] adc = QUIET;
  logic signed [13:0] dac_fast;
  logic signed [15:0] dac_slow;
  logic dac_slow_stb, bus_we = 0, cap_valid;
  logic [7:0] bus_addr = '0;
  logic [31:0] bus_wdata = '0, bus_rdata;
  logic [15:0] cap_data;

  always #4 clk = ~clk;

  int checks = 0, failures = 0, cyc = 0;
  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 15) $display("FAIL %s (cycle %0d)", what, cyc); end
  endtask

  // ---- register access ----
  task automatic wr(logic [7:0] a, logic [31:0] d);
    @(negedge clk); bus_we = 1; bus_addr = a; bus_wdata = d;
    @(negedge clk); bus_we = 0;
  endtask
  task automatic rd(logic [7:0] a, output logic [31:0] d);
    @(negedge clk); bus_addr = a;
    @(negedge clk); d = bus_rdata;
  endtask

  // ---- reference model state ----
  longint k_m = 4096, ki_m = 0, off_m = 0;
  bit     sysid_m = 0, hold_m = 0, check_fast = 0, check_slow = 0;
  longint adc_h [int];      // adc at edge n
  longint e_h [int];        // e as the integrator sees it at edge n (input stage output after edge n-1)
  sos_ref sec [12];
  longint acc_m = 0, acc_prev = 0;
  localparam longint AHI = (longint'(1) <<< 49) - 1, ALO = -(longint'(1) <<< 49);
  longint fast_exp [int];   // expected dac_fast after edge n
  int n_fast = 0, n_slow = 0, lat_seen = -1;
  localparam int H [7] = '{1, 2, 3, 4, 3, 2, 1};

  // mechanism counters
  int m_clip = 0, m_dacsat = 0, m_intsat = 0, m_insat = 0, m_mode = 0, m_hold = 0,
      m_lpf = 0, m_coef = 0, m_capdone = 0;

  function automatic longint e_model(longint a);
    longint s, p;
    s = a + off_m;
    if (s > 8191) s = 8191;
    if (s < -8192) s = -8192;
    p = s * k_m;
    if (p > (longint'(1) <<< 25) - 1) p = (longint'(1) <<< 25) - 1;
    if (p < -(longint'(1) <<< 25))    p = -(longint'(1) <<< 25);
    return p;
  endfunction

  function automatic longint dac_round(longint v);
    longint r = (v + 2048) >>> 12;
    return (r > 8191) ? 8191 : r;
  endfunction

  always @(posedge clk) begin
    cyc++;
    adc_h[cyc] = longint'(adc);
    e_h[cyc]   = (cyc >= 2 && adc_h.exists(cyc - 2)) ? e_model(adc_h[cyc - 2]) : 0;
    if (adc_h.exists(cyc - 32)) adc_h.delete(cyc - 32);   // keep the history short
    if (e_h.exists(cyc - 32))   e_h.delete(cyc - 32);
    // Integrator model: uses e as it was pre_step this edge.
    acc_prev = acc_m;
    if (!hold_m) begin
      acc_m = acc_m + e_h[cyc] * ki_m;
      if (acc_m > AHI) acc_m = AHI;
      if (acc_m < ALO) acc_m = ALO;
    end
  end

  always @(negedge clk) begin
    if (!rst) begin
      // Decimation instants are taken from the CIC strobe; the values are computed here.
      // A strobe seen after edge n carries the CIC sum of e_h[n-3-i], i = 0..6; it reaches
      // the fast DAC 13 (filter) + 1 (low-pass) + 1 (output register) edges later.
      if (check_fast && dut.u_cic.dout_valid) begin
        automatic longint v = 0;
        for (int i = 0; i < 7; i++) v += H[i] * (e_h.exists(cyc - 3 - i) ? e_h[cyc - 3 - i] : 0);
        v = v >>> 4;
        for (int s = 0; s < 12; s++) v = sec[s].step(v);
        fast_exp[cyc + 15] = dac_round(v);
      end
      if (check_fast && !sysid_m && fast_exp.exists(cyc)) begin
        chk(longint'(dac_fast) == fast_exp[cyc], $sformatf("dac_fast %0d want %0d", dac_fast, fast_exp[cyc]));
        fast_exp.delete(cyc);
        n_fast++;
      end
      if (check_slow && dac_slow_stb) begin
        chk(longint'(dac_slow) == (acc_prev >>> 34), $sformatf("dac_slow %0d want %0d", dac_slow, acc_prev >>> 34));
        n_slow++;
      end
      if (dut.u_f.clip) m_clip++;
      if (dut.u_dac.sat) m_dacsat++;
      if (dut.u_int.sat) m_intsat++;
      if (dut.u_in.sat) m_insat++;
    end
  end

  task automatic load_coef(int s, real b0, real b1, real b2, real a0, real a1);
    sec[s].b0 = coef(b0); sec[s].b1 = coef(b1); sec[s].b2 = coef(b2);
    sec[s].a0 = coef(a0); sec[s].a1 = coef(a1);
    wr(8'h80 + 8'(8 * s + 0), 32'(sec[s].b0));
    wr(8'h80 + 8'(8 * s + 1), 32'(sec[s].b1));
    wr(8'h80 + 8'(8 * s + 2), 32'(sec[s].b2));
    wr(8'h80 + 8'(8 * s + 3), 32'(sec[s].a0));
    wr(8'h80 + 8'(8 * s + 4), 32'(sec[s].a1));
    m_coef += 5;
  endtask

  task automatic clear_filter();
    wr(8'h04, 32'h8 | (sysid_m ? 1 : 0) | (hold_m ? 2 : 0));
    wr(8'h04, (sysid_m ? 1 : 0) | (hold_m ? 2 : 0));
    for (int s = 0; s < 12; s++) sec[s].clear();
  endtask

  task automatic drive_random(int n, int amp);
    for (int i = 0; i < n; i++) begin
      @(negedge clk);
      adc = 14'($signed($urandom_range(2 * amp)) - amp);
    end
  endtask

  initial begin
    logic [31:0] d;
    int t0, words, ones_dac, lastw;
    real r, th;
    for (int s = 0; s < 12; s++) sec[s] = new();
    repeat (4) @(negedge clk);
    rst = 0;

    // ---- configuration: gains and a 24th-order inverse-filter-like cascade ----
    wr(8'h00, 32'(-14'sd100) & 32'h3fff); off_m = -100;
    repeat (4) @(negedge clk);
    wr(8'h01, 32'h0000_2000); k_m = 8192;           // k = 2.0
    wr(8'h02, 32'd3000);      ki_m = 3000;
    wr(8'h03, 32'd0);
    for (int s = 0; s < 12; s++) begin
      r  = 0.985 - 0.004 * s;
      th = 0.03 + 0.025 * s;
      // zeros at the plant's resonance (near the unit circle), poles damped
      load_coef(s, 0.8, -1.6 * 0.995 * $cos(th), 0.8 * 0.99, 2.0 * r * $cos(th), -r * r);
    end
    clear_filter();
    wr(8'h04, 32'h4); wr(8'h04, 32'h0);                // clear the integrator
    acc_m = 0;

    // ---- control mode: bit-exact check of both DAC paths ----
    check_fast = 1; check_slow = 1;
    drive_random(3000, 3000);
    // Latency: a step on an otherwise quiet input must reach dac_fast within the bound.
    // (one step at a time: zero the filter so its output is steady pre_step the step)
    for (int i = 0; i < 20; i++) begin @(negedge clk); adc = QUIET; end
    check_fast = 0;
    clear_filter();
    repeat (20) @(negedge clk);
    begin
      automatic logic signed [13:0] pre_step = dac_fast;
      @(negedge clk); adc = 14'sd4000; t0 = cyc;
      lat_seen = -1;
      for (int i = 0; i < 60 && lat_seen < 0; i++) begin
        @(negedge clk);
        if (dac_fast != pre_step) lat_seen = cyc - t0;
      end
    end
    for (int i = 0; i < 20; i++) begin @(negedge clk); adc = QUIET; end
    clear_filter();
    check_fast = 1;
    // 2 (input) + 3 (CIC) + up to 3 (waiting for the decimation strobe) + 13 + 1 + 1 clocks
    chk(lat_seen >= 20 && lat_seen <= 24, $sformatf("ADC to fast DAC latency %0d clocks", lat_seen));
    drive_random(2000, 8000);                          // large input: input saturation
    // Integrator hold: accumulator frozen.
    wr(8'h04, 32'h2); hold_m = 1; m_hold++;
    drive_random(500, 3000);
    wr(8'h04, 32'h0); hold_m = 0;
    drive_random(500, 3000);
    // Integrator saturation with a large ki and a constant input.
    wr(8'h02, 32'h0001_ffff); ki_m = 131071;
    for (int i = 0; i < 3000; i++) begin @(negedge clk); adc = 14'sd6000; end
    wr(8'h02, 32'd3000); ki_m = 3000;
    // Saturation: the filter becomes a pure gain of 3.9 (section 0; the others pass
    // through), so section outputs clip and the fast DAC saturates. Values are not compared
    // here (coefficients change while samples are in flight).
    check_fast = 0;
    load_coef(0, 3.9, 0.0, 0.0, 0.0, 0.0);
    for (int s = 1; s < 12; s++) load_coef(s, 1.0, 0.0, 0.0, 0.0, 0.0);
    clear_filter();
    drive_random(2000, 8191);
    // Back to the resonant cascade, checked again from a cleared state.
    for (int s = 0; s < 12; s++) begin
      r  = 0.985 - 0.004 * s;
      th = 0.03 + 0.025 * s;
      load_coef(s, 0.8, -1.6 * 0.995 * $cos(th), 0.8 * 0.99, 2.0 * r * $cos(th), -r * r);
    end
    for (int i = 0; i < 20; i++) begin @(negedge clk); adc = QUIET; end
    clear_filter();
    repeat (4) @(negedge clk);
    check_fast = 1;
    drive_random(1000, 2000);
    rd(8'h06, d);
    chk(d[8] && d[11] && d[12] && d[10], $sformatf("sticky events %b", d[12:8]));
    // Low-pass on: the fast DAC must now also move between filter outputs.
    check_fast = 0;
    wr(8'h03, 32'd3);
    begin
      automatic int moves = 0;
      automatic logic signed [13:0] prev = dac_fast;
      for (int i = 0; i < 800; i++) begin
        @(negedge clk);
        adc = 14'($signed($urandom_range(4000)) - 2000);
        if (dac_fast != prev) moves++;
        prev = dac_fast;
      end
      // with 4 clocks between filter outputs, a smoothed DAC changes on most clocks
      chk(moves > 400, $sformatf("low-pass moves %0d", moves));
      if (moves > 400) m_lpf++;
    end
    wr(8'h03, 32'd0);

    // ---- system identification mode ----
    wr(8'h05, 32'd1500);
    wr(8'h04, 32'h1); sysid_m = 1; m_mode++;
    wr(8'h04, 32'h11);                                 // start a record
    words = 0; ones_dac = 0; lastw = 0;
    fork
      begin : capture
        while (1) begin
          @(negedge clk);
          if (cap_valid) begin
            words++;
            if (words < 3000) begin
              // The captured u bit is the one on the DAC (the DAC register holds the chip
              // one clock after the LFSR output).
              chk((cap_data[15] ? 14'sd1500 : -14'sd1500) == dac_fast, "captured u matches DAC");
              chk(cap_data[14] == 1'b0, "capture word layout");
            end
            lastw = cyc;
          end
          if (!cap_valid && dut.cap_done && words == NSAMP) disable capture;
        end
      end
      begin
        while (words < NSAMP) begin
          @(negedge clk);
          adc = 14'($signed($urandom_range(1000)) - 500);
          if (dac_fast == 14'sd1500) ones_dac++;
        end
      end
    join
    repeat (30) @(negedge clk);
    rd(8'h06, d);
    chk(d[1] == 1'b1 && d[0] == 1'b0, "capture done in status");
    if (d[1]) m_capdone++;
    chk(words == NSAMP, $sformatf("record length %0d", words));
    // Back to control mode.
    wr(8'h04, 32'h0); sysid_m = 0; m_mode++;
    drive_random(200, 1000);

    // ---- mechanism coverage ----
    chk(n_fast > 500, $sformatf("fast DAC values checked %0d", n_fast));
    chk(n_slow > 20, $sformatf("slow DAC values checked %0d", n_slow));
    chk(m_clip > 0, "filter clipping happened");
    chk(m_dacsat > 0, "fast DAC saturation happened");
    chk(m_intsat > 0, "integrator saturation happened");
    chk(m_insat > 0, "input stage saturation happened");
    chk(m_hold > 0, "integrator hold happened");
    chk(m_lpf > 0, "low-pass smoothing happened");
    chk(m_mode == 2, "mode switched to identification and back");
    chk(m_coef >= 60, "coefficients loaded");
    chk(m_capdone > 0, "identification record completed");
    $display("mechanisms: clip=%0d dac_sat=%0d int_sat=%0d in_sat=%0d hold=%0d lpf=%0d mode=%0d coef=%0d capture=%0d",
             m_clip, m_dacsat, m_intsat, m_insat, m_hold, m_lpf, m_mode, m_coef, m_capdone);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000 + 30 * NSAMP) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
