// Testbench of iir_sos_tdm: one module running four second-order sections in turn.
//
// Loads four resonant sections (poles r e^{+-j theta}, random zeros), one of them with a large
// gain so that clipping occurs, drives random samples at the 1-in-4 rate and with longer
// gaps, and compares every output with the direct-form reference model. Also checks the
// latency of exactly NSEC clocks, the overrun flag, the clip flag and the state clear.
module tb_iir_sos_tdm;
  import pzt_pkg::*;
  import iir_ref_pkg::*;

  localparam int NSEC = 4;
  logic clk = 0, rst = 1, clr = 0;
  sig_t x = '0;
  logic x_valid = 0;
  logic cfg_we = 0;
  logic [1:0] cfg_sec = '0;
  logic [2:0] cfg_idx = '0;
  coef_t cfg_data = '0;
  sig_t y;
  logic y_valid, clip, overrun;

  iir_sos_tdm #(.NSEC(NSEC)) dut (.*);

  always #4 clk = ~clk;

  int checks = 0, failures = 0;
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  sos_ref sec [NSEC];
  longint expq [$];
  int     tin  [$];
  int     n_out = 0, n_clip_seen = 0, n_ovr_seen = 0;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s (cycle %0d)", what, cycle);
    end
  endtask

  task automatic wr(int s, int i, longint v);
    @(negedge clk);
    cfg_we = 1; cfg_sec = 2'(s); cfg_idx = 3'(i); cfg_data = coef_t'(v);
    @(negedge clk);
    cfg_we = 0;
  endtask

  task automatic load_sections(real gain3);
    real r, th, g;
    for (int s = 0; s < NSEC; s++) begin
      r  = 0.95 + 0.01 * s;
      th = 0.05 + 0.1 * s;
      g  = (s == 3) ? gain3 : 0.3;
      sec[s].b0 = coef(g);
      sec[s].b1 = coef(g * (($urandom_range(200) / 100.0) - 1.0));
      sec[s].b2 = coef(g * (($urandom_range(100) / 100.0) - 0.5));
      sec[s].a0 = coef(2.0 * r * $cos(th));
      sec[s].a1 = coef(-r * r);
      wr(s, 0, sec[s].b0); wr(s, 1, sec[s].b1); wr(s, 2, sec[s].b2);
      wr(s, 3, sec[s].a0); wr(s, 4, sec[s].a1);
    end
  endtask

  function automatic longint ref_run(longint v);
    for (int s = 0; s < NSEC; s++) v = sec[s].step(v);
    return v;
  endfunction

  function automatic int ref_clips();
    int c = 0;
    for (int s = 0; s < NSEC; s++) c += sec[s].clips;
    return c;
  endfunction

  task automatic send(longint v, int gap);
    @(negedge clk);
    x = sig_t'(v); x_valid = 1;
    expq.push_back(ref_run(v));
    tin.push_back(cycle);
    @(negedge clk);
    x_valid = 0;
    repeat (gap - 1) @(negedge clk);
  endtask

  // Output monitor: values and latency.
  always @(posedge clk) begin
    if (!rst && y_valid) begin
      longint e;
      int t0;
      if (expq.size() == 0) chk(0, "unexpected y_valid");
      else begin
        e  = expq.pop_front();
        t0 = tin.pop_front();
        chk(longint'(y) == e, $sformatf("output %0d: got %0d want %0d", n_out, y, e));
        chk(cycle - t0 == NSEC, $sformatf("latency %0d", cycle - t0));
        n_out++;
      end
    end
    if (!rst && clip) n_clip_seen++;
    if (!rst && overrun) n_ovr_seen++;
  end

  initial begin
    for (int s = 0; s < NSEC; s++) sec[s] = new();
    repeat (3) @(negedge clk);
    rst = 0;
    load_sections(0.3);
    // Impulse response, then random samples at the full 1-in-4 rate.
    send(longint'(1) <<< 23, 4);
    repeat (60) send(0, 4);
    repeat (300) send(longint'($urandom_range(2**24)) - (longint'(1) <<< 23), 4);
    // Irregular gaps.
    repeat (100) send(longint'($urandom_range(2**24)) - (longint'(1) <<< 23), 4 + $urandom_range(5));
    repeat (10) @(negedge clk);
    chk(expq.size() == 0, "all outputs seen");
    chk(n_clip_seen == ref_clips(), $sformatf("clip count %0d vs reference %0d", n_clip_seen, ref_clips()));
    // Large gain in the last section: outputs must clip like the reference.
    wr(3, 0, coef(3.9));
    sec[3].b0 = coef(3.9);
    repeat (200) send(((($urandom_range(1)) != 0) ? 1 : -1) * (longint'(1) <<< 24) + longint'($urandom_range(1000)), 4);
    repeat (10) @(negedge clk);
    chk(n_clip_seen > 0, "clip flag raised");
    chk(n_clip_seen == ref_clips(), $sformatf("clip count %0d vs reference %0d", n_clip_seen, ref_clips()));
    // Clear: states zero, so an impulse gives the fresh impulse response.
    @(negedge clk); clr = 1; @(negedge clk); clr = 0;
    for (int s = 0; s < NSEC; s++) sec[s].clear();
    send(longint'(1) <<< 22, 4);
    repeat (20) send(0, 4);
    // Overrun: a second sample one clock after the first is ignored and flagged.
    @(negedge clk); x = sig_t'(1000); x_valid = 1;
    expq.push_back(ref_run(1000)); tin.push_back(cycle);
    @(negedge clk); x = sig_t'(5000); x_valid = 1;
    @(negedge clk); x_valid = 0;
    repeat (10) @(negedge clk);
    chk(n_ovr_seen == 1, $sformatf("overrun flagged once (%0d)", n_ovr_seen));
    chk(expq.size() == 0, "all outputs seen at end");
    chk(n_out > 600, "output count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
