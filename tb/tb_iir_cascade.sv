// Testbench of iir_cascade at the full size (3 modules x 4 sections = 24th order).
//
// Loads twelve different resonant sections through the coefficient port, drives random
// samples at the 31.25 MS/s rate (one every 4 clocks) and compares each output with a chain
// of twelve direct-form reference sections. Checks the 12 + 1 clock latency, that a sample is
// accepted every 4 clocks without overrun, and that each section's coefficients land in the
// right place (an impulse through a cascade where only one section is non-trivial).
module tb_iir_cascade;
  import pzt_pkg::*;
  import iir_ref_pkg::*;
  localparam int NMOD = 3, NSEC = 4, NS = NMOD * NSEC;
  logic clk = 0, rst = 1, clr = 0;
  sig_t x = '0;
  logic x_valid = 0;
  logic cfg_we = 0;
  logic [3:0] cfg_sec = '0;
  logic [2:0] cfg_idx = '0;
  coef_t cfg_data = '0;
  sig_t y;
  logic y_valid, clip, overrun;
  iir_cascade #(.NMOD(NMOD), .NSEC(NSEC)) dut (.*);
  always #4 clk = ~clk;

  int checks = 0, failures = 0, cycle = 0, nout = 0, novr = 0;
  always @(posedge clk) cycle <= cycle + 1;
  sos_ref sec [NS];
  longint expq [$];
  int     tin [$];

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s (cycle %0d)", what, cycle); end
  endtask

  task automatic wr(int s, int i, longint v);
    @(negedge clk);
    cfg_we = 1; cfg_sec = 4'(s); cfg_idx = 3'(i); cfg_data = coef_t'(v);
    @(negedge clk);
    cfg_we = 0;
  endtask

  task automatic load(int s, real b0, real b1, real b2, real a0, real a1);
    sec[s].b0 = coef(b0); sec[s].b1 = coef(b1); sec[s].b2 = coef(b2);
    sec[s].a0 = coef(a0); sec[s].a1 = coef(a1);
    wr(s, 0, sec[s].b0); wr(s, 1, sec[s].b1); wr(s, 2, sec[s].b2);
    wr(s, 3, sec[s].a0); wr(s, 4, sec[s].a1);
  endtask

  task automatic send(longint v);
    @(negedge clk);
    x = sig_t'(v); x_valid = 1;
    for (int s = 0; s < NS; s++) v = sec[s].step(v);
    expq.push_back(v); tin.push_back(cycle);
    @(negedge clk); x_valid = 0;
    repeat (2) @(negedge clk);
  endtask

  always @(posedge clk) begin
    if (!rst && y_valid) begin
      longint e; int t0;
      if (expq.size() == 0) chk(0, "unexpected y_valid");
      else begin
        e = expq.pop_front(); t0 = tin.pop_front();
        chk(longint'(y) == e, $sformatf("out %0d got %0d want %0d", nout, y, e));
        chk(cycle - t0 == NS + 1, $sformatf("latency %0d", cycle - t0));
        nout++;
      end
    end
    if (!rst && overrun) novr++;
  end

  initial begin
    real r, th;
    for (int s = 0; s < NS; s++) sec[s] = new();
    repeat (3) @(negedge clk);
    rst = 0;
    // Routing check: all sections pass-through (b0 = 1) except section s0 = 0.5 gain.
    for (int s = 0; s < NS; s++) load(s, 1.0, 0.0, 0.0, 0.0, 0.0);
    for (int s0 = 0; s0 < NS; s0 += 5) begin
      load(s0, 0.5, 0.25, 0.0, 0.5, 0.0);
      send(longint'(1) <<< 24);
      repeat (8) send(0);
      load(s0, 1.0, 0.0, 0.0, 0.0, 0.0);
      // The RTL keeps products (transposed form), the model keeps samples: clear both
      // before using the new coefficients.
      @(negedge clk); clr = 1; @(negedge clk); clr = 0;
      for (int s = 0; s < NS; s++) sec[s].clear();
      repeat (4) send(0);
    end
    // Twelve resonant sections of an inverse-filter-like cascade.
    for (int s = 0; s < NS; s++) begin
      r  = 0.97 + 0.002 * s;
      th = 0.02 + 0.03 * s;
      load(s, 0.6, -1.2 * $cos(th + 0.01), 0.6 * 0.99, 2.0 * r * $cos(th), -r * r);
    end
    @(negedge clk); clr = 1; @(negedge clk); clr = 0;
    for (int s = 0; s < NS; s++) sec[s].clear();
    send(longint'(1) <<< 23);
    repeat (200) send(0);
    repeat (600) send(longint'($urandom_range(2**23)) - (longint'(1) <<< 22));
    repeat (20) @(negedge clk);
    chk(expq.size() == 0, "all outputs seen");
    chk(novr == 0, "no overrun at the 1-in-4 rate");
    chk(nout > 800, $sformatf("output count %0d", nout));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
