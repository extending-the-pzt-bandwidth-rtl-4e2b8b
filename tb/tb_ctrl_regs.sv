// Testbench of ctrl_regs: register writes and read-back, reset values (k = 1.0), the
// one-clock sysid_start pulse, the coefficient write decoding (section, index, data), status
// read-back and the sticky event bits with write-one-to-clear.
module tb_ctrl_regs;
  import pzt_pkg::*;
  logic clk = 0, rst = 1, bus_we = 0;
  logic [7:0] bus_addr = '0;
  logic [31:0] bus_wdata = '0, bus_rdata;
  cfg_t cfg;
  logic sysid_start, coef_we;
  logic [1:0] status = 2'b10;
  logic [4:0] events = '0;
  logic [3:0] coef_sec;
  logic [2:0] coef_idx;
  coef_t coef_data;
  ctrl_regs dut (.*);
  always #4 clk = ~clk;
  int checks = 0, failures = 0, nstart = 0, ncoef = 0;
  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask
  task automatic wr(logic [7:0] a, logic [31:0] d);
    @(negedge clk); bus_we = 1; bus_addr = a; bus_wdata = d;
    @(negedge clk); bus_we = 0;
  endtask
  task automatic rd(logic [7:0] a, output logic [31:0] d);
    @(negedge clk); bus_addr = a;
    @(negedge clk); d = bus_rdata;
  endtask
  always @(posedge clk) begin
    if (!rst && sysid_start) nstart++;
    if (!rst && coef_we) ncoef++;
  end
  initial begin
    logic [31:0] d;
    repeat (3) @(negedge clk);
    rst = 0;
    rd(8'h01, d); chk(d == 32'h1000, "k resets to 1.0");
    chk(cfg.mode_sysid == 0 && cfg.ki == 0, "reset values");
    wr(8'h00, 32'h0000_2abc); rd(8'h00, d); chk(d == 32'h2abc && cfg.offset == 14'sh2abc, "offset");
    wr(8'h01, 32'h0002_3456); chk(cfg.k == 18'sh23456, "k");
    wr(8'h02, 32'h0001_0203); rd(8'h02, d); chk(d == 32'h10203 && cfg.ki == 18'sh10203, "ki");
    wr(8'h03, 32'h0000_0007); chk(cfg.lpf_shift == 4'd7, "lpf_shift");
    wr(8'h05, 32'h0000_1fff); chk(cfg.wn_amp == 14'h1fff, "wn_amp");
    wr(8'h04, 32'h0000_000b);
    chk(cfg.mode_sysid && cfg.int_hold && !cfg.int_clr && cfg.iir_clr, "control bits");
    chk(nstart == 0, "no start yet");
    wr(8'h04, 32'h0000_0011);
    @(negedge clk);
    chk(nstart == 1 && cfg.mode_sysid && !cfg.int_hold, "start pulse one clock");
    // Coefficient writes.
    for (int s = 0; s < 12; s++)
      for (int i = 0; i < 5; i++) begin
        @(negedge clk); bus_we = 1; bus_addr = 8'h80 + 8'(8 * s + i); bus_wdata = 32'(s * 1000 + i);
        @(negedge clk); bus_we = 0;
        chk(coef_we && coef_sec == 4'(s) && coef_idx == 3'(i) && coef_data == 25'(s * 1000 + i), "coef decode");
      end
    @(negedge clk);
    chk(ncoef == 60, $sformatf("coef writes %0d", ncoef));
    // Status and sticky events.
    rd(8'h06, d); chk(d[1:0] == 2'b10 && d[12:8] == 0, "status");
    @(negedge clk); events = 5'b00101; @(negedge clk); events = '0;
    rd(8'h06, d); chk(d[12:8] == 5'b00101, "sticky set");
    wr(8'h06, 32'h0000_0100);
    rd(8'h06, d); chk(d[12:8] == 5'b00100, "sticky cleared");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
