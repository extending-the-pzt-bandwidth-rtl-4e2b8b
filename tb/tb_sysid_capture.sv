// Testbench of sysid_capture with a short record (NSAMP = 300): one word per chip strobe,
// packed {u, 0, y}, exactly NSAMP words, then done; a second start restarts the record; no
// words before start or after done.
module tb_sysid_capture;
  logic clk = 0, rst = 1, start = 0, chip_stb = 0, u = 0;
  logic signed [13:0] y = '0;
  logic s_valid, busy, done;
  logic [15:0] s_data;
  sysid_capture #(.NSAMP(300), .ADC_W(14)) dut (.*);
  always #4 clk = ~clk;
  int checks = 0, failures = 0, nwords = 0;
  logic [15:0] expq [$];
  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask
  always @(negedge clk) begin
    if (!rst && s_valid) begin
      nwords++;
      if (expq.size() == 0) chk(0, "word outside a record");
      else begin
        logic [15:0] w;
        w = expq.pop_front();
        chk(s_data == w, $sformatf("word %0d got %h want %h", nwords, s_data, w));
      end
    end
  end
  task automatic run(int nstb, bit expect_capture);
    for (int i = 0; i < nstb; i++) begin
      @(negedge clk);
      chip_stb = 1; u = 1'($urandom); y = 14'($urandom);
      if (expect_capture && i < 300) expq.push_back({u, 1'b0, y});
      @(negedge clk); chip_stb = 0;
      repeat ($urandom_range(3)) @(negedge clk);
    end
  endtask
  initial begin
    repeat (3) @(negedge clk);
    rst = 0;
    run(20, 0);
    chk(nwords == 0 && !busy && !done, "idle before start");
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    chk(busy && !done, "busy after start");
    run(350, 1);
    repeat (3) @(negedge clk);
    chk(nwords == 300, $sformatf("record length %0d", nwords));
    chk(done && !busy, "done after the record");
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    chk(!done && busy, "restart");
    run(310, 1);
    repeat (3) @(negedge clk);
    chk(nwords == 600, $sformatf("second record %0d", nwords));
    chk(expq.size() == 0, "all words seen");
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
