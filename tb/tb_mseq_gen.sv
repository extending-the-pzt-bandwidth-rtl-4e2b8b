// Testbench of mseq_gen: compares the chip sequence with an independent model of the
// recurrence s(n) = s(n-23) xor s(n-18), checks the 25-clock chip spacing, the +amp / -amp
// mapping and the balance of ones and zeros, and runs a short LFSR (x^7 + x^6 + 1) through a
// full period to check that it is maximal (period 127, never stuck).
module tb_mseq_gen;
  logic clk = 0, rst = 1, en = 0;
  logic [12:0] amp = 13'd1234;
  logic bit_out, chip_stb, bit7, stb7;
  logic signed [13:0] wn, wn7;
  mseq_gen #(.LFSR_N(23), .TAP_A(23), .TAP_B(18), .DIV(25), .AMP_W(14)) dut (.*);
  mseq_gen #(.LFSR_N(7), .TAP_A(7), .TAP_B(6), .DIV(2), .AMP_W(14)) dut7 (
    .clk, .rst, .en, .amp, .bit_out(bit7), .wn(wn7), .chip_stb(stb7));
  always #4 clk = ~clk;
  int checks = 0, failures = 0, cyc = 0, last = -1, ones = 0, n = 0;
  bit hist [$];
  bit h7 [$];
  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask
  always @(posedge clk) cyc++;
  always @(negedge clk) begin
    if (!rst) begin
      chk(wn == (bit_out ? 14'sd1234 : -14'sd1234), "wn mapping");
      if (chip_stb) begin
        if (last >= 0) chk(cyc - last == 25, $sformatf("chip spacing %0d", cyc - last));
        last = cyc;
        hist.push_back(bit_out);
        if (hist.size() > 23) begin
          // Bit that entered 23 chips ago leaves at sr[0]; model: s(n) = s(n-23) ^ s(n-18)
          // applies to the stream read from sr[22] ... here checked on the output stream.
          chk(hist[hist.size()-1] == (hist[hist.size()-24] ^ hist[hist.size()-19]), "recurrence");
        end
        ones += bit_out; n++;
      end
      if (stb7) h7.push_back(bit7);
    end
  end
  initial begin

    repeat (3) @(negedge clk);
    rst = 0;
    repeat (10) @(negedge clk);
    chk(!chip_stb, "idle while en = 0");
    en = 1;
    repeat (25 * 3000) @(negedge clk);
    chk(n > 2900, "chip count");
    chk(ones > n * 35 / 100 && ones < n * 65 / 100, $sformatf("balance %0d/%0d", ones, n));
    // Short LFSR: period exactly 127 and 64 ones per period.
    begin
      automatic int per = -1, o = 0;
      for (int p = 1; p < 200 && per < 0; p++) begin
        automatic bit same = 1;
        for (int i = 0; i < 200; i++) if (h7[i] != h7[i + p]) same = 0;
        if (same) per = p;
      end
      chk(per == 127, $sformatf("period %0d", per));
      for (int i = 0; i < 127; i++) o += h7[i];
      chk(o == 64, $sformatf("ones per period %0d", o));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
