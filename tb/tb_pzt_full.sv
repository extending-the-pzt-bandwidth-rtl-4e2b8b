// Full-size end-to-end testbench of pzt_controller: every parameter at its default, so the
// system-identification record is the full 4,000,000 samples at 5 MHz (100 million clocks).
// The test sequence is in pzt_tb_body.svh.
module tb_pzt_full;
  localparam int NSAMP = 4000000;
`include "pzt_tb_body.svh"
  pzt_controller dut (.*);
endmodule
