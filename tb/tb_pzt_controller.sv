// End-to-end testbench of pzt_controller with a short identification record (2000 samples);
// everything else at its default size. The test sequence is in pzt_tb_body.svh.
module tb_pzt_controller;
  localparam int NSAMP = 2000;
`include "pzt_tb_body.svh"
  pzt_controller #(.NSAMP(NSAMP)) dut (.*);
endmodule
