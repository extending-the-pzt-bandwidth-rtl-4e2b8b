// Fast-DAC output stage: configuration switch and synchronisation register.
//
// In control mode (mode_sysid = 0) the low-passed inverse-filter path, a signal word in
// [-1, 1) with IN_W - 1 fractional bits, is rounded half up to DAC_W bits with saturation.
// In system-identification mode the M-sequence word wn drives the DAC instead, as in the
// paper's identification set-up where the white noise replaces the filter branch; the
// integral branch keeps running in both modes. The mode multiplexer is this design's way of
// switching between the two configurations. Timing: one output register (the paper's output
// synchronisation flip-flop); dac and sat follow their inputs by one clock.
module fast_dac_out #(
  parameter int IN_W  = 26,
  parameter int DAC_W = 14
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     mode_sysid,
  input  logic signed [IN_W-1:0]   x,
  input  logic signed [DAC_W-1:0]  wn,
  output logic signed [DAC_W-1:0]  dac,
  output logic                     sat
);
  localparam int SH = IN_W - DAC_W;
  localparam logic signed [IN_W:0] HI = (IN_W+1)'(2**(DAC_W-1) - 1);
  logic signed [IN_W:0] r;

  always_comb r = ((IN_W+1)'(x) + (IN_W+1)'(1 <<< (SH - 1))) >>> SH;

  always_ff @(posedge clk) begin
    if (rst) begin
      dac <= '0;
      sat <= 1'b0;
    end else if (mode_sysid) begin
      dac <= wn;
      sat <= 1'b0;
    end else if (r > HI) begin
      dac <= {1'b0, {(DAC_W-1){1'b1}}};
      sat <= 1'b1;
    end else begin
      dac <= DAC_W'(r);
      sat <= 1'b0;
    end
  end
endmodule
