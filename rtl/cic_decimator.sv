// CIC decimator: resamples the 125 MS/s error signal to the 31.25 MS/s rate of the
// time-multiplexed IIR cascade.
//
// N integrators run at the input rate, every R-th integrator value is passed to N comb
// stages (differential delay M) and the (RM)^N gain is removed with an arithmetic right
// shift (R*M must be a power of two). The paper gives the rate change (125 MHz to 31.25 MHz,
// R = 4) and a CIC latency of 3 + 1 clocks; N = 2 and M = 1 are this design's choice, made
// because the group delay N(RM-1)/2 is then 3 input clocks.
// Integrators wrap (two's complement), which the comb stages undo exactly.
// Timing: dout_valid is a one-clock strobe every R clocks, free running after reset; dout is
// valid while dout_valid is high and holds until the next strobe.
module cic_decimator #(
  parameter int W = 26,
  parameter int R = 4,
  parameter int N = 2,
  parameter int M = 1
) (
  input  logic                clk,
  input  logic                rst,
  input  logic signed [W-1:0] din,
  output logic signed [W-1:0] dout,
  output logic                dout_valid
);
  localparam int GROW = N * $clog2(R * M);
  localparam int IW   = W + GROW;

  logic signed [IW-1:0] integ [N];
  logic signed [IW-1:0] comb_dly [N][M];
  logic signed [IW-1:0] comb_in [N+1];
  logic [$clog2(R)-1:0] phase;
  logic signed [IW-1:0] samp;
  logic                 samp_valid;

  // Comb chain is combinational between the sample register and the output register.
  always_comb begin
    comb_in[0] = samp;
    for (int i = 0; i < N; i++) comb_in[i+1] = comb_in[i] - comb_dly[i][M-1];
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i < N; i++) begin
        integ[i] <= '0;
        for (int j = 0; j < M; j++) comb_dly[i][j] <= '0;
      end
      phase      <= '0;
      samp       <= '0;
      samp_valid <= 1'b0;
      dout       <= '0;
      dout_valid <= 1'b0;
    end else begin
      integ[0] <= integ[0] + IW'(din);
      for (int i = 1; i < N; i++) integ[i] <= integ[i] + integ[i-1];
      phase      <= (phase == $clog2(R)'(R - 1)) ? '0 : phase + 1'b1;
      samp_valid <= (phase == $clog2(R)'(R - 1));
      if (phase == $clog2(R)'(R - 1)) samp <= integ[N-1];
      dout_valid <= samp_valid;
      if (samp_valid) begin
        for (int i = 0; i < N; i++) begin
          comb_dly[i][0] <= comb_in[i];
          for (int j = 1; j < M; j++) comb_dly[i][j] <= comb_dly[i][j-1];
        end
        dout <= W'(comb_in[N] >>> GROW);
      end
    end
  end
endmodule
