// First-order low-pass filter that follows the inverse filter F.
//
// An exponential smoother y <= y + ((x - y) >>> shift) running every 125 MHz clock on the
// held output of F, so it also smooths the 31.25 MS/s steps. The time constant is 2^shift
// clocks; shift = 0 passes x through with one clock of delay. The paper only says that F is
// followed by a first-order filter; this structure and its programmable time constant are
// this design's choice. The difference is one bit wider than the words, so it cannot wrap.
module lowpass1 #(
  parameter int W       = 26,
  parameter int SHIFT_W = 4
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic signed [W-1:0]  x,
  input  logic [SHIFT_W-1:0]   shift,
  output logic signed [W-1:0]  y
);
  logic signed [W:0] diff;
  logic signed [W:0] step;

  always_comb begin
    diff = (W+1)'(x) - (W+1)'(y);
    step = diff >>> shift;
  end

  always_ff @(posedge clk) begin
    if (rst) y <= '0;
    else     y <= W'((W+1)'(y) + step);
  end
endmodule
