// M-sequence white-noise source for on-chip system identification.
//
// A Fibonacci LFSR of LFSR_N stages with feedback taps TAP_A and TAP_B (a maximal-length
// trinomial, x^23 + x^18 + 1 by default, period 2^23 - 1) advances once every DIV clocks
// while en is high (125 MHz / 25 = 5 MHz chips). Each chip drives the fast DAC with +amp for a
// 1 and -amp for a 0. The paper chooses an M-sequence because it needs only shift registers
// and simple logic, and samples it at 5 MHz; the length and polynomial are this design's
// choice. Timing: chip_stb is high for one clock when a new chip appears on bit_out and wn.
module mseq_gen #(
  parameter int LFSR_N = 23,
  parameter int TAP_A  = 23,
  parameter int TAP_B  = 18,
  parameter int DIV    = 25,
  parameter int AMP_W  = 14
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     en,
  input  logic [AMP_W-2:0]         amp,
  output logic                     bit_out,
  output logic signed [AMP_W-1:0]  wn,
  output logic                     chip_stb
);
  logic [LFSR_N-1:0]      sr;
  logic [$clog2(DIV)-1:0] cnt;
  logic                   fb;

  assign fb      = sr[TAP_A-1] ^ sr[TAP_B-1];
  assign bit_out = sr[0];

  always_ff @(posedge clk) begin
    if (rst) begin
      sr       <= LFSR_N'(1);
      cnt      <= '0;
      chip_stb <= 1'b0;
    end else begin
      chip_stb <= 1'b0;
      if (en) begin
        if (cnt == $clog2(DIV)'(DIV - 1)) begin
          cnt      <= '0;
          sr       <= {sr[LFSR_N-2:0], fb};
          chip_stb <= 1'b1;
        end else begin
          cnt <= cnt + 1'b1;
        end
      end
    end
  end

  // amp is a magnitude one bit narrower than wn, so -amp is always representable.
  always_comb wn = sr[0] ? $signed({1'b0, amp}) : -$signed({1'b0, amp});

  initial assert (TAP_A == LFSR_N && TAP_B < TAP_A && TAP_B >= 1) else $error("bad LFSR taps");
endmodule
