// Integral branch of the controller, driving the 16-bit slow DAC at 1 MHz.
//
// Every 125 MHz clock the scaled error e (signal word, 25 fractional bits) times the gain ki
// (KI_FRAC fractional bits) is added to a saturating accumulator that holds a fraction in
// [-1, 1). The top OUT_W bits of the accumulator are presented on out, updated once every
// DECIM clocks (125 -> 1 MHz) with a one-clock out_stb. hold freezes the accumulator, clr
// empties it. The paper gives the branch (an integrator), the 16-bit width and the 1 MHz
// rate; accumulating at the full clock rate, the gain format and the saturation are this
// design's choices. Timing: the accumulator includes e one clock after it is presented.
module integrator #(
  parameter int IN_W    = 26,
  parameter int IN_FRAC = 25,
  parameter int KI_W    = 18,
  parameter int KI_FRAC = 24,
  parameter int OUT_W   = 16,
  parameter int DECIM   = 125
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     hold,
  input  logic                     clr,
  input  logic signed [IN_W-1:0]   e,
  input  logic signed [KI_W-1:0]   ki,
  output logic signed [OUT_W-1:0]  out,
  output logic                     out_stb,
  output logic                     sat
);
  localparam int FR = IN_FRAC + KI_FRAC;   // accumulator fraction bits
  localparam int AW = FR + 1;              // range [-1, 1)
  localparam int SW = AW + 1;
  localparam logic signed [SW-1:0] HI = (SW'(1) <<< FR) - 1;
  localparam logic signed [SW-1:0] LO = -(SW'(1) <<< FR);

  logic signed [AW-1:0]          acc;
  logic signed [IN_W+KI_W-1:0]   prod;
  logic signed [SW-1:0]          nxt;
  logic [$clog2(DECIM)-1:0]      cnt;

  always_comb begin
    prod = (IN_W+KI_W)'(e) * (IN_W+KI_W)'(ki);
    nxt  = SW'(acc) + SW'(prod);
  end

  always_ff @(posedge clk) begin
    if (rst || clr) begin
      acc <= '0;
      sat <= 1'b0;
    end else if (!hold) begin
      if (nxt > HI)      begin acc <= AW'(HI); sat <= 1'b1; end
      else if (nxt < LO) begin acc <= AW'(LO); sat <= 1'b1; end
      else               begin acc <= AW'(nxt); sat <= 1'b0; end
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      cnt     <= '0;
      out     <= '0;
      out_stb <= 1'b0;
    end else begin
      out_stb <= (cnt == $clog2(DECIM)'(DECIM - 1));
      if (cnt == $clog2(DECIM)'(DECIM - 1)) begin
        cnt <= '0;
        out <= acc[AW-1 -: OUT_W];
      end else begin
        cnt <= cnt + 1'b1;
      end
    end
  end
endmodule
