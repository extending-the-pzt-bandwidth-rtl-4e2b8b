// Input stage: offset and loop gain k ahead of both controller branches.
//
// The 14-bit ADC sample is read as a signed fraction (13 fractional bits). A programmable
// offset is added (saturating to 14 bits) and the sum is multiplied by the loop gain k
// (signed, K_FRAC fractional bits). The product has 13 + K_FRAC = 25 fractional bits and is
// saturated to a signal word in [-1, 1). The order offset-then-gain is the one drawn in the
// paper's controller diagram; the widths of offset and k are this design's choice.
// Timing: two registers, e follows adc by 2 clocks; sat is aligned with e.
module input_stage
  import pzt_pkg::*;
#(
  parameter int K_BITS  = K_W,
  parameter int K_FRACB = K_FRAC
) (
  input  logic                      clk,
  input  logic                      rst,
  input  logic signed [ADC_W-1:0]   adc,
  input  logic signed [ADC_W-1:0]   offset,
  input  logic signed [K_BITS-1:0]  k,
  output sig_t                      e,
  output logic                      sat
);
  localparam int PW = ADC_W + 1 + K_BITS;
  localparam int SH = (ADC_W - 1) + K_FRACB - SIG_FRAC;   // 0 at the defaults
  localparam logic signed [PW-1:0] HI = (PW'(1) <<< (SIG_FRAC + SH)) - 1;
  localparam logic signed [PW-1:0] LO = -(PW'(1) <<< (SIG_FRAC + SH));

  logic signed [ADC_W:0]   sum_w;
  logic signed [ADC_W-1:0] sum_q;
  logic signed [K_BITS-1:0] k_q;
  logic signed [PW-1:0]    prod;

  always_comb begin
    sum_w = {adc[ADC_W-1], adc} + {offset[ADC_W-1], offset};
    prod  = PW'(sum_q) * PW'(k_q);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      sum_q <= '0;
      k_q   <= '0;
      e     <= '0;
      sat   <= 1'b0;
    end else begin
      k_q <= k;
      if (sum_w > (ADC_W+1)'(2**(ADC_W-1) - 1))     sum_q <= {1'b0, {(ADC_W-1){1'b1}}};
      else if (sum_w < -(ADC_W+1)'(2**(ADC_W-1)))   sum_q <= {1'b1, {(ADC_W-1){1'b0}}};
      else                                          sum_q <= sum_w[ADC_W-1:0];
      if (prod > HI)      begin e <= {1'b0, {SIG_FRAC{1'b1}}}; sat <= 1'b1; end
      else if (prod < LO) begin e <= {1'b1, {SIG_FRAC{1'b0}}}; sat <= 1'b1; end
      else                begin e <= sig_t'(prod >>> SH);       sat <= 1'b0; end
    end
  end
endmodule
