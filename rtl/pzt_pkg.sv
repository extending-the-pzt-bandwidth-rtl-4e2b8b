// Shared widths, types and fixed-point helpers of the PZT resonance-cancelling controller.
//
// Signal words between blocks are signed fractions in [-1, 1): a sign bit plus SIG_FRAC
// fractional bits. Filter coefficients are 25-bit two's complement with 22 fractional bits
// (range [-4, 4)). Inside a second-order section the words carry 6 integer bits (sign
// included) and 36 fractional bits. The coefficient and section formats follow the paper;
// the signal word layout around the filter and the register map are choices of this design.
package pzt_pkg;

  localparam int ADC_W     = 14;   // fast ADC / DAC resolution
  localparam int SIG_FRAC  = 25;   // fractional bits of a signal word
  localparam int SIG_W     = SIG_FRAC + 1;
  localparam int COEF_W    = 25;   // coefficient word
  localparam int COEF_FRAC = 22;
  localparam int ACC_INT   = 6;    // integer bits (with sign) inside a section
  localparam int ACC_FRAC  = 36;
  localparam int ACC_W     = ACC_INT + ACC_FRAC;
  localparam int NCOEF     = 5;    // b0, b1, b2, a0, a1
  localparam int K_W       = 18;   // loop gain k
  localparam int K_FRAC    = 12;
  localparam int KI_W      = 18;   // integrator gain
  localparam int KI_FRAC   = 24;
  localparam int SLOW_W    = 16;   // slow (integral) DAC

  typedef logic signed [SIG_W-1:0]  sig_t;
  typedef logic signed [COEF_W-1:0] coef_t;
  typedef logic signed [ACC_W-1:0]  acc_t;

  typedef enum logic [2:0] {C_B0 = 3'd0, C_B1 = 3'd1, C_B2 = 3'd2, C_A0 = 3'd3, C_A1 = 3'd4} coef_idx_e;

  // Run-time settings written by the processor.
  typedef struct packed {
    logic signed [ADC_W-1:0] offset;
    logic signed [K_W-1:0]   k;
    logic signed [KI_W-1:0]  ki;
    logic [3:0]              lpf_shift;
    logic                    mode_sysid;   // 1: white noise drives the fast DAC
    logic                    int_hold;     // freeze the integrator
    logic                    int_clr;      // clear the integrator
    logic                    iir_clr;      // clear the filter states
    logic [ADC_W-1:0]        wn_amp;       // white-noise amplitude (positive)
  } cfg_t;

  // Product of a signal word and a coefficient, rounded (half up) to ACC_FRAC fractional bits.
  // |sig| < 1 and |coef| < 4 keep the result inside the 6-integer-bit section word.
  function automatic acc_t mul_round(input sig_t s, input coef_t c);
    localparam int PW = SIG_W + COEF_W;
    localparam int SH = SIG_FRAC + COEF_FRAC - ACC_FRAC;
    logic signed [PW-1:0] p;
    logic signed [PW-1:0] r;
    p = PW'(s) * PW'(c);
    r = (p + (PW'(1) <<< (SH - 1))) >>> SH;
    return acc_t'(r);
  endfunction

  // Clip a section word to [-1, 1) and round it (half up, saturating) to a signal word.
  function automatic sig_t clip_round(input acc_t a, output logic clipped);
    localparam int SH = ACC_FRAC - SIG_FRAC;
    localparam acc_t HI = (acc_t'(1) <<< ACC_FRAC) - 1;
    localparam acc_t LO = -(acc_t'(1) <<< ACC_FRAC);
    acc_t c;
    acc_t r;
    clipped = (a > HI) || (a < LO);
    c = (a > HI) ? HI : (a < LO) ? LO : a;
    r = (c + (acc_t'(1) <<< (SH - 1))) >>> SH;
    if (r > acc_t'((1 <<< SIG_FRAC) - 1)) r = acc_t'((1 <<< SIG_FRAC) - 1);
    return sig_t'(r);
  endfunction

endpackage
