// Digital controller K(z) for a PZT-actuated interferometer lock, with the PZT resonances
// cancelled by a 24th-order inverse IIR filter and on-chip white-noise system identification.
//
// Signal flow (125 MHz clock):
//   adc -> input_stage (offset, gain k) -> e
//   e -> cic_decimator (/4) -> iir_cascade F (12 second-order sections) -> lowpass1
//     -> fast_dac_out -> dac_fast (14 bit, 125 MS/s)
//   e -> integrator (I) -> dac_slow (16 bit, 1 MS/s)
//   mseq_gen -> fast_dac_out in system-identification mode, and with adc -> sysid_capture
//     -> capture stream to the host
// The analog sum of the two DAC outputs drives the PZT; it and both converters sit outside.
// The branch structure, rates, widths of the converters and the filter follow the paper;
// the register bank and the capture stream are this design's choices (see ctrl_regs).
//
// Latency from an adc sample to dac_fast in control mode: 2 (input stage) + 3 (CIC, newest
// sample) + 13 (filter, 12 sections + sync register) + 1 (low-pass) + 1 (output register),
// plus the wait for the next decimation strobe.
module pzt_controller
  import pzt_pkg::*;
#(
  parameter int NMOD  = 3,
  parameter int NSEC  = 4,
  parameter int NSAMP = 4000000
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic signed [ADC_W-1:0]  adc,
  output logic signed [ADC_W-1:0]  dac_fast,
  output logic signed [SLOW_W-1:0] dac_slow,
  output logic                     dac_slow_stb,
  input  logic                     bus_we,
  input  logic [7:0]               bus_addr,
  input  logic [31:0]              bus_wdata,
  output logic [31:0]              bus_rdata,
  output logic                     cap_valid,
  output logic [ADC_W+1:0]         cap_data
);
  cfg_t  cfg;
  logic  sysid_start;
  logic  coef_we;
  logic [3:0] coef_sec;
  logic [2:0] coef_idx;
  coef_t coef_data;

  sig_t  e, cic_y, f_y, lp_y;
  logic  e_sat, cic_v, f_clip, f_ovr, int_sat, dac_sat;
  logic  wn_bit, chip_stb, cap_busy, cap_done;
  logic signed [ADC_W-1:0] wn;

  ctrl_regs u_regs (
    .clk, .rst, .bus_we, .bus_addr, .bus_wdata, .bus_rdata,
    .cfg, .sysid_start,
    .status({cap_done, cap_busy}),
    .events({dac_sat, e_sat, int_sat, f_ovr, f_clip}),
    .coef_we, .coef_sec, .coef_idx, .coef_data
  );

  input_stage u_in (
    .clk, .rst, .adc, .offset(cfg.offset), .k(cfg.k), .e, .sat(e_sat)
  );

  cic_decimator #(.W(SIG_W), .R(NSEC), .N(2), .M(1)) u_cic (
    .clk, .rst, .din(e), .dout(cic_y), .dout_valid(cic_v)
  );

  iir_cascade #(.NMOD(NMOD), .NSEC(NSEC)) u_f (
    .clk, .rst, .clr(cfg.iir_clr), .x(cic_y), .x_valid(cic_v),
    .cfg_we(coef_we), .cfg_sec($clog2(NMOD*NSEC)'(coef_sec)), .cfg_idx(coef_idx), .cfg_data(coef_data),
    .y(f_y), .y_valid(), .clip(f_clip), .overrun(f_ovr)
  );

  lowpass1 #(.W(SIG_W), .SHIFT_W(4)) u_lp (
    .clk, .rst, .x(f_y), .shift(cfg.lpf_shift), .y(lp_y)
  );

  mseq_gen #(.LFSR_N(23), .TAP_A(23), .TAP_B(18), .DIV(25), .AMP_W(ADC_W)) u_wn (
    .clk, .rst, .en(cfg.mode_sysid), .amp(cfg.wn_amp[ADC_W-2:0]),
    .bit_out(wn_bit), .wn, .chip_stb
  );

  fast_dac_out #(.IN_W(SIG_W), .DAC_W(ADC_W)) u_dac (
    .clk, .rst, .mode_sysid(cfg.mode_sysid), .x(lp_y), .wn, .dac(dac_fast), .sat(dac_sat)
  );

  integrator #(.IN_W(SIG_W), .IN_FRAC(SIG_FRAC), .KI_W(KI_W), .KI_FRAC(KI_FRAC),
               .OUT_W(SLOW_W), .DECIM(125)) u_int (
    .clk, .rst, .hold(cfg.int_hold), .clr(cfg.int_clr), .e, .ki(cfg.ki),
    .out(dac_slow), .out_stb(dac_slow_stb), .sat(int_sat)
  );

  sysid_capture #(.NSAMP(NSAMP), .ADC_W(ADC_W)) u_cap (
    .clk, .rst, .start(sysid_start), .chip_stb, .u(wn_bit), .y(adc),
    .s_valid(cap_valid), .s_data(cap_data), .busy(cap_busy), .done(cap_done)
  );
endmodule
