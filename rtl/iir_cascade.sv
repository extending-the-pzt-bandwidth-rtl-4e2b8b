// Inverse filter F: NMOD time-multiplexed second-order modules in series, giving
// NMOD * NSEC second-order sections (3 x 4 = 12 sections, a 24th-order filter), followed by
// one synchronisation register.
//
// Section s of the filter lives in module s / NSEC, slot s % NSEC; coefficient writes are
// routed accordingly. A sample entered with x_valid (at most once every NSEC clocks, the
// 31.25 MS/s strobe of the CIC decimator) leaves NMOD * NSEC + 1 clocks later with y_valid
// (12 + 1 = 13 clocks at 125 MHz, the paper's figure for this filter). y holds between
// strobes. clr empties every state, the samples in flight and the output register.
// clip and overrun are the OR of the modules' flags.
module iir_cascade
  import pzt_pkg::*;
#(
  parameter int NMOD = 3,
  parameter int NSEC = 4
) (
  input  logic                             clk,
  input  logic                             rst,
  input  logic                             clr,
  input  sig_t                             x,
  input  logic                             x_valid,
  input  logic                             cfg_we,
  input  logic [$clog2(NMOD*NSEC)-1:0]     cfg_sec,
  input  logic [2:0]                       cfg_idx,
  input  coef_t                            cfg_data,
  output sig_t                             y,
  output logic                             y_valid,
  output logic                             clip,
  output logic                             overrun
);
  localparam int SW = $clog2(NSEC);

  sig_t sig   [NMOD+1];
  logic vld   [NMOD+1];
  logic [NMOD-1:0] clip_m, ovr_m;

  assign sig[0] = x;
  assign vld[0] = x_valid;

  for (genvar m = 0; m < NMOD; m++) begin : g_mod
    logic sel;
    assign sel = cfg_we && (int'(cfg_sec) / NSEC == m);
    iir_sos_tdm #(.NSEC(NSEC)) u_mod (
      .clk, .rst, .clr,
      .x(sig[m]), .x_valid(vld[m]),
      .cfg_we(sel), .cfg_sec(SW'(int'(cfg_sec) % NSEC)), .cfg_idx, .cfg_data,
      .y(sig[m+1]), .y_valid(vld[m+1]), .clip(clip_m[m]), .overrun(ovr_m[m])
    );
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      y       <= '0;
      y_valid <= 1'b0;
      clip    <= 1'b0;
      overrun <= 1'b0;
    end else if (clr) begin
      y       <= '0;
      y_valid <= 1'b0;
    end else begin
      y_valid <= vld[NMOD];
      if (vld[NMOD]) y <= sig[NMOD];
      clip    <= |clip_m;
      overrun <= |ovr_m;
    end
  end
endmodule
