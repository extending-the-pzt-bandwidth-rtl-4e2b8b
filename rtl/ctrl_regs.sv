// Register bank between the on-chip processor and the controller.
//
// The processor sets the offset, the loop gain k, the integrator gain ki, the low-pass time
// constant, the mode and the white-noise amplitude, starts a system-identification record
// and loads the filter coefficients ("load filter states" in the paper). The paper names the
// processor and the loading but gives no register map; this map and the bus are this
// design's choice.
//
// Bus: single-cycle writes (bus_we with bus_addr, bus_wdata); bus_rdata returns the register
// at bus_addr one clock later. Map (word addresses):
//   0x00 offset [13:0]  0x01 k [17:0] (12 fraction bits, reset 1.0)  0x02 ki [17:0]
//   0x03 lpf_shift [3:0]
//   0x04 control: [0] mode_sysid [1] int_hold [2] int_clr [3] iir_clr;
//        writing [4] = 1 gives a one-clock sysid_start pulse
//   0x05 wn_amp [12:0]
//   0x06 status (read): [0] capture busy [1] capture done, sticky events [8] filter clip
//        [9] filter overrun [10] integrator saturated [11] input saturated [12] DAC saturated;
//        writing 1 to a sticky bit clears it
//   0x80 + 8*s + i: write coefficient i (0..4 = b0, b1, b2, a0, a1) of section s, data [24:0]
module ctrl_regs
  import pzt_pkg::*;
#(
  parameter int AW   = 8,
  parameter int DW   = 32,
  parameter int NEVT = 5
) (
  input  logic               clk,
  input  logic               rst,
  input  logic               bus_we,
  input  logic [AW-1:0]      bus_addr,
  input  logic [DW-1:0]      bus_wdata,
  output logic [DW-1:0]      bus_rdata,
  output cfg_t               cfg,
  output logic               sysid_start,
  input  logic [1:0]         status,
  input  logic [NEVT-1:0]    events,
  output logic               coef_we,
  output logic [3:0]         coef_sec,
  output logic [2:0]         coef_idx,
  output coef_t              coef_data
);
  logic [NEVT-1:0] sticky;

  always_ff @(posedge clk) begin
    if (rst) begin
      cfg         <= '0;
      cfg.k       <= K_W'(1 <<< K_FRAC);
      sysid_start <= 1'b0;
      sticky      <= '0;
      coef_we     <= 1'b0;
      coef_sec    <= '0;
      coef_idx    <= '0;
      coef_data   <= '0;
      bus_rdata   <= '0;
    end else begin
      sysid_start <= 1'b0;
      coef_we     <= 1'b0;
      sticky      <= sticky | events;
      if (bus_we) begin
        if (bus_addr[AW-1]) begin
          coef_we   <= 1'b1;
          coef_sec  <= bus_addr[6:3];
          coef_idx  <= bus_addr[2:0];
          coef_data <= bus_wdata[COEF_W-1:0];
        end else begin
          case (bus_addr)
            AW'(0): cfg.offset    <= bus_wdata[ADC_W-1:0];
            AW'(1): cfg.k         <= bus_wdata[K_W-1:0];
            AW'(2): cfg.ki        <= bus_wdata[KI_W-1:0];
            AW'(3): cfg.lpf_shift <= bus_wdata[3:0];
            AW'(4): begin
              cfg.mode_sysid <= bus_wdata[0];
              cfg.int_hold   <= bus_wdata[1];
              cfg.int_clr    <= bus_wdata[2];
              cfg.iir_clr    <= bus_wdata[3];
              sysid_start    <= bus_wdata[4];
            end
            AW'(5): cfg.wn_amp    <= {1'b0, bus_wdata[ADC_W-2:0]};
            AW'(6): sticky        <= (sticky & ~bus_wdata[8 +: NEVT]) | events;
            default: ;
          endcase
        end
      end
      case (bus_addr)
        AW'(0): bus_rdata <= DW'($unsigned(cfg.offset));
        AW'(1): bus_rdata <= DW'($unsigned(cfg.k));
        AW'(2): bus_rdata <= DW'($unsigned(cfg.ki));
        AW'(3): bus_rdata <= DW'(cfg.lpf_shift);
        AW'(4): bus_rdata <= DW'({cfg.iir_clr, cfg.int_clr, cfg.int_hold, cfg.mode_sysid});
        AW'(5): bus_rdata <= DW'(cfg.wn_amp);
        AW'(6): bus_rdata <= DW'({sticky, 6'b0, status});
        default: bus_rdata <= '0;
      endcase
    end
  end
endmodule
