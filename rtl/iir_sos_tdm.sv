// One time-multiplexed second-order IIR module: a single section datapath that runs NSEC
// second-order sections in turn, one per clock, on one sample.
//
// Each section computes
//     y(n) = b0 x(n) + b1 x(n-1) + b2 x(n-2) + a0 y(n-1) + a1 y(n-2)
// in the transposed form of the paper's section diagram: the products are rounded to a 6/36
// (integer incl. sign / fraction) word, summed, the sum is clipped to [-1, 1) and rounded to
// the 25-fraction-bit signal word, which is registered. Coefficient sets and state registers
// are indexed by a slot counter, so slot s of this module holds section s. A sample entered
// with x_valid goes through slot 0 in that clock, slot 1 in the next (its input is the
// registered output of slot 0), and so on; after NSEC clocks y_valid rises with the result.
// The feed-forward state update happens in the clock a slot runs, the feedback update (a0, a1
// times the registered output) one clock later; a slot is not revisited before NSEC clocks
// have passed, so each update path holds one multiplier. This pipelining split and the
// coefficient write port are this design's choices; the formats, the section count and the
// one-clock-per-section timing follow the paper.
//
// Interface: x_valid may rise at most once every NSEC clocks (NSEC >= 2); an earlier one is
// flagged by overrun and ignored. cfg_we writes coefficient cfg_idx (0..4 = b0, b1, b2, a0,
// a1) of slot cfg_sec. clr zeroes all states and drops a sample in flight (coefficients
// are kept). Latency: NSEC clocks.
module iir_sos_tdm
  import pzt_pkg::*;
#(
  parameter int NSEC = 4
) (
  input  logic                      clk,
  input  logic                      rst,
  input  logic                      clr,
  input  sig_t                      x,
  input  logic                      x_valid,
  input  logic                      cfg_we,
  input  logic [$clog2(NSEC)-1:0]   cfg_sec,
  input  logic [2:0]                cfg_idx,
  input  coef_t                     cfg_data,
  output sig_t                      y,
  output logic                      y_valid,
  output logic                      clip,
  output logic                      overrun
);
  localparam int SW = $clog2(NSEC);

  coef_t b0 [NSEC], b1 [NSEC], b2 [NSEC], a0 [NSEC], a1 [NSEC];
  acc_t  q  [NSEC];   // b1 x(n-1) + b2 x(n-2)
  acc_t  r2 [NSEC];   // b2 x(n-1)
  acc_t  w  [NSEC];   // a0 y(n-1) + a1 y(n-2)
  acc_t  ra [NSEC];   // a1 y(n-1)

  logic          busy;       // a sample is in slots 1..NSEC-1
  logic [SW-1:0] slot;       // slot running this clock while busy
  logic          fb_valid;   // feedback update pending for fb_slot
  logic [SW-1:0] fb_slot;

  logic          run;
  logic [SW-1:0] cur;
  sig_t          xin;
  acc_t          t;
  sig_t          ynext;
  logic          clipped;

  always_comb begin
    run  = busy || x_valid;
    cur  = busy ? slot : '0;
    xin  = busy ? y : x;
    t    = mul_round(xin, b0[cur]) + q[cur] + w[cur];
    ynext = clip_round(t, clipped);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      busy     <= 1'b0;
      slot     <= '0;
      fb_valid <= 1'b0;
      fb_slot  <= '0;
      y        <= '0;
      y_valid  <= 1'b0;
      clip     <= 1'b0;
      overrun  <= 1'b0;
      for (int s = 0; s < NSEC; s++) begin
        b0[s] <= '0; b1[s] <= '0; b2[s] <= '0; a0[s] <= '0; a1[s] <= '0;
        q[s] <= '0; r2[s] <= '0; w[s] <= '0; ra[s] <= '0;
      end
    end else begin
      overrun <= busy && x_valid;
      clip    <= run && clipped;
      y_valid <= run && (cur == SW'(NSEC - 1));
      fb_valid <= run;
      fb_slot  <= cur;
      if (run) begin
        y       <= ynext;
        q[cur]  <= mul_round(xin, b1[cur]) + r2[cur];
        r2[cur] <= mul_round(xin, b2[cur]);
        busy    <= (cur != SW'(NSEC - 1));
        slot    <= cur + 1'b1;
      end
      if (fb_valid) begin
        w[fb_slot]  <= mul_round(y, a0[fb_slot]) + ra[fb_slot];
        ra[fb_slot] <= mul_round(y, a1[fb_slot]);
      end
      if (clr) begin
        // Drop the sample in flight as well, so that no old value leaves after a clear.
        busy     <= 1'b0;
        y        <= '0;
        y_valid  <= 1'b0;
        fb_valid <= 1'b0;
        for (int s = 0; s < NSEC; s++) begin
          q[s] <= '0; r2[s] <= '0; w[s] <= '0; ra[s] <= '0;
        end
      end
      if (cfg_we) begin
        case (coef_idx_e'(cfg_idx))
          C_B0: b0[cfg_sec] <= cfg_data;
          C_B1: b1[cfg_sec] <= cfg_data;
          C_B2: b2[cfg_sec] <= cfg_data;
          C_A0: a0[cfg_sec] <= cfg_data;
          C_A1: a1[cfg_sec] <= cfg_data;
          default: ;
        endcase
      end
    end
  end

  initial assert (NSEC >= 2) else $error("iir_sos_tdm needs NSEC >= 2");
  // A new sample must not arrive while the previous one is still in the module.
  a_no_overrun: assert property (@(posedge clk) disable iff (rst) !(busy && x_valid))
    else $warning("iir_sos_tdm: x_valid while busy, sample dropped");
endmodule
