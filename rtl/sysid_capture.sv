// System-identification sampler: pairs each white-noise chip u(k) with the detector sample
// y(k) and streams the pairs to the host, which computes their cross-correlation.
//
// After a start pulse, every chip_stb (5 MHz) produces one s_valid word
// {u, 1'b0, y[13:0]} until NSAMP words (4,000,000 in the paper's measurement) have been sent;
// then busy falls and done stays high until the next start. A start while busy restarts the
// record. The paper gives the sample count and rate and says the samples are sent to a PC;
// the word layout and the stream interface are this design's choice. The host transport must
// accept one word per chip_stb (no back-pressure). Timing: s_valid follows chip_stb by 1 clock.
module sysid_capture #(
  parameter int NSAMP = 4000000,
  parameter int ADC_W = 14
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     start,
  input  logic                     chip_stb,
  input  logic                     u,
  input  logic signed [ADC_W-1:0]  y,
  output logic                     s_valid,
  output logic [ADC_W+1:0]         s_data,
  output logic                     busy,
  output logic                     done
);
  localparam int CW = $clog2(NSAMP + 1);
  logic [CW-1:0] cnt;

  always_ff @(posedge clk) begin
    if (rst) begin
      cnt     <= '0;
      busy    <= 1'b0;
      done    <= 1'b0;
      s_valid <= 1'b0;
      s_data  <= '0;
    end else begin
      s_valid <= 1'b0;
      if (start) begin
        cnt  <= '0;
        busy <= 1'b1;
        done <= 1'b0;
      end else if (busy && chip_stb) begin
        s_valid <= 1'b1;
        s_data  <= {u, 1'b0, y};
        cnt     <= cnt + 1'b1;
        if (cnt == CW'(NSAMP - 1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end
endmodule
