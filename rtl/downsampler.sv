// downsampler: boxcar downsampling of the phonon ADC streams.
//
// Every channel sums DS_FACTOR consecutive ADC samples; when the block is
// complete the sum is divided by DS_FACTOR (arithmetic right shift, so
// DS_FACTOR must be a power of two) and all channels are presented together
// with a one-cycle ds_valid strobe. With a 1.25 MHz ADC strobe and
// DS_FACTOR = 32 this gives the ~39 kHz trigger sample rate.
//
// The published trigger names a downsampling filter per path but does not say
// which filter; the boxcar average, one instance shared by all 26 paths, the
// 16-bit sample width and the factor of 32 are choices of this design.
//
// Timing: ds_valid rises one clock after the adc_valid that completes a block.
// Reset is synchronous and clears the block counter and the partial sums.
module downsampler
  import nt_pkg::*;
#(
  parameter int N       = N_CH,
  parameter int W       = ADC_W,
  parameter int FACTOR  = DS_FACTOR
) (
  input  logic                       clk,
  input  logic                       rst,
  input  logic                       adc_valid,
  input  logic signed [N-1:0][W-1:0] adc_data,
  output logic                       ds_valid,
  output logic signed [N-1:0][W-1:0] ds_data
);
  localparam int SH  = $clog2(FACTOR);
  localparam int AW  = W + SH;
  localparam int CW  = (SH > 0) ? SH : 1;

  logic [CW-1:0]                cnt;
  logic signed [N-1:0][AW-1:0]  acc;

  initial assert (FACTOR == (1 << SH)) else $error("FACTOR must be a power of two");

  always_ff @(posedge clk) begin
    ds_valid <= 1'b0;
    if (rst) begin
      cnt <= '0;
      acc <= '0;
    end else if (adc_valid) begin
      if (cnt == CW'(FACTOR - 1)) begin
        cnt <= '0;
        for (int c = 0; c < N; c++) begin
          automatic logic signed [AW-1:0] s = acc[c] + AW'($signed(adc_data[c]));
          ds_data[c] <= W'(s >>> SH);
          acc[c]     <= '0;
        end
        ds_valid <= 1'b1;
      end else begin
        cnt <= cnt + 1'b1;
        for (int c = 0; c < N; c++) acc[c] <= acc[c] + AW'($signed(adc_data[c]));
      end
    end
  end

endmodule
