// lincomb: linear combination of the phonon channels for one trigger path.
//
// out = (sum_c coef[c] * in[c]) >>> OUT_SHIFT, with 8-bit signed coefficients.
// Setting every coefficient to 127 forms the phonon-total channel; setting one
// coefficient to 127 and the rest to 0 selects a single channel. The sum is
// built with one multiplier over N clocks (time-division multiplexing, as the
// 100 MHz clock is far faster than the trigger sample rate).
//
// From the published design: 12 channels, 8-bit coefficients, the value 127
// and its use. Chosen here: the right shift by 7 (127 is then close to unit
// gain), the 24-bit output and the sequential schedule.
//
// Interface: coefficients are written one at a time (cfg_we, cfg_ch,
// cfg_coef) and are not reset. in_valid latches all channels; out_valid
// pulses N+1 clocks later. A new in_valid while busy is ignored (samples are
// thousands of clocks apart).
module lincomb
  import nt_pkg::*;
#(
  parameter int N         = N_CH,
  parameter int IN_W      = ADC_W,
  parameter int COEF_W    = LC_COEF_W,
  parameter int OUT_W     = LC_OUT_W,
  parameter int OUT_SHIFT = 7
) (
  input  logic                          clk,
  input  logic                          rst,
  input  logic                          cfg_we,
  input  logic [$clog2(N)-1:0]          cfg_ch,
  input  logic signed [COEF_W-1:0]      cfg_coef,
  input  logic                          in_valid,
  input  logic signed [N-1:0][IN_W-1:0] in_data,
  output logic                          out_valid,
  output logic signed [OUT_W-1:0]       out_data
);
  localparam int CW   = $clog2(N);
  localparam int ACCW = IN_W + COEF_W + $clog2(N) + 1;

  logic signed [COEF_W-1:0]        coef [N];
  logic signed [N-1:0][IN_W-1:0]   x;
  logic signed [ACCW-1:0]          acc;
  logic [CW-1:0]                   idx;
  logic                            busy;

  always_ff @(posedge clk) begin
    if (cfg_we) coef[cfg_ch] <= cfg_coef;
  end

  always_ff @(posedge clk) begin
    out_valid <= 1'b0;
    if (rst) begin
      busy <= 1'b0;
      idx  <= '0;
      acc  <= '0;
    end else if (!busy) begin
      if (in_valid) begin
        x    <= in_data;
        busy <= 1'b1;
        idx  <= '0;
        acc  <= '0;
      end
    end else begin
      automatic logic signed [ACCW-1:0] nxt = acc + ACCW'($signed(x[idx]) * coef[idx]);
      acc <= nxt;
      if (idx == CW'(N - 1)) begin
        busy      <= 1'b0;
        out_valid <= 1'b1;
        out_data  <= OUT_W'(nxt >>> OUT_SHIFT);
      end else begin
        idx <= idx + 1'b1;
      end
    end
  end

endmodule
