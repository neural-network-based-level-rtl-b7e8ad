// fir_filter: time-multiplexed FIR filter of one trigger path.
//
// y[n] = sat32( (sum_{k=0}^{TAPS-1} c[k] * x[n-k]) >>> shift )
//
// The last TAPS input samples sit in a ring-buffer RAM and the coefficients
// in a second RAM. For each new sample one multiply-accumulate per clock walks
// all taps, so one output needs TAPS+2 clocks (1026 at the default size, well
// inside the 2560 clocks between trigger samples at 100 MHz). The coefficients
// hold an optimal filter, a flattened optimal filter or a channel-specific
// fast/slow optimal filter, loaded from outside.
//
// From the published design: 1024 taps and 16-bit signed coefficients (the
// coefficient plot spans -2^15..2^15). Chosen here: coefficient k weights the
// sample k steps old, the full-width accumulator followed by a configurable
// right shift and saturation to 32 bits, and the sequential schedule.
//
// Interface: cfg_we/cfg_tap/cfg_coef write one coefficient. in_valid pulses
// with a new sample; out_valid pulses TAPS+2 clocks later. After reset the
// sample history is cleared by a sweep of TAPS clocks (ready low); samples
// arriving then, or while an output is being computed, are dropped.
module fir_filter
  import nt_pkg::*;
#(
  parameter int TAPS   = N_TAPS,
  parameter int IN_W   = LC_OUT_W,
  parameter int COEF_W = FIR_COEF_W,
  parameter int OUT_W  = SAMP_W
) (
  input  logic                      clk,
  input  logic                      rst,
  input  logic                      cfg_we,
  input  logic [$clog2(TAPS)-1:0]   cfg_tap,
  input  logic signed [COEF_W-1:0]  cfg_coef,
  input  logic [4:0]                shift,
  input  logic                      in_valid,
  input  logic signed [IN_W-1:0]    in_data,
  output logic                      ready,
  output logic                      out_valid,
  output logic signed [OUT_W-1:0]   out_data
);
  localparam int AW   = $clog2(TAPS);
  localparam int ACCW = IN_W + COEF_W + AW + 1;

  initial assert (TAPS == (1 << AW)) else $error("TAPS must be a power of two");

  logic signed [IN_W-1:0]   hist [TAPS];
  logic signed [COEF_W-1:0] coef [TAPS];

  typedef enum logic [1:0] {S_CLEAR, S_IDLE, S_RUN} state_t;
  state_t state;

  logic [AW-1:0]            wp;        // slot of the newest sample
  logic [AW-1:0]            k;         // tap being issued
  logic                     issue;     // a read was issued this cycle
  logic                     v1;        // read data valid
  logic                     last1;     // read data is the last tap
  logic signed [IN_W-1:0]   xr;
  logic signed [COEF_W-1:0] cr;
  logic signed [ACCW-1:0]   acc;
  logic                     h_we;
  logic [AW-1:0]            h_wa;
  logic signed [IN_W-1:0]   h_wd;

  assign ready = (state == S_IDLE);
  assign issue = (state == S_RUN);

  // history write: clearing sweep or new sample
  always_comb begin
    h_we = 1'b0;
    h_wa = wp;
    h_wd = in_data;
    if (state == S_CLEAR) begin
      h_we = 1'b1;
      h_wd = '0;
    end else if (state == S_IDLE && in_valid) begin
      h_we = 1'b1;
      h_wa = wp + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (h_we) hist[h_wa] <= h_wd;
  end

  always_ff @(posedge clk) begin
    if (cfg_we) coef[cfg_tap] <= cfg_coef;
  end

  // synchronous RAM reads
  always_ff @(posedge clk) begin
    xr <= hist[wp - k];
    cr <= coef[k];
  end

  always_ff @(posedge clk) begin
    out_valid <= 1'b0;
    if (rst) begin
      state <= S_CLEAR;
      wp    <= '0;
      k     <= '0;
      v1    <= 1'b0;
      last1 <= 1'b0;
      acc   <= '0;
    end else begin
      v1    <= issue;
      last1 <= issue && (k == AW'(TAPS - 1));
      case (state)
        S_CLEAR: begin
          wp <= wp + 1'b1;
          if (wp == AW'(TAPS - 1)) state <= S_IDLE;   // wp wraps back to 0
        end
        S_IDLE: if (in_valid) begin
          wp    <= wp + 1'b1;
          k     <= '0;
          acc   <= '0;
          state <= S_RUN;
        end
        S_RUN: begin
          k <= k + 1'b1;
          if (k == AW'(TAPS - 1)) state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
      if (v1) begin
        automatic logic signed [ACCW-1:0] nxt = acc + ACCW'(xr * cr);
        acc <= nxt;
        if (last1) begin
          out_data  <= OUT_W'(sat32(96'(nxt >>> shift)));
          out_valid <= 1'b1;
        end
      end
    end
  end

endmodule
