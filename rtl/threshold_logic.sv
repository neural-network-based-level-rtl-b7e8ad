// threshold_logic: hysteresis threshold of one trigger path.
//
// The threshold bit `above` is set by a sample >= thr_on (activation) and
// cleared by a sample < thr_off (deactivation); in between it keeps its value.
// `crossing` marks the sample that set it. Both outputs are registered and
// change one clock after in_valid; out_valid marks that clock. Thresholds are
// signed, in FIR counts.
//
// The activation/deactivation pair follows the published trigger (which uses,
// for example, 2 and 1 FIR counts on a reference path); the comparison
// operators and the registered timing are choices of this design.
module threshold_logic
  import nt_pkg::*;
(
  input  logic  clk,
  input  logic  rst,
  input  samp_t thr_on,
  input  samp_t thr_off,
  input  logic  in_valid,
  input  samp_t in_data,
  output logic  out_valid,
  output samp_t out_data,
  output logic  above,
  output logic  crossing
);
  always_ff @(posedge clk) begin
    out_valid <= in_valid;
    if (rst) begin
      above <= 1'b0;
      crossing <= 1'b0;
    end else if (in_valid) begin
      out_data <= in_data;
      crossing    <= !above && (in_data >= thr_on);
      if (!above && in_data >= thr_on)     above <= 1'b1;
      else if (above && in_data < thr_off) above <= 1'b0;
    end
  end

endmodule
