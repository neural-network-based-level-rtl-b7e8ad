// trigger_logic: trigger decision from the primitives of all trigger paths.
//
// Two Boolean combinations are offered, both evaluated on each sample:
//  * OR:  a primitive on any path whose bit is set in or_mask triggers.
//  * AND: a primitive on the lead path `and_lead` triggers if every path in
//         and_mask had its threshold bit set at some sample during the lead
//         path's trigger window (the coincidence used to tell true from
//         noise triggers: a reference primitive plus an exceeded threshold
//         of the network output within the window).
// The AND form is off when and_mask is zero. On a trigger, trig_valid pulses
// with the triggering path (lowest OR path first, else the lead path) and its
// primitive; trig_is_and flags that the coincidence condition held on that
// clock, also when an OR primitive fired at the same time. Outputs are
// registered: one clock after the primitives.
//
// The published trigger makes its decision from Boolean combinations of
// trigger primitives without listing them; these two forms are what this
// design provides.
module trigger_logic
  import nt_pkg::*;
#(
  parameter int NP = N_PATHS
) (
  input  logic                  clk,
  input  logic                  rst,
  input  logic [NP-1:0]         or_mask,
  input  logic [NP-1:0]         and_mask,
  input  logic [4:0]            and_lead,
  input  logic                  in_valid,     // a sample passed the threshold stage
  input  logic [NP-1:0]         above,
  input  logic [NP-1:0]         win_open,
  input  logic [NP-1:0]         prim_valid,
  input  prim_t [NP-1:0]        prim,
  output logic                  trig_valid,
  output logic [4:0]            trig_path,
  output prim_t                 trig_prim,
  output logic                  trig_is_and
);
  logic [NP-1:0] seen;     // threshold bits seen during the lead window

  always_ff @(posedge clk) begin
    trig_valid  <= 1'b0;
    trig_is_and <= 1'b0;
    if (rst) begin
      seen <= '0;
    end else begin
      automatic logic [NP-1:0] s      = seen;
      automatic logic [NP-1:0] orhit  = prim_valid & or_mask;
      automatic logic          andhit;
      if (in_valid) s = (win_open[and_lead] ? seen : '0) | above;
      seen   <= s;
      andhit = (and_mask != '0) && prim_valid[and_lead] && ((s & and_mask) == and_mask);
      trig_is_and <= andhit && (orhit != '0);
      if (orhit != '0) begin
        trig_valid <= 1'b1;
        for (int p = NP - 1; p >= 0; p--)
          if (orhit[p]) begin
            trig_path <= 5'(p);
            trig_prim <= prim[p];
          end
      end else if (andhit) begin
        trig_valid  <= 1'b1;
        trig_is_and <= 1'b1;
        trig_path   <= and_lead;
        trig_prim   <= prim[and_lead];
      end
    end
  end

endmodule
