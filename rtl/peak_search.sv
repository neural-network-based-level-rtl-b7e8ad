// peak_search: trigger window and peak finding of one trigger path.
//
// A threshold crossing opens a trigger window of win_len samples, the crossing
// sample being the first. During the window the largest sample and its time
// stamp are kept, and whether the threshold bit was set at any sample. When
// the window has seen win_len samples a trigger primitive {peak amplitude,
// peak time, threshold bit} is emitted with prim_valid for one clock.
// Crossings inside an open window are part of that window.
//
// The published trigger defines a window per threshold crossing in which the
// peak amplitude, peak time and threshold information are recorded; the
// fixed window length, the first-maximum tie rule and the registered timing
// are choices of this design. win_len = 0 is treated as 1.
module peak_search
  import nt_pkg::*;
(
  input  logic             clk,
  input  logic             rst,
  input  logic [WIN_W-1:0] win_len,
  input  logic             in_valid,
  input  samp_t            in_data,
  input  logic             above,
  input  logic             crossing,
  input  logic [TS_W-1:0]  timestamp,
  output logic             win_open,
  output logic             prim_valid,
  output prim_t            prim
);
  logic [WIN_W-1:0] cnt;
  prim_t            cur;

  always_ff @(posedge clk) begin
    prim_valid <= 1'b0;
    if (rst) begin
      win_open <= 1'b0;
      cnt      <= '0;
      cur      <= '0;
    end else if (in_valid) begin
      automatic prim_t            nxt = cur;
      automatic logic [WIN_W-1:0] n   = cnt + 1'b1;
      automatic logic             act = win_open;
      if (!win_open && crossing) begin
        nxt = '{amp: in_data, ptime: timestamp, thr: above};
        n   = 1;
        act = 1'b1;
      end else if (win_open) begin
        if (in_data > cur.amp) begin
          nxt.amp   = in_data;
          nxt.ptime = timestamp;
        end
        nxt.thr = cur.thr | above;
      end
      if (act) begin
        if (n >= win_len) begin
          prim_valid <= 1'b1;
          prim       <= nxt;
          win_open   <= 1'b0;
        end else begin
          win_open <= 1'b1;
        end
      end
      cur <= nxt;
      cnt <= n;
    end
  end

endmodule
