// config_regs: configuration register file and write decoder of the trigger.
//
// One write port (cfg_we, cfg_addr[19:0], cfg_wdata[31:0]) reaches the
// control registers and, through one-clock registered strobes, the
// coefficient and weight memories. The address map is given in nt_pkg.
// Registers reset to: NN input mask all ones, output selector 2 (the third
// path carries the network output, as in the published configuration), all
// shifts 0, window length 16, trigger masks 0, thresholds at the largest
// value (no triggers until set). Memories are not reset.
//
// The 26-bit input mask and the 6-bit output selector follow the published
// design; the map, the other registers and the reset values are this
// design's own.
module config_regs
  import nt_pkg::*;
(
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     cfg_we,
  input  logic [19:0]              cfg_addr,
  input  logic [31:0]              cfg_wdata,
  output cfg_t                     cfg,
  // linear-combination coefficients
  output logic [N_PATHS-1:0]       lc_we,
  output logic [3:0]               lc_ch,
  output logic [LC_COEF_W-1:0]     lc_coef,
  // FIR coefficients
  output logic [N_PATHS-1:0]       fir_we,
  output logic [9:0]               fir_tap,
  output logic [FIR_COEF_W-1:0]    fir_coef,
  // network weights
  output logic                     nn_we,
  output logic [1:0]               nn_layer,
  output logic [NN_AW-1:0]         nn_addr,
  output q_t                       nn_data
);
  wire [3:0] rgn = cfg_addr[19:16];
  wire [7:0] ra  = cfg_addr[7:0];

  always_ff @(posedge clk) begin
    lc_we  <= '0;
    fir_we <= '0;
    nn_we  <= 1'b0;
    if (rst) begin
      cfg.in_mask   <= '1;
      cfg.out_sel   <= 6'd2;
      cfg.out_shift <= '0;
      cfg.fir_shift <= '0;
      cfg.win_len   <= WIN_W'(16);
      cfg.or_mask   <= '0;
      cfg.and_mask  <= '0;
      cfg.and_lead  <= '0;
      cfg.in_shift  <= '0;
      for (int p = 0; p < N_PATHS; p++) begin
        cfg.thr_on[p]  <= 32'h7FFF_FFFF;
        cfg.thr_off[p] <= 32'h7FFF_FFFF;
      end
    end else if (cfg_we) begin
      case (rgn)
        RGN_CTRL: begin
          case (ra)
            A_IN_MASK:   cfg.in_mask   <= cfg_wdata[N_PATHS-1:0];
            A_OUT_SEL:   cfg.out_sel   <= cfg_wdata[5:0];
            A_OUT_SHIFT: cfg.out_shift <= cfg_wdata[4:0];
            A_FIR_SHIFT: cfg.fir_shift <= cfg_wdata[4:0];
            A_WIN_LEN:   cfg.win_len   <= cfg_wdata[WIN_W-1:0];
            A_OR_MASK:   cfg.or_mask   <= cfg_wdata[N_PATHS-1:0];
            A_AND_MASK:  cfg.and_mask  <= cfg_wdata[N_PATHS-1:0];
            A_AND_LEAD:  cfg.and_lead  <= cfg_wdata[4:0];
            default: begin
              for (int p = 0; p < N_PATHS; p++) begin
                if (ra == A_IN_SHIFT + 8'(p)) cfg.in_shift[p] <= cfg_wdata[4:0];
                if (ra == A_THR_ON   + 8'(p)) cfg.thr_on[p]   <= cfg_wdata;
                if (ra == A_THR_OFF  + 8'(p)) cfg.thr_off[p]  <= cfg_wdata;
              end
            end
          endcase
        end
        RGN_LC: if (cfg_addr[12:8] < 5'(N_PATHS)) lc_we[cfg_addr[12:8]] <= 1'b1;
        RGN_FIR: if (cfg_addr[14:10] < 5'(N_PATHS)) fir_we[cfg_addr[14:10]] <= 1'b1;
        RGN_NN: nn_we <= 1'b1;
        default: ;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    lc_ch    <= cfg_addr[3:0];
    lc_coef  <= cfg_wdata[LC_COEF_W-1:0];
    fir_tap  <= cfg_addr[9:0];
    fir_coef <= cfg_wdata[FIR_COEF_W-1:0];
    nn_layer <= cfg_addr[15:14];
    nn_addr  <= cfg_addr[NN_AW-1:0];
    nn_data  <= cfg_wdata;
  end

endmodule
