// neural_trigger_top: level-1 neural trigger of one detector.
//
// Pipeline (one trigger sample every DS_FACTOR ADC samples, ~39 kHz):
//   12 phonon ADC streams
//     -> downsampler (shared by all paths)
//     -> N_PATHS x [ lincomb -> fir_filter ]      (26 trigger paths)
//     -> nn_module (network on the 26 filtered paths; its output replaces
//                   one path, the FIFO-delayed others pass unchanged)
//     -> N_PATHS x [ threshold_logic -> peak_search ]
//     -> trigger_logic
// config_regs decodes a single write port into the control registers and the
// coefficient/weight memories. In the published configuration paths 1 and 2
// carry the phonon-total channel with an optimal and a flattened optimal
// filter, paths 3..14 and 15..26 the single channels with fast- and
// slow-component optimal filters, and the network output overwrites path 3
// (out_sel = 2); all of this is set by software through the write port.
//
// The network stage sits between the FIR filters and the threshold logic as
// in the published design. The ADCs are outside: their samples arrive on
// adc_valid/adc_data. path_valid/path_data show the NN module output (what
// the thresholds see) and trig_* the trigger decisions. The sample time
// stamp counts NN module output samples from reset.
//
// Timing at 100 MHz: a trigger sample needs ~13 clocks of linear combination,
// 1026 of FIR and ~1115 of network, within the 2560 clocks between samples.
module neural_trigger_top
  import nt_pkg::*;
#(
  parameter int NP     = N_PATHS,
  parameter int NCH    = N_CH,
  parameter int TAPS   = N_TAPS,
  parameter int FACTOR = DS_FACTOR
) (
  input  logic                         clk,
  input  logic                         rst,
  input  logic                         cfg_we,
  input  logic [19:0]                  cfg_addr,
  input  logic [31:0]                  cfg_wdata,
  input  logic                         nn_state_clear,
  input  logic                         adc_valid,
  input  logic signed [NCH-1:0][ADC_W-1:0] adc_data,
  output logic                         fir_ready,
  output logic                         path_valid,
  output samp_t [NP-1:0]               path_data,
  output samp_t                        nn_out,
  output logic [NP-1:0]                thr_above,
  output logic                         trig_valid,
  output logic [4:0]                   trig_path,
  output samp_t                        trig_amp,
  output logic [TS_W-1:0]              trig_time,
  output logic                         trig_thr,
  output logic                         trig_is_and,
  output logic                         nn_fifo_overflow,
  output logic [2:0]                   nn_fifo_count,
  output logic                         nn_busy
);
  initial assert (NP == N_PATHS && NCH == N_CH && TAPS == 1024)
    else $error("register map is laid out for 26 paths, 12 channels and 1024 taps");

  cfg_t                    cfg;
  logic [N_PATHS-1:0]      lc_we, fir_we;
  logic [3:0]              lc_ch;
  logic [LC_COEF_W-1:0]    lc_coef;
  logic [9:0]              fir_tap;
  logic [FIR_COEF_W-1:0]   fir_coef;
  logic                    nn_we;
  logic [1:0]              nn_layer;
  logic [NN_AW-1:0]        nn_addr;
  q_t                      nn_data;

  config_regs u_cfg (
    .clk, .rst, .cfg_we, .cfg_addr, .cfg_wdata, .cfg,
    .lc_we, .lc_ch, .lc_coef, .fir_we, .fir_tap, .fir_coef,
    .nn_we, .nn_layer, .nn_addr, .nn_data
  );

  // ---------------------------------------------------------------- front end
  logic                              ds_valid;
  logic signed [NCH-1:0][ADC_W-1:0]  ds_data;

  downsampler #(.N(NCH), .W(ADC_W), .FACTOR(FACTOR)) u_ds (
    .clk, .rst, .adc_valid, .adc_data, .ds_valid, .ds_data
  );

  logic [NP-1:0]                  lc_valid, fir_valid, fir_rdy;
  logic signed [LC_OUT_W-1:0]     lc_data  [NP];
  samp_t [NP-1:0]                 fir_data;

  for (genvar p = 0; p < NP; p++) begin : g_path
    lincomb #(.N(NCH)) u_lc (
      .clk, .rst,
      .cfg_we(lc_we[p]), .cfg_ch(lc_ch[$clog2(NCH)-1:0]), .cfg_coef(lc_coef),
      .in_valid(ds_valid), .in_data(ds_data),
      .out_valid(lc_valid[p]), .out_data(lc_data[p])
    );
    fir_filter #(.TAPS(TAPS)) u_fir (
      .clk, .rst,
      .cfg_we(fir_we[p]), .cfg_tap(fir_tap[$clog2(TAPS)-1:0]), .cfg_coef(fir_coef),
      .shift(cfg.fir_shift),
      .in_valid(lc_valid[p]), .in_data(lc_data[p]),
      .ready(fir_rdy[p]),
      .out_valid(fir_valid[p]), .out_data(fir_data[p])
    );
  end

  assign fir_ready = &fir_rdy;

  // all paths run in lock step
  assert property (@(posedge clk) disable iff (rst) (fir_valid == '0) || (fir_valid == '1));

  // ---------------------------------------------------------------- network
  nn_module #(.NP(NP)) u_nn (
    .clk, .rst,
    .input_mask(cfg.in_mask), .in_shift(cfg.in_shift),
    .out_sel(cfg.out_sel), .out_shift(cfg.out_shift),
    .wr_en(nn_we), .wr_layer(nn_layer), .wr_addr(nn_addr), .wr_data(nn_data),
    .state_clear(nn_state_clear),
    .in_valid(fir_valid[0]), .in_data(fir_data),
    .out_valid(path_valid), .out_data(path_data), .nn_out,
    .busy(nn_busy), .fifo_overflow(nn_fifo_overflow), .fifo_count(nn_fifo_count)
  );

  // ---------------------------------------------------------------- back end
  logic [TS_W-1:0]  ts;
  logic [NP-1:0]    th_valid, crossing, win_open, prim_valid;
  samp_t [NP-1:0]   th_data;
  prim_t [NP-1:0]   prim;
  prim_t            tprim;

  always_ff @(posedge clk) begin
    if (rst)             ts <= '0;
    else if (th_valid[0]) ts <= ts + 1'b1;
  end

  for (genvar p = 0; p < NP; p++) begin : g_back
    threshold_logic u_thr (
      .clk, .rst,
      .thr_on(cfg.thr_on[p]), .thr_off(cfg.thr_off[p]),
      .in_valid(path_valid), .in_data(path_data[p]),
      .out_valid(th_valid[p]), .out_data(th_data[p]),
      .above(thr_above[p]), .crossing(crossing[p])
    );
    peak_search u_peak (
      .clk, .rst, .win_len(cfg.win_len),
      .in_valid(th_valid[p]), .in_data(th_data[p]),
      .above(thr_above[p]), .crossing(crossing[p]), .timestamp(ts),
      .win_open(win_open[p]), .prim_valid(prim_valid[p]), .prim(prim[p])
    );
  end

  trigger_logic #(.NP(NP)) u_trig (
    .clk, .rst,
    .or_mask(cfg.or_mask), .and_mask(cfg.and_mask), .and_lead(cfg.and_lead),
    .in_valid(th_valid[0]), .above(thr_above), .win_open,
    .prim_valid, .prim,
    .trig_valid, .trig_path, .trig_prim(tprim), .trig_is_and
  );

  assign trig_amp  = tprim.amp;
  assign trig_time = tprim.ptime;
  assign trig_thr  = tprim.thr;

endmodule
