// nt_pkg: constants, types, configuration address map and fixed-point helpers
// shared by every block of the neural level-1 trigger.
//
// Sizes that follow the published design: 26 trigger paths, 12 phonon channels,
// a 24-neuron dense layer, a 12-unit LSTM layer, one linear output neuron,
// Q16.16 network arithmetic (32 bits, 16 above and 16 below the binary point),
// 8-bit linear-combination coefficients and 1024-tap FIR filters with 16-bit
// coefficients. Sizes chosen here: 16-bit ADC samples, a downsampling factor of
// 32 (a 1.25 MHz ADC rate brought to the ~39 kHz trigger sample rate), the
// intermediate widths, the register map and the sigmoid approximation.
//
// Configuration address map (cfg_addr[19:0], 32-bit data, write only):
//   [19:16] = 0  control registers, [7:0] selects:
//                0x00 NN input mask (26 bits)      0x01 NN output selector (6 bits)
//                0x02 NN output left shift (5)     0x03 FIR output right shift (5)
//                0x04 trigger window length (16)   0x05 trigger OR mask (26)
//                0x06 trigger AND mask (26)        0x07 coincidence lead path (5)
//                0x20+p NN input right shift of path p (5 bits)
//                0x40+p activation threshold of path p (signed 32)
//                0x60+p deactivation threshold of path p (signed 32)
//   [19:16] = 1  linear-combination coefficient: [12:8] path, [3:0] channel
//   [19:16] = 2  FIR coefficient: [14:10] path, [9:0] tap
//   [19:16] = 3  NN weight: [15:14] layer (0 dense, 1 LSTM, 2 output), [13:0] index
package nt_pkg;

  localparam int N_PATHS    = 26;
  localparam int N_CH       = 12;
  localparam int N_DENSE    = 24;
  localparam int N_LSTM     = 12;
  localparam int N_TAPS     = 1024;
  localparam int DS_FACTOR  = 32;
  localparam int ADC_W      = 16;
  localparam int LC_COEF_W  = 8;
  localparam int LC_OUT_W   = 24;
  localparam int FIR_COEF_W = 16;
  localparam int SAMP_W     = 32;   // FIR output / trigger path sample ("FIR counts")
  localparam int Q_W        = 32;   // network word
  localparam int Q_F        = 16;   // fraction bits
  localparam int TS_W       = 32;   // sample time stamp
  localparam int WIN_W      = 16;   // trigger window length
  localparam int NN_AW      = 14;   // local weight address inside one layer

  typedef logic signed [Q_W-1:0]    q_t;
  typedef logic signed [SAMP_W-1:0] samp_t;


  // Trigger primitive recorded by the peak search at the end of a window.
  typedef struct packed {
    samp_t           amp;      // peak amplitude
    logic [TS_W-1:0] ptime;    // sample time of the peak
    logic            thr;      // threshold bit seen during the window
  } prim_t;

  // Control registers.
  typedef struct packed {
    logic [N_PATHS-1:0]                in_mask;
    logic [5:0]                        out_sel;
    logic [4:0]                        out_shift;
    logic [4:0]                        fir_shift;
    logic [WIN_W-1:0]                  win_len;
    logic [N_PATHS-1:0]                or_mask;
    logic [N_PATHS-1:0]                and_mask;
    logic [4:0]                        and_lead;
    logic [N_PATHS-1:0][4:0]           in_shift;
    logic [N_PATHS-1:0][SAMP_W-1:0]    thr_on;
    logic [N_PATHS-1:0][SAMP_W-1:0]    thr_off;
  } cfg_t;

  localparam logic [3:0] RGN_CTRL = 4'd0;
  localparam logic [3:0] RGN_LC   = 4'd1;
  localparam logic [3:0] RGN_FIR  = 4'd2;
  localparam logic [3:0] RGN_NN   = 4'd3;

  localparam logic [7:0] A_IN_MASK   = 8'h00;
  localparam logic [7:0] A_OUT_SEL   = 8'h01;
  localparam logic [7:0] A_OUT_SHIFT = 8'h02;
  localparam logic [7:0] A_FIR_SHIFT = 8'h03;
  localparam logic [7:0] A_WIN_LEN   = 8'h04;
  localparam logic [7:0] A_OR_MASK   = 8'h05;
  localparam logic [7:0] A_AND_MASK  = 8'h06;
  localparam logic [7:0] A_AND_LEAD  = 8'h07;
  localparam logic [7:0] A_IN_SHIFT  = 8'h20;
  localparam logic [7:0] A_THR_ON    = 8'h40;
  localparam logic [7:0] A_THR_OFF   = 8'h60;

  localparam logic [1:0] L_DENSE = 2'd0;
  localparam logic [1:0] L_LSTM  = 2'd1;
  localparam logic [1:0] L_OUT   = 2'd2;

  // Saturate a wide signed value to a 32-bit word.
  function automatic q_t sat32(input logic signed [95:0] v);
    if (v > 96'sh7FFF_FFFF)               return q_t'(32'sh7FFF_FFFF);
    else if (v < -96'sh8000_0000)         return q_t'(-32'sh8000_0000);
    else                                  return q_t'(v[31:0]);
  endfunction

  function automatic q_t relu(input q_t x);
    return x[Q_W-1] ? '0 : x;
  endfunction

  // Q16.16 product, truncated toward minus infinity and saturated.
  function automatic q_t qmul(input q_t a, input q_t b);
    logic signed [63:0] p;
    p = 64'(a) * 64'(b);
    return sat32(96'(p >>> Q_F));
  endfunction

  // Piecewise-linear sigmoid (PLAN): multiplier-free, max error ~0.019.
  //   |x| >= 5         : 1
  //   2.375 <= |x| < 5 : |x|/32 + 0.84375
  //   1 <= |x| < 2.375 : |x|/8  + 0.625
  //   |x| < 1          : |x|/4  + 0.5
  //   x < 0            : 1 - f(|x|)
  function automatic q_t sigmoid_pla(input q_t x);
    logic [Q_W:0] a;
    logic [Q_W:0] y;
    a = x[Q_W-1] ? (Q_W+1)'(-(33'(x))) : (Q_W+1)'(x);
    if (a >= 33'd327680)      y = 33'd65536;
    else if (a >= 33'd155648) y = (a >> 5) + 33'd55296;
    else if (a >= 33'd65536)  y = (a >> 3) + 33'd40960;
    else                      y = (a >> 2) + 33'd32768;
    if (x[Q_W-1]) y = 33'd65536 - y;
    return q_t'(y[Q_W-1:0]);
  endfunction

endpackage
