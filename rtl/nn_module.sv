// nn_module: the neural-network stage between the FIR filters and the
// threshold logic.
//
// Data flow for one trigger sample:
//  1. The filtered samples of all N_PATHS paths are pushed into nn_fifo.
//  2. When the network is idle and the FIFO holds a sample, the head is taken
//     as the network input: paths whose bit in input_mask is 0 are fed as
//     zero, the others are brought to Q16.16 and divided by 2^in_shift[p]
//     (normalisation to the order of one by a bit shift).
//  3. Dense(N_DENSE, ReLU) -> LSTM(N_LSTM, ReLU) -> Dense(1, linear), each a
//     time-multiplexed unit that starts when the previous one is done.
//  4. The output is scaled back by 2^out_shift into FIR counts (nn_out).
//     The FIFO head is popped and sent on as out_data with path out_sel
//     replaced by nn_out (no path is replaced when out_sel >= N_PATHS).
// All other paths leave unchanged, so legacy triggering on them still works.
//
// From the published design: the 26-bit input mask, the bit-shift
// normalisation, the layer sizes and activations, Q16.16 weights, the FIFO
// read out when the network produces an output, the 6-bit output selector
// and scaling the output back. Chosen here: masked inputs fed as zero, shift
// widths and directions, out_sel values >= N_PATHS meaning "no overwrite",
// floor rounding with saturation, and the handshake below.
//
// Timing: out_valid follows the FIFO head's arrival by about
// 2 + (N_DENSE*(N_PATHS+1)+2) + (N_LSTM*(N_DENSE+N_LSTM+1)+3) + 15 clocks
// (~1115 at the default sizes), less than the 2560 clocks between trigger
// samples. Weights are written with wr_en/wr_layer/wr_addr/wr_data
// (layer 0 hidden dense, 1 LSTM, 2 output dense; local addresses as in
// nn_dense and nn_lstm).
module nn_module
  import nt_pkg::*;
#(
  parameter int NP         = N_PATHS,
  parameter int ND         = N_DENSE,
  parameter int NL         = N_LSTM,
  parameter int FIFO_DEPTH = 4
) (
  input  logic                  clk,
  input  logic                  rst,
  // configuration
  input  logic [NP-1:0]         input_mask,
  input  logic [NP-1:0][4:0]    in_shift,
  input  logic [5:0]            out_sel,
  input  logic [4:0]            out_shift,
  input  logic                  wr_en,
  input  logic [1:0]            wr_layer,
  input  logic [NN_AW-1:0]      wr_addr,
  input  q_t                    wr_data,
  input  logic                  state_clear,
  // data
  input  logic                  in_valid,
  input  samp_t [NP-1:0]        in_data,
  output logic                  out_valid,
  output samp_t [NP-1:0]        out_data,
  output samp_t                 nn_out,
  // status
  output logic                  busy,
  output logic                  fifo_overflow,
  output logic [$clog2(FIFO_DEPTH+1)-1:0] fifo_count
);
  localparam int FW = NP * SAMP_W;

  logic [FW-1:0]   head;
  samp_t [NP-1:0]  head_s;
  logic            empty, full, pop;

  nn_fifo #(.WIDTH(FW), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst,
    .push(in_valid), .din(in_data),
    .pop, .dout(head),
    .empty, .full, .count(fifo_count), .overflow(fifo_overflow)
  );
  assign head_s = head;

  // input normalisation
  q_t [NP-1:0] xin;
  always_comb begin
    for (int p = 0; p < NP; p++) begin
      automatic logic signed [95:0] v = (96'(head_s[p]) <<< Q_F) >>> in_shift[p];
      xin[p] = input_mask[p] ? sat32(v) : '0;
    end
  end

  typedef enum logic [2:0] {S_IDLE, S_D1, S_LSTM, S_D2, S_OUT} state_t;
  state_t state;

  logic          d1_start, d1_done, ls_start, ls_done, d2_start, d2_done;
  logic          d1_busy, ls_busy, d2_busy;
  q_t [ND-1:0]   d1_out;
  q_t [NL-1:0]   ls_h, ls_c;
  q_t [0:0]      d2_out;

  nn_dense #(.N_IN(NP), .N_OUT(ND), .RELU(1'b1)) u_dense (
    .clk, .rst,
    .wr_en(wr_en && wr_layer == L_DENSE), .wr_addr, .wr_data,
    .start(d1_start), .in_vec(xin),
    .busy(d1_busy), .done(d1_done), .out_vec(d1_out)
  );

  nn_lstm #(.N_IN(ND), .N_UNITS(NL)) u_lstm (
    .clk, .rst, .clear(state_clear),
    .wr_en(wr_en && wr_layer == L_LSTM), .wr_addr, .wr_data,
    .start(ls_start), .in_vec(d1_out),
    .busy(ls_busy), .done(ls_done), .h_vec(ls_h), .c_vec(ls_c)
  );

  nn_dense #(.N_IN(NL), .N_OUT(1), .RELU(1'b0)) u_out (
    .clk, .rst,
    .wr_en(wr_en && wr_layer == L_OUT), .wr_addr, .wr_data,
    .start(d2_start), .in_vec(ls_h),
    .busy(d2_busy), .done(d2_done), .out_vec(d2_out)
  );

  assign d1_start = (state == S_IDLE) && !empty;
  assign ls_start = d1_done;
  assign d2_start = ls_done;
  assign pop      = (state == S_OUT);
  assign busy     = (state != S_IDLE) || d1_busy || ls_busy || d2_busy;

  // output de-normalisation
  samp_t y;
  always_comb begin
    automatic logic signed [95:0] v = (96'(d2_out[0]) <<< out_shift) >>> Q_F;
    y = sat32(v);
  end

  always_ff @(posedge clk) begin
    out_valid <= 1'b0;
    if (rst) begin
      state <= S_IDLE;
    end else begin
      case (state)
        S_IDLE: if (!empty)   state <= S_D1;
        S_D1:   if (d1_done)  state <= S_LSTM;
        S_LSTM: if (ls_done)  state <= S_D2;
        S_D2:   if (d2_done) begin
          state  <= S_OUT;
          nn_out <= y;
        end
        S_OUT: begin
          state     <= S_IDLE;
          out_valid <= 1'b1;
          for (int p = 0; p < NP; p++)
            out_data[p] <= (out_sel == 6'(p)) ? nn_out : head_s[p];
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
