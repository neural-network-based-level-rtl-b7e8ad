// nn_lstm: streaming LSTM layer, Q16.16, one time step per trigger sample.
//
// For every unit j, with x the layer input and h, c the previous output and
// cell state:
//   z_g[j] = b_g[j] + sum_k W_g[j][k] x[k] + sum_m U_g[j][m] h[m],  g in {i,f,c,o}
//   i = sig(z_i)  f = sig(z_f)  u = relu(z_c)  o = sig(z_o)
//   c'[j] = f*c[j] + i*u         h'[j] = o * relu(c'[j])
// This is the Keras LSTM cell with ReLU in place of tanh (the published
// network uses ReLU as the LSTM output activation). The gate sigmoid is the
// piecewise-linear approximation sigmoid_pla from nt_pkg.
//
// Schedule: four MACs, one per gate, each reading its own weight RAM, walk the
// N_IN inputs, the N_UNITS previous outputs and the bias of one unit
// (N_IN+N_UNITS+1 clocks); the unit's state update follows one clock later
// while the MACs already run the next unit. A step takes
// N_UNITS*(N_IN+N_UNITS+1)+3 clocks (447 at 24 inputs and 12 units).
// h and c persist from step to step; reset or clear sets them to zero.
//
// From the published design: 12 units, 24 inputs, ReLU activation, 32-bit
// weights with 16 fraction bits. Chosen here: statefulness across samples,
// the sigmoid approximation, truncating/saturating arithmetic and the schedule.
//
// Weight address (wr_addr, 14 bits): [13:12] gate (0 i, 1 f, 2 c, 3 o),
// [11:0] = j*(N_IN+N_UNITS+1) + t with t < N_IN for W_g[j][t],
// t = N_IN+m for U_g[j][m] and t = N_IN+N_UNITS for b_g[j].
// start latches in_vec; done pulses when h_vec holds the new output.
module nn_lstm
  import nt_pkg::*;
#(
  parameter int N_IN    = N_DENSE,
  parameter int N_UNITS = N_LSTM
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 clear,
  input  logic                 wr_en,
  input  logic [NN_AW-1:0]     wr_addr,
  input  q_t                   wr_data,
  input  logic                 start,
  input  q_t [N_IN-1:0]        in_vec,
  output logic                 busy,
  output logic                 done,
  output q_t [N_UNITS-1:0]     h_vec,
  output q_t [N_UNITS-1:0]     c_vec
);
  localparam int ROW   = N_IN + N_UNITS + 1;
  localparam int DEPTH = N_UNITS * ROW;
  localparam int MW    = $clog2(DEPTH);
  localparam int TW    = $clog2(ROW);
  localparam int JW    = (N_UNITS > 1) ? $clog2(N_UNITS) : 1;
  localparam int ACCW  = 2 * Q_W + $clog2(ROW) + 2;

  initial assert (DEPTH <= 4096) else $error("LSTM weights do not fit the address map");

  q_t wmem [4][DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en && wr_addr[11:0] < 12'(DEPTH)) wmem[wr_addr[13:12]][wr_addr[MW-1:0]] <= wr_data;
  end

  q_t [N_IN-1:0]            x;
  q_t [N_UNITS-1:0]         h_next;
  logic [TW-1:0]            t;
  logic [JW-1:0]            j;
  logic [MW-1:0]            raddr;
  q_t                       w_r [4];
  q_t                       op1;
  logic                     v1, bias1, last1;
  logic [JW-1:0]            j1;
  logic signed [ACCW-1:0]   acc [4];
  q_t                       z   [4];
  logic                     upd, upd_last;
  logic [JW-1:0]            ju;

  assign raddr = MW'(j) * MW'(ROW) + MW'(t);

  always_ff @(posedge clk) begin
    for (int g = 0; g < 4; g++) w_r[g] <= wmem[g][raddr];
    op1 <= (t < TW'(N_IN)) ? x[t] : h_vec[t - TW'(N_IN)];
  end

  // state update of unit ju from the registered gate pre-activations
  q_t gi, gf, gu, go, c_new, h_new;
  always_comb begin
    gi    = sigmoid_pla(z[0]);
    gf    = sigmoid_pla(z[1]);
    gu    = relu(z[2]);
    go    = sigmoid_pla(z[3]);
    c_new = sat32(96'(qmul(gf, c_vec[ju])) + 96'(qmul(gi, gu)));
    h_new = qmul(go, relu(c_new));
  end

  always_ff @(posedge clk) begin
    done <= 1'b0;
    if (rst || clear) begin
      busy     <= 1'b0;
      t        <= '0;
      j        <= '0;
      v1       <= 1'b0;
      bias1    <= 1'b0;
      last1    <= 1'b0;
      j1       <= '0;
      upd      <= 1'b0;
      upd_last <= 1'b0;
      ju       <= '0;
      h_vec    <= '0;
      c_vec    <= '0;
      h_next   <= '0;
      for (int g = 0; g < 4; g++) begin
        acc[g] <= '0;
        z[g]   <= '0;
      end
    end else begin
      v1    <= busy;
      bias1 <= busy && (t == TW'(ROW - 1));
      last1 <= busy && (t == TW'(ROW - 1)) && (j == JW'(N_UNITS - 1));
      j1    <= j;
      upd   <= 1'b0;
      upd_last <= 1'b0;
      if (!busy) begin
        if (start) begin
          x    <= in_vec;
          busy <= 1'b1;
          t    <= '0;
          j    <= '0;
        end
      end else if (t == TW'(ROW - 1)) begin
        t <= '0;
        if (j == JW'(N_UNITS - 1)) busy <= 1'b0;
        else                       j <= j + 1'b1;
      end else begin
        t <= t + 1'b1;
      end
      if (v1) begin
        for (int g = 0; g < 4; g++) begin
          if (bias1) begin
            automatic logic signed [ACCW-1:0] s = acc[g] + (ACCW'(w_r[g]) <<< Q_F);
            z[g]   <= sat32(96'(s >>> Q_F));
            acc[g] <= '0;
          end else begin
            acc[g] <= acc[g] + ACCW'(w_r[g] * op1);
          end
        end
        if (bias1) begin
          upd      <= 1'b1;
          upd_last <= last1;
          ju       <= j1;
        end
      end
      if (upd) begin
        c_vec[ju]  <= c_new;
        h_next[ju] <= h_new;
        if (upd_last) begin
          h_vec <= h_next;
          h_vec[ju] <= h_new;
          done  <= 1'b1;
        end
      end
    end
  end

endmodule
