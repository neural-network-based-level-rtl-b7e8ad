// nn_dense: fully connected network layer with one time-multiplexed MAC.
//
// out[n] = act( b[n] + sum_k W[n][k] * in[k] ),  act = ReLU or identity.
//
// All values are Q16.16 (32-bit signed, 16 fraction bits). Products are kept
// exact in a wide accumulator; the bias is aligned and added, the sum is
// truncated to 16 fraction bits and saturated to 32 bits. One weight is read
// from a synchronous RAM per clock, so a pass takes N_OUT*(N_IN+1)+2 clocks
// (650 for the 26-input, 24-neuron hidden layer, 15 for the output neuron).
//
// From the published design: layer sizes, ReLU on the hidden layer, linear
// output, 32-bit weights with 16 fraction bits. Chosen here: activations in the
// same format, truncation and saturation, and the single-MAC schedule.
//
// Interface: weights are written through wr_en/wr_addr/wr_data; W[n][k] lives
// at n*N_IN+k and b[n] at N_IN*N_OUT+n. start latches in_vec; done pulses
// for one clock when out_vec holds the result; out_vec then stays stable
// until the next pass ends. start is ignored while busy.
module nn_dense
  import nt_pkg::*;
#(
  parameter int N_IN  = N_PATHS,
  parameter int N_OUT = N_DENSE,
  parameter bit RELU  = 1'b1,
  parameter int AW    = NN_AW
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 wr_en,
  input  logic [AW-1:0]        wr_addr,
  input  q_t                   wr_data,
  input  logic                 start,
  input  q_t [N_IN-1:0]        in_vec,
  output logic                 busy,
  output logic                 done,
  output q_t [N_OUT-1:0]       out_vec
);
  localparam int DEPTH = N_IN * N_OUT + N_OUT;
  localparam int KW    = $clog2(N_IN + 1);
  localparam int NW    = (N_OUT > 1) ? $clog2(N_OUT) : 1;
  localparam int ACCW  = 2 * Q_W + $clog2(N_IN + 1) + 2;
  localparam int MW    = $clog2(DEPTH);

  initial assert (DEPTH <= (1 << AW)) else $error("weight memory does not fit the address");

  q_t wmem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en && wr_addr < AW'(DEPTH)) wmem[wr_addr[MW-1:0]] <= wr_data;
  end

  q_t [N_IN-1:0]          x;
  logic [KW-1:0]          k;       // 0..N_IN-1 weights, N_IN bias
  logic [NW-1:0]          n;
  logic [MW-1:0]          raddr;
  q_t                     w_r;
  logic                   v1, bias1, last1;
  logic [KW-1:0]          k1;
  logic [NW-1:0]          n1;
  logic signed [ACCW-1:0] acc;

  always_comb begin
    if (k == KW'(N_IN)) raddr = MW'(N_IN * N_OUT) + MW'(n);
    else                raddr = MW'(n) * MW'(N_IN) + MW'(k);
  end

  always_ff @(posedge clk) w_r <= wmem[raddr];

  always_ff @(posedge clk) begin
    done <= 1'b0;
    if (rst) begin
      busy  <= 1'b0;
      k     <= '0;
      n     <= '0;
      v1    <= 1'b0;
      bias1 <= 1'b0;
      last1 <= 1'b0;
      k1    <= '0;
      n1    <= '0;
      acc   <= '0;
    end else begin
      v1    <= busy;
      bias1 <= busy && (k == KW'(N_IN));
      last1 <= busy && (k == KW'(N_IN)) && (n == NW'(N_OUT - 1));
      k1    <= k;
      n1    <= n;
      if (!busy) begin
        if (start) begin
          x    <= in_vec;
          busy <= 1'b1;
          k    <= '0;
          n    <= '0;
          acc  <= '0;
        end
      end else begin
        if (k == KW'(N_IN)) begin
          k <= '0;
          if (n == NW'(N_OUT - 1)) busy <= 1'b0;
          else                     n <= n + 1'b1;
        end else begin
          k <= k + 1'b1;
        end
      end
      if (v1) begin
        if (bias1) begin
          automatic logic signed [ACCW-1:0] s = acc + (ACCW'(w_r) <<< Q_F);
          automatic q_t y = sat32(96'(s >>> Q_F));
          out_vec[n1] <= RELU ? relu(y) : y;
          acc <= '0;
          if (last1) done <= 1'b1;
        end else begin
          acc <= acc + ACCW'(w_r * x[k1]);
        end
      end
    end
  end

endmodule
