// tb_nn_dense: loads random Q16.16 weights and biases into the 26-input,
// 24-neuron ReLU layer and into a 12-input linear output neuron, runs random
// input vectors through both and compares every output word with the
// reference in nn_ref_pkg. Also checks the N_OUT*(N_IN+1)+2 clock latency and
// saturation of a large sum.
module tb_nn_dense;
  import nt_pkg::*;
  import nn_ref_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  localparam int NI = 26, NO = 24, NI2 = 12;

  logic wr_en = 0, wr_en2 = 0;
  logic [NN_AW-1:0] wr_addr = 0;
  q_t wr_data = 0;
  logic start = 0, start2 = 0;
  q_t [NI-1:0] in_vec = '0;
  q_t [NI2-1:0] in_vec2 = '0;
  logic busy, done, busy2, done2;
  q_t [NO-1:0] out_vec;
  q_t [0:0] out_vec2;

  nn_dense #(.N_IN(NI), .N_OUT(NO), .RELU(1'b1)) dut (
    .clk, .rst, .wr_en, .wr_addr, .wr_data, .start, .in_vec, .busy, .done, .out_vec);
  nn_dense #(.N_IN(NI2), .N_OUT(1), .RELU(1'b0)) dut2 (
    .clk, .rst, .wr_en(wr_en2), .wr_addr, .wr_data, .start(start2), .in_vec(in_vec2),
    .busy(busy2), .done(done2), .out_vec(out_vec2));

  int checks = 0, failures = 0;
  longint w[], b[], w2[], b2[], x[], x2[], y[], y2[];

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(input int which, input int a, input longint v);
    if (which == 0) wr_en = 1; else wr_en2 = 1;
    wr_addr = NN_AW'(a);
    wr_data = q_t'(v);
    @(negedge clk);
    wr_en = 0; wr_en2 = 0;
  endtask

  initial begin
    w = new[NI*NO]; b = new[NO]; w2 = new[NI2]; b2 = new[1];
    x = new[NI]; x2 = new[NI2];
    repeat (3) @(negedge clk);
    rst = 0;
    for (int trial = 0; trial < 8; trial++) begin
      for (int i = 0; i < NI*NO; i++) begin w[i] = rnd_q(1); wr(0, i, w[i]); end
      for (int n = 0; n < NO; n++)    begin b[n] = rnd_q(2); wr(0, NI*NO + n, b[n]); end
      for (int i = 0; i < NI2; i++)   begin w2[i] = rnd_q(1); wr(1, i, w2[i]); end
      b2[0] = rnd_q(2); wr(1, NI2, b2[0]);
      if (trial == 7) begin
        // huge weights: the sum must saturate
        for (int i = 0; i < NI2; i++) begin w2[i] = 64'sh0010_0000; wr(1, i, w2[i]); end
      end
      for (int rep = 0; rep < 3; rep++) begin
        automatic int lat = 0;
        for (int k = 0; k < NI; k++)  begin x[k] = rnd_q(3); in_vec[k] = q_t'(x[k]); end
        for (int k = 0; k < NI2; k++) begin
          x2[k] = (trial == 7) ? 64'sh0100_0000 : rnd_q(3);
          in_vec2[k] = q_t'(x2[k]);
        end
        dense(NI, NO, 1'b1, w, b, x, y);
        dense(NI2, 1, 1'b0, w2, b2, x2, y2);
        start = 1; start2 = 1;
        @(negedge clk);
        start = 0; start2 = 0;
        while (!done && lat < 5000) begin
          @(negedge clk);
          lat++;
          if (done2) begin
            checks++;
            if (longint'(out_vec2[0]) != y2[0]) begin
              failures++;
              $display("trial %0d out neuron: got %0d exp %0d", trial, out_vec2[0], y2[0]);
            end
          end
        end
        checks++;
        if (lat != NO * (NI + 1) + 1) begin failures++; $display("latency %0d", lat); end
        for (int n = 0; n < NO; n++) begin
          checks++;
          if (longint'(out_vec[n]) != y[n]) begin
            failures++;
            $display("trial %0d n %0d: got %0d exp %0d", trial, n, out_vec[n], y[n]);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
