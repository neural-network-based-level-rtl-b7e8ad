// tb_nn_module: the complete network stage at its default size (26 paths,
// Dense 24 -> LSTM 12 -> Dense 1). Random weights are loaded through the
// weight port, random filtered samples are fed, and every output vector is
// compared with a reference built from nn_ref_pkg: input mask, per-path
// normalising shift, the three layers with LSTM state carried across samples,
// the output shift, and the overwrite of the selected path in the FIFO-delayed
// copy of the inputs. Also checks that the result arrives within one trigger
// sample period (2560 clocks), that samples arriving back to back queue in the
// FIFO and come out in order, that pushes into a full FIFO are dropped and
// flagged, and that out_sel >= 26 overwrites nothing.
module tb_nn_module;
  import nt_pkg::*;
  import nn_ref_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  localparam int NP = N_PATHS, ND = N_DENSE, NL = N_LSTM, ROW = ND + NL + 1;
  localparam int SAMPLE_CLKS = 2560;

  logic [NP-1:0] input_mask = '1;
  logic [NP-1:0][4:0] in_shift = '0;
  logic [5:0] out_sel = 6'd2;
  logic [4:0] out_shift = 5'd10;
  logic wr_en = 0;
  logic [1:0] wr_layer = 0;
  logic [NN_AW-1:0] wr_addr = 0;
  q_t wr_data = 0;
  logic state_clear = 0;
  logic in_valid = 0;
  samp_t [NP-1:0] in_data = '0;
  logic out_valid, busy, fifo_overflow;
  samp_t [NP-1:0] out_data;
  samp_t nn_out;
  logic [2:0] fifo_count;

  nn_module dut (.clk, .rst, .input_mask, .in_shift, .out_sel, .out_shift, .wr_en, .wr_layer,
                 .wr_addr, .wr_data, .state_clear, .in_valid, .in_data, .out_valid, .out_data,
                 .nn_out, .busy, .fifo_overflow, .fifo_count);

  int checks = 0, failures = 0;
  int n_nz = 0, n_queued = 0, n_ovf = 0, n_masked = 0, n_nosel = 0, n_out = 0;
  longint w1[], b1[], wk[], wr_[], wb[], w2[], b2[], h[], c[];
  samp_t [NP-1:0] exp_q [$];

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(input int layer, input int a, input longint v);
    wr_en = 1; wr_layer = 2'(layer); wr_addr = NN_AW'(a); wr_data = q_t'(v);
    @(negedge clk);
    wr_en = 0;
  endtask

  // reference for one sample: returns the expected output vector
  function automatic samp_t [NP-1:0] model(input samp_t [NP-1:0] d);
    longint x[], y1[], y2[], yo;
    samp_t [NP-1:0] r = d;
    x = new[NP];
    for (int p = 0; p < NP; p++)
      x[p] = input_mask[p] ? sat((longint'(d[p]) <<< 16) >>> in_shift[p]) : 0;
    dense(NP, ND, 1'b1, w1, b1, x, y1);
    lstm_step(ND, NL, wk, wr_, wb, y1, h, c);
    dense(NL, 1, 1'b0, w2, b2, h, y2);
    yo = sat((y2[0] <<< out_shift) >>> 16);
    if (out_sel < 6'(NP)) r[out_sel] = samp_t'(yo);
    return r;
  endfunction

  task automatic send(input samp_t [NP-1:0] d);
    in_data = d; in_valid = 1;
    if (!(fifo_count == 3'd4)) exp_q.push_back(model(d));
    @(negedge clk);
    in_valid = 0;
  endtask

  function automatic samp_t [NP-1:0] rnd_vec();
    samp_t [NP-1:0] d;
    for (int p = 0; p < NP; p++) d[p] = samp_t'(int'($urandom_range(0, 8000)) - 4000);
    return d;
  endfunction

  // output checker
  initial begin
    forever begin
      @(negedge clk);
      if (out_valid) begin
        n_out++;
        checks++;
        if (exp_q.size() == 0) begin failures++; $display("unexpected output"); end
        else begin
          automatic samp_t [NP-1:0] e = exp_q.pop_front();
          if (nn_out != 0) n_nz++;
          if (out_data != e) begin
            failures++;
            for (int p = 0; p < NP; p++) if (out_data[p] != e[p])
              $display("out %0d path %0d: got %0d exp %0d", n_out, p, out_data[p], e[p]);
          end
        end
      end
      if (fifo_overflow) n_ovf++;
      if (fifo_count >= 3'd2) n_queued++;
    end
  end

  initial begin
    w1 = new[NP*ND]; b1 = new[ND]; wk = new[4*NL*ND]; wr_ = new[4*NL*NL]; wb = new[4*NL];
    w2 = new[NL]; b2 = new[1]; h = new[NL]; c = new[NL];
    repeat (3) @(negedge clk);
    rst = 0;
    for (int i = 0; i < NP*ND; i++) begin w1[i] = rnd_q(0) >>> 1; wr(L_DENSE, i, w1[i]); end
    for (int n = 0; n < ND; n++)    begin b1[n] = rnd_q(0);       wr(L_DENSE, NP*ND + n, b1[n]); end
    for (int g = 0; g < 4; g++)
      for (int j = 0; j < NL; j++) begin
        for (int k = 0; k < ND; k++) begin wk[(g*NL+j)*ND+k] = rnd_q(0) >>> 2; wr(L_LSTM, (g<<12) + j*ROW + k, wk[(g*NL+j)*ND+k]); end
        for (int m = 0; m < NL; m++) begin wr_[(g*NL+j)*NL+m] = rnd_q(0) >>> 2; wr(L_LSTM, (g<<12) + j*ROW + ND + m, wr_[(g*NL+j)*NL+m]); end
        wb[g*NL+j] = rnd_q(1); wr(L_LSTM, (g<<12) + j*ROW + ND + NL, wb[g*NL+j]);
      end
    for (int m = 0; m < NL; m++) begin w2[m] = rnd_q(1); wr(L_OUT, m, w2[m]); end
    b2[0] = rnd_q(0); wr(L_OUT, NL, b2[0]);
    state_clear = 1; @(negedge clk); state_clear = 0;
    foreach (h[j]) begin h[j] = 0; c[j] = 0; end

    for (int p = 0; p < NP; p++) in_shift[p] = 5'(10 + (p % 4));

    // 1) single samples at the trigger rate: latency and values
    for (int s = 0; s < 12; s++) begin
      automatic int lat = 0;
      if (s == 4) begin input_mask = 26'h3FF_F0F3; n_masked++; end
      if (s == 8) begin out_sel = 6'd40; n_nosel++; end
      if (s == 10) begin out_sel = 6'd25; out_shift = 5'd14; end
      send(rnd_vec());
      while (!out_valid && lat < 5000) begin @(negedge clk); lat++; end
      checks++;
      if (lat >= SAMPLE_CLKS) begin failures++; $display("latency %0d exceeds a sample period", lat); end
      if (s == 0) $display("network latency %0d clocks", lat);
      repeat (20) @(negedge clk);
    end
    // 2) a burst of 6 samples: 4 are queued, 2 dropped with overflow
    input_mask = '1; out_sel = 6'd2;
    for (int s = 0; s < 6; s++) send(rnd_vec());
    repeat (6000) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("%0d outputs missing", exp_q.size()); end
    checks++;
    if (n_out != 16) begin failures++; $display("outputs %0d, expected 16", n_out); end
    checks++;
    if (n_ovf != 2 || n_queued == 0) begin failures++; $display("overflow %0d queued %0d", n_ovf, n_queued); end
    checks++;
    if (n_nz < 8) begin failures++; $display("network output mostly zero (%0d non-zero)", n_nz); end
    $display("mechanisms: masked %0d, no-overwrite %0d, queued-cycles %0d, overflow %0d",
             n_masked, n_nosel, n_queued, n_ovf);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
