// tb_hv_detector: the full-size trigger configured for a detector with only
// six phonon channels.
//
// Such a detector needs fewer trigger paths: path 0 phonon total with the
// optimal filter, path 1 phonon total with the flattened filter, paths 2-7
// the six single channels with fast-component filters and paths 8-13 with
// slow-component filters. Paths 14-25 get zero coefficients and are masked
// off from the network; ADC inputs 6-11 carry large random junk that must not
// reach any output. Everything is set through the write port on the default
// design (no parameter overrides).
//
// Checks, against a reference model in this testbench (boxcar average,
// linear combination, direct convolution, network from nn_ref_pkg): every
// output vector in full over 256 trigger samples with three pulses, the
// unused paths staying zero, the network output on path 2, and that the OR
// trigger on path 0 fires for each pulse. A watchdog ends a stuck run.
module tb_hv_detector;
  import nt_pkg::*;
  import nn_ref_pkg::*;
  localparam int NP = N_PATHS, NC = N_CH, ND = N_DENSE, NL = N_LSTM, ROW = ND + NL + 1;
  localparam int NC_USED    = 6;
  localparam int NP_USED    = 2 + 2 * NC_USED;
  localparam int ADC_PERIOD = 80;
  localparam int N_SAMPLES  = 256;
  localparam int FIR_SHIFT  = 16;
  localparam int OUT_SHIFT  = 14;
  localparam int WIN        = 12;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic cfg_we = 0;
  logic [19:0] cfg_addr = 0;
  logic [31:0] cfg_wdata = 0;
  logic nn_state_clear = 0;
  logic adc_valid = 0;
  logic signed [NC-1:0][ADC_W-1:0] adc_data = '0;
  logic fir_ready, path_valid, trig_valid, trig_is_and, trig_thr, nn_fifo_overflow, nn_busy;
  samp_t [NP-1:0] path_data;
  samp_t nn_out, trig_amp;
  logic [NP-1:0] thr_above;
  logic [4:0] trig_path;
  logic [TS_W-1:0] trig_time;
  logic [2:0] nn_fifo_count;

  neural_trigger_top dut (.*);

  int checks = 0, failures = 0;
  int n_outs = 0, n_or = 0, n_unused_zero = 0;

  longint lc [NP][NC];
  longint fc [NP][N_TAPS];
  longint hist [NP][N_TAPS];
  int     hp = 0;
  longint w1[], b1[], wk[], wr_[], wb[], w2[], b2[], h[], c[];
  logic [NP-1:0] mask = NP'((1 << NP_USED) - 1);
  int in_sh [NP];
  samp_t [NP-1:0] exp_q [$];
  longint dsacc [NC];

  initial begin
    repeat (1_500_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(input logic [3:0] rgn, input logic [15:0] a, input logic [31:0] d);
    cfg_we = 1; cfg_addr = {rgn, a}; cfg_wdata = d;
    @(negedge clk);
    cfg_we = 0;
  endtask

  function automatic samp_t [NP-1:0] ref_sample(input longint ds [NC]);
    longint x[], y1[], y2[];
    samp_t [NP-1:0] r;
    hp = (hp + 1) % N_TAPS;
    for (int p = 0; p < NP; p++) begin
      longint s = 0, acc = 0;
      for (int ch = 0; ch < NC; ch++) s += lc[p][ch] * ds[ch];
      hist[p][hp] = s >>> 7;
      for (int k = 0; k < N_TAPS; k++) acc += fc[p][k] * hist[p][(hp - k + N_TAPS) % N_TAPS];
      r[p] = samp_t'(sat(acc >>> FIR_SHIFT));
    end
    x = new[NP];
    for (int p = 0; p < NP; p++) x[p] = mask[p] ? sat((longint'(r[p]) <<< 16) >>> in_sh[p]) : 0;
    dense(NP, ND, 1'b1, w1, b1, x, y1);
    lstm_step(ND, NL, wk, wr_, wb, y1, h, c);
    dense(NL, 1, 1'b0, w2, b2, h, y2);
    r[2] = samp_t'(sat((y2[0] <<< OUT_SHIFT) >>> 16));
    return r;
  endfunction

  function automatic int pulse(input int t, input int amp, input int tau_r, input int tau_f);
    if (t < 0) return 0;
    return int'(amp * (1.0 - $exp(-real'(t) / tau_r)) * $exp(-real'(t) / tau_f));
  endfunction

  int starts [3] = '{30 * 32 + 3, 110 * 32 + 9, 190 * 32 + 21};
  int fast_ch [3] = '{1, 4, 2};
  int amps [3] = '{1200, 800, 1500};

  function automatic int adc_value(input int n, input int ch);
    int v;
    if (ch >= NC_USED) return int'($urandom_range(0, 60000)) - 30000;  // not connected
    v = int'($urandom_range(0, 40)) - 20;
    for (int i = 0; i < 3; i++) begin
      v += pulse(n - starts[i], amps[i], 8, 400);
      if (ch == fast_ch[i]) v += pulse(n - starts[i], 3 * amps[i], 2, 60);
    end
    return (v > 32767) ? 32767 : (v < -32768) ? -32768 : v;
  endfunction

  // ---------------------------------------------------------------- monitor
  initial begin
    forever begin
      @(negedge clk);
      if (path_valid) begin
        checks++;
        if (exp_q.size() == 0) begin failures++; $display("unexpected output"); end
        else begin
          automatic samp_t [NP-1:0] e = exp_q.pop_front();
          if (path_data != e) begin
            failures++;
            for (int p = 0; p < NP; p++) if (path_data[p] != e[p])
              $display("sample %0d path %0d: got %0d exp %0d", n_outs, p, path_data[p], e[p]);
          end
        end
        checks++;
        if (path_data[NP-1:NP_USED] == '0) n_unused_zero++;
        else begin failures++; $display("sample %0d: unused path not zero", n_outs); end
        checks++;
        if (path_data[2] != nn_out) begin failures++; $display("network output not on path 2"); end
        n_outs++;
      end
      if (trig_valid) begin
        checks++;
        if (trig_path != 5'd0 || trig_is_and || !trig_thr) begin
          failures++; $display("unexpected trigger on path %0d", trig_path);
        end else n_or++;
      end
    end
  end

  // ---------------------------------------------------------------- stimulus
  initial begin
    automatic int n_adc = 0;
    w1 = new[NP*ND]; b1 = new[ND]; wk = new[4*NL*ND]; wr_ = new[4*NL*NL]; wb = new[4*NL];
    w2 = new[NL]; b2 = new[1]; h = new[NL]; c = new[NL];
    repeat (3) @(negedge clk);
    rst = 0;

    // linear combination: phonon total of the six channels, then single channels
    for (int p = 0; p < NP; p++)
      for (int ch = 0; ch < NC; ch++) begin
        if (p >= NP_USED || ch >= NC_USED) lc[p][ch] = 0;
        else lc[p][ch] = (p < 2) ? 127 : ((p - 2) % NC_USED == ch) ? 127 : 0;
        wr(RGN_LC, {3'b0, 5'(p), 4'b0, 4'(ch)}, 32'(lc[p][ch]));
      end
    // FIR: fast filters short, slow filters long, unused paths zero
    for (int p = 0; p < NP; p++)
      for (int k = 0; k < N_TAPS; k++) begin
        if (p >= NP_USED) fc[p][k] = 0;
        else if (p < 2) fc[p][k] = (k < 32) ? 4000 : longint'($urandom_range(0, 400)) - 200;
        else if (p < 2 + NC_USED) fc[p][k] = (k < 8) ? 8000 : 0;
        else fc[p][k] = (k < 64) ? 1500 : 0;
        wr(RGN_FIR, {1'b0, 5'(p), 10'(k)}, 32'(fc[p][k]));
        hist[p][k] = 0;
      end
    // network weights
    for (int i = 0; i < NP*ND; i++) begin w1[i] = rnd_q(0) >>> 1; wr(RGN_NN, {L_DENSE, 14'(i)}, 32'(w1[i])); end
    for (int n = 0; n < ND; n++) begin b1[n] = rnd_q(0) >>> 2; wr(RGN_NN, {L_DENSE, 14'(NP*ND + n)}, 32'(b1[n])); end
    for (int g = 0; g < 4; g++)
      for (int j = 0; j < NL; j++) begin
        for (int k = 0; k < ND; k++) begin
          wk[(g*NL+j)*ND+k] = rnd_q(0) >>> 2;
          wr(RGN_NN, {L_LSTM, 2'(g), 12'(j*ROW + k)}, 32'(wk[(g*NL+j)*ND+k]));
        end
        for (int m = 0; m < NL; m++) begin
          wr_[(g*NL+j)*NL+m] = rnd_q(0) >>> 2;
          wr(RGN_NN, {L_LSTM, 2'(g), 12'(j*ROW + ND + m)}, 32'(wr_[(g*NL+j)*NL+m]));
        end
        wb[g*NL+j] = rnd_q(0);
        wr(RGN_NN, {L_LSTM, 2'(g), 12'(j*ROW + ND + NL)}, 32'(wb[g*NL+j]));
      end
    for (int m = 0; m < NL; m++) begin w2[m] = rnd_q(1); wr(RGN_NN, {L_OUT, 14'(m)}, 32'(w2[m])); end
    b2[0] = 0; wr(RGN_NN, {L_OUT, 14'(NL)}, 0);
    foreach (h[j]) begin h[j] = 0; c[j] = 0; end
    // registers
    for (int p = 0; p < NP; p++) begin
      in_sh[p] = (p < 2) ? 13 : 12;
      wr(RGN_CTRL, 16'(A_IN_SHIFT + 8'(p)), 32'(in_sh[p]));
    end
    wr(RGN_CTRL, 16'(A_IN_MASK), 32'(mask));
    wr(RGN_CTRL, 16'(A_FIR_SHIFT), FIR_SHIFT);
    wr(RGN_CTRL, 16'(A_OUT_SHIFT), OUT_SHIFT);
    wr(RGN_CTRL, 16'(A_WIN_LEN), WIN);
    wr(RGN_CTRL, 16'(A_THR_ON), 2500);
    wr(RGN_CTRL, 16'(A_THR_OFF), 1500);
    wr(RGN_CTRL, 16'(A_OR_MASK), 32'h1);
    wait (fir_ready);
    @(negedge clk);

    foreach (dsacc[ch]) dsacc[ch] = 0;
    for (int s = 0; s < N_SAMPLES; s++)
      for (int a = 0; a < DS_FACTOR; a++) begin
        for (int ch = 0; ch < NC; ch++) begin
          automatic int v = adc_value(n_adc, ch);
          adc_data[ch] = ADC_W'(v);
          dsacc[ch] += v;
        end
        adc_valid = 1;
        if (a == DS_FACTOR - 1) begin
          automatic longint ds [NC];
          for (int ch = 0; ch < NC; ch++) begin ds[ch] = dsacc[ch] >>> 5; dsacc[ch] = 0; end
          exp_q.push_back(ref_sample(ds));
        end
        @(negedge clk);
        adc_valid = 0;
        n_adc++;
        repeat (ADC_PERIOD - 1) @(negedge clk);
      end
    repeat (3000) @(negedge clk);

    $display("outputs %0d unused-paths-zero %0d OR triggers %0d", n_outs, n_unused_zero, n_or);
    checks++;
    if (exp_q.size() != 0 || n_outs != N_SAMPLES) begin
      failures++; $display("%0d outputs, %0d missing", n_outs, exp_q.size());
    end
    checks++;
    if (n_or != 3) begin failures++; $display("%0d triggers for 3 pulses", n_or); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
