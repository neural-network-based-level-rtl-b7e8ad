// tb_neural_trigger_top: end-to-end test of the neural trigger at its default
// size (26 paths, 12 channels, 1024-tap filters, Dense 24 / LSTM 12 / Dense 1).
//
// The trigger is configured through its write port as in the published
// configuration: paths 1-2 phonon total (all coefficients 127), paths 3-14
// and 15-26 single channels (one coefficient 127), every path into the
// network, network output on the third path. Filter coefficients and network
// weights are synthetic (a 32-tap peak on a small random floor; random
// weights). The ADC streams carry one trace length of 32768 ADC samples
// (1024 trigger samples) with noise and five pulses, each with a slow part in
// all channels and a fast part in one channel.
//
// A reference model in the testbench (boxcar average, linear combination,
// direct convolution, network from nn_ref_pkg) predicts every output vector,
// which is compared in full. The OR trigger on path 1 is compared with a
// threshold/window model of that path. Each mechanism is counted and must
// occur: network overwrite, masked inputs, threshold crossings, primitives,
// OR and coincidence triggers, LSTM state clear, and at the end a burst of
// back-to-back ADC samples that queues samples in the network FIFO until it
// overflows. One trigger sample must take 2560 clocks (32 ADC samples at
// 1.25 MHz with a 100 MHz clock), with the network result before the next.
module tb_neural_trigger_top;
  import nt_pkg::*;
  import nn_ref_pkg::*;
  localparam int NP = N_PATHS, NC = N_CH, ND = N_DENSE, NL = N_LSTM, ROW = ND + NL + 1;
  localparam int ADC_PERIOD = 80;          // 100 MHz / 1.25 MHz
  localparam int N_SAMPLES  = 1024;        // trigger samples checked: one 32768-sample trace
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
  // mechanism counters
  int n_overwrite = 0, n_masked = 0, n_cross = 0, n_prim = 0, n_or = 0, n_and = 0;
  int n_clear = 0, n_queued = 0, n_overflow = 0, n_outs = 0;

  // reference state
  longint lc [NP][NC];
  longint fc [NP][N_TAPS];
  longint hist [NP][N_TAPS];
  int     hp = 0;
  longint w1[], b1[], wk[], wr_[], wb[], w2[], b2[], h[], c[];
  logic [NP-1:0] mask = '1;
  int in_sh [NP];
  samp_t [NP-1:0] exp_q [$];
  longint nn_ref_hist [$];
  longint dsacc [NC];
  int dscnt = 0;
  bit checking = 1;

  initial begin
    repeat (4_000_000) @(posedge clk);
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

  // ---------------------------------------------------------------- reference
  function automatic samp_t [NP-1:0] ref_sample(input longint ds [NC]);
    longint x[], y1[], y2[], yo;
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
    yo = sat((y2[0] <<< OUT_SHIFT) >>> 16);
    nn_ref_hist.push_back(yo);
    r[2] = samp_t'(yo);
    return r;
  endfunction

  // ADC waveform: noise plus pulses (slow part everywhere, fast part in one channel)
  function automatic int pulse(input int t, input int amp, input int tau_r, input int tau_f);
    if (t < 0) return 0;
    return int'(amp * (1.0 - $exp(-real'(t) / tau_r)) * $exp(-real'(t) / tau_f));
  endfunction

  // pulse start (ADC sample), channel with the fast part, amplitude; the last
  // two are placed at random in the middle half of the trace, 1000 or more
  // ADC samples apart
  int starts [5] = '{20 * 32 + 5, 60 * 32 + 11, 100 * 32 + 17, 0, 0};
  int fast_ch [5] = '{3, 8, 0, 5, 11};
  int amps [5] = '{900, 400, 1500, 700, 1100};
  initial begin
    starts[3] = 8192 + int'($urandom_range(0, 7000));
    starts[4] = starts[3] + 1000 + int'($urandom_range(0, 8000));
  end

  function automatic int adc_value(input int n, input int ch);
    int v = int'($urandom_range(0, 40)) - 20;
    for (int i = 0; i < 5; i++) begin
      v += pulse(n - starts[i], amps[i], 8, 400);
      if (ch == fast_ch[i]) v += pulse(n - starts[i], 3 * amps[i], 2, 60);
    end
    return (v > 32767) ? 32767 : (v < -32768) ? -32768 : v;
  endfunction

  // ---------------------------------------------------------------- path-1 trigger model
  bit m_above = 0, m_open = 0;
  int m_cnt = 0;
  longint m_amp, m_time;
  longint or_exp_amp [$], or_exp_time [$];
  longint nn_thr_on = 64'sh7FFF_FFFF, nn_thr_off = 64'sh7FFF_FFFF;

  task automatic model_path1(input longint v, input longint ts);
    bit cr = !m_above && v >= 4500;
    if (cr) m_above = 1; else if (m_above && v < 2500) m_above = 0;
    if (!m_open && cr) begin m_open = 1; m_cnt = 1; m_amp = v; m_time = ts; end
    else if (m_open) begin m_cnt++; if (v > m_amp) begin m_amp = v; m_time = ts; end end
    if (m_open && m_cnt >= WIN) begin
      m_open = 0; or_exp_amp.push_back(m_amp); or_exp_time.push_back(m_time);
    end
  endtask

  // ---------------------------------------------------------------- monitors
  initial begin
    automatic bit pend = 0;
    forever begin
      @(negedge clk);
      if (pend && checking) begin
        // threshold bit of path 1 one clock after its sample
        checks++;
        if (thr_above[0] != m_above) begin
          failures++; $display("sample %0d: threshold bit %0d exp %0d", n_outs - 1, thr_above[0], m_above);
        end
      end
      pend = path_valid;
      if (path_valid) begin
        if (checking) begin
          checks++;
          if (exp_q.size() == 0) begin failures++; $display("unexpected output"); end
          else begin
            automatic samp_t [NP-1:0] e = exp_q.pop_front();
            if (path_data != e) begin
              failures++;
              for (int p = 0; p < NP; p++) if (path_data[p] != e[p])
                $display("sample %0d path %0d: got %0d exp %0d", n_outs, p, path_data[p], e[p]);
            end
            if (path_data[2] == nn_out) n_overwrite++;
            model_path1(longint'(path_data[0]), longint'(n_outs));
          end
        end
        n_outs++;
      end
      if (trig_valid) begin
        if (trig_is_and) n_and++;
        if (checking && !(trig_is_and && trig_path == 5'd1)) begin
          n_or++;
          checks++;
          if (trig_path != 5'd0 || or_exp_amp.size() == 0) begin
            failures++; $display("unexpected OR trigger on path %0d", trig_path);
          end else begin
            automatic longint ea = or_exp_amp.pop_front();
            automatic longint et = or_exp_time.pop_front();
            if (longint'(trig_amp) != ea || longint'(trig_time) != et) begin
              failures++;
              $display("OR trigger amp %0d/%0d time %0d/%0d", trig_amp, ea, trig_time, et);
            end
          end
        end
      end
      if (|dut.crossing) n_cross++;
      if (|dut.prim_valid) n_prim++;
      if (nn_fifo_count >= 3'd2) n_queued++;
      if (nn_fifo_overflow) n_overflow++;
    end
  end

  // ---------------------------------------------------------------- stimulus
  initial begin
    automatic int n_adc = 0;
    automatic int t_first = -1, t_last = -1;
    w1 = new[NP*ND]; b1 = new[ND]; wk = new[4*NL*ND]; wr_ = new[4*NL*NL]; wb = new[4*NL];
    w2 = new[NL]; b2 = new[1]; h = new[NL]; c = new[NL];
    repeat (3) @(negedge clk);
    rst = 0;

    // linear combination (published configuration)
    for (int p = 0; p < NP; p++)
      for (int ch = 0; ch < NC; ch++) begin
        lc[p][ch] = (p < 2) ? 127 : ((p - 2) % NC == ch) ? 127 : 0;
        wr(RGN_LC, {3'b0, 5'(p), 4'b0, 4'(ch)}, 32'(lc[p][ch]));
      end
    // FIR coefficients: a 32-tap peak on a small random floor
    for (int p = 0; p < NP; p++)
      for (int k = 0; k < N_TAPS; k++) begin
        fc[p][k] = (k < 32) ? ((p == 1) ? 3000 : 4000) : longint'($urandom_range(0, 400)) - 200;
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
    // registers
    for (int p = 0; p < NP; p++) begin
      in_sh[p] = (p < 2) ? 14 : 12;
      wr(RGN_CTRL, 16'(A_IN_SHIFT + 8'(p)), 32'(in_sh[p]));
    end
    wr(RGN_CTRL, 16'(A_FIR_SHIFT), FIR_SHIFT);
    wr(RGN_CTRL, 16'(A_OUT_SHIFT), OUT_SHIFT);
    wr(RGN_CTRL, 16'(A_OUT_SEL), 2);
    wr(RGN_CTRL, 16'(A_WIN_LEN), WIN);
    wr(RGN_CTRL, 16'(A_THR_ON), 4500);
    wr(RGN_CTRL, 16'(A_THR_OFF), 2500);
    wr(RGN_CTRL, 16'(A_THR_ON + 8'd1), 3500);
    wr(RGN_CTRL, 16'(A_THR_OFF + 8'd1), 1500);
    wr(RGN_CTRL, 16'(A_OR_MASK), 32'h1);
    wr(RGN_CTRL, 16'(A_AND_MASK), 32'h4);     // coincidence: FOF primitive + NN threshold
    wr(RGN_CTRL, 16'(A_AND_LEAD), 1);
    nn_state_clear = 1; @(negedge clk); nn_state_clear = 0; n_clear++;
    foreach (h[j]) begin h[j] = 0; c[j] = 0; end
    wait (fir_ready);
    @(negedge clk);

    // ADC streaming at 1.25 MHz
    foreach (dsacc[ch]) dsacc[ch] = 0;
    for (int s = 0; s < N_SAMPLES; s++) begin
      if (s == 45) begin
        // NN path threshold placed from the network output seen so far
        longint mn = 64'sh7FFF_FFFF, mx = -64'sh7FFF_FFFF;
        foreach (nn_ref_hist[i]) begin
          if (i < 10) continue;
          if (nn_ref_hist[i] < mn) mn = nn_ref_hist[i];
          if (nn_ref_hist[i] > mx) mx = nn_ref_hist[i];
        end
        // just under the quiet range of the (random-weight) network output, so
        // that the network path is above it except where a pulse pulls it down
        nn_thr_on  = mn - (mx - mn);
        nn_thr_off = mn - 2 * (mx - mn);
        wr(RGN_CTRL, 16'(A_THR_ON + 8'd2), 32'(nn_thr_on));
        wr(RGN_CTRL, 16'(A_THR_OFF + 8'd2), 32'(nn_thr_off));
        $display("network output range so far %0d..%0d", mn, mx);
      end
      for (int a = 0; a < DS_FACTOR; a++) begin
        // the mask is changed after the network has taken the previous sample
        if (a == 20 && s == 80) begin mask = 26'h3FF_FFF3; wr(RGN_CTRL, 16'(A_IN_MASK), 32'(mask)); n_masked++; end
        if (a == 20 && s == 120) begin mask = '1; wr(RGN_CTRL, 16'(A_IN_MASK), 32'(mask)); end
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
        repeat (ADC_PERIOD - 1) begin
          @(negedge clk);
          if (path_valid) begin
            if (t_first < 0) t_first = $time; else if (t_last < 0) t_last = $time;
          end
        end
      end
    end
    repeat (3000) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("%0d outputs missing", exp_q.size()); end
    checks++;
    if (n_outs != N_SAMPLES) begin failures++; $display("outputs %0d", n_outs); end
    checks++;
    if ((t_last - t_first) != 2560 * 10) begin
      failures++; $display("sample period %0d ps", t_last - t_first);
    end
    checks++;
    if (or_exp_amp.size() != 0) begin failures++; $display("%0d OR triggers missing", or_exp_amp.size()); end

    // burst: ADC samples on every clock, more than the filters and network keep up with
    checking = 0;
    for (int i = 0; i < 200000 && n_overflow == 0; i++) begin
      for (int ch = 0; ch < NC; ch++) adc_data[ch] = ADC_W'(adc_value(n_adc, ch));
      adc_valid = 1;
      @(negedge clk);
      n_adc++;
    end
    adc_valid = 0;
    repeat (5000) @(negedge clk);

    $display("mechanisms: overwrite %0d masked %0d crossings %0d primitives %0d OR %0d AND %0d",
             n_overwrite, n_masked, n_cross, n_prim, n_or, n_and);
    $display("            clear %0d fifo-queued %0d fifo-overflow %0d", n_clear, n_queued, n_overflow);
    checks++; if (n_overwrite < N_SAMPLES) begin failures++; $display("overwrite missing"); end
    checks++; if (n_masked == 0) failures++;
    checks++; if (n_cross == 0) begin failures++; $display("no threshold crossing"); end
    checks++; if (n_prim == 0)  begin failures++; $display("no primitive"); end
    checks++; if (n_or == 0)    begin failures++; $display("no OR trigger"); end
    checks++; if (n_and == 0)   begin failures++; $display("no coincidence trigger"); end
    checks++; if (n_clear == 0) failures++;
    checks++; if (n_queued == 0) begin failures++; $display("FIFO never queued"); end
    checks++; if (n_overflow == 0) begin failures++; $display("FIFO never overflowed"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
