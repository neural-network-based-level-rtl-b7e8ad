// tb_nn_lstm: loads random kernel, recurrent and bias weights into the
// 24-input, 12-unit LSTM, runs a sequence of random input vectors and
// compares h and c after every step with the reference step in nn_ref_pkg,
// so that the carried state is checked too. Large biases drive the gates into
// every segment of the sigmoid. Checks the 447-clock step latency and that
// clear zeroes the state.
module tb_nn_lstm;
  import nt_pkg::*;
  import nn_ref_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  localparam int NI = 24, NU = 12, ROW = NI + NU + 1;

  logic clear = 0, wr_en = 0, start = 0;
  logic [NN_AW-1:0] wr_addr = 0;
  q_t wr_data = 0;
  q_t [NI-1:0] in_vec = '0;
  logic busy, done;
  q_t [NU-1:0] h_vec, c_vec;

  nn_lstm dut (.clk, .rst, .clear, .wr_en, .wr_addr, .wr_data, .start, .in_vec,
               .busy, .done, .h_vec, .c_vec);

  int checks = 0, failures = 0;
  longint wk[], wr_[], wb[], x[], h[], c[];

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(input int g, input int local_addr, input longint v);
    wr_en = 1;
    wr_addr = {2'(g), 12'(local_addr)};
    wr_data = q_t'(v);
    @(negedge clk);
    wr_en = 0;
  endtask

  initial begin
    wk = new[4*NU*NI]; wr_ = new[4*NU*NU]; wb = new[4*NU];
    x = new[NI]; h = new[NU]; c = new[NU];
    repeat (3) @(negedge clk);
    rst = 0;
    for (int trial = 0; trial < 3; trial++) begin
      for (int g = 0; g < 4; g++)
        for (int j = 0; j < NU; j++) begin
          for (int k = 0; k < NI; k++) begin
            wk[(g*NU+j)*NI+k] = rnd_q(0) >>> 1;
            wr(g, j*ROW + k, wk[(g*NU+j)*NI+k]);
          end
          for (int m = 0; m < NU; m++) begin
            wr_[(g*NU+j)*NU+m] = rnd_q(0) >>> 1;
            wr(g, j*ROW + NI + m, wr_[(g*NU+j)*NU+m]);
          end
          wb[g*NU+j] = rnd_q(2 + trial);
          wr(g, j*ROW + NI + NU, wb[g*NU+j]);
        end
      // clear the state
      clear = 1; @(negedge clk); clear = 0;
      foreach (h[j]) begin h[j] = 0; c[j] = 0; end
      checks++;
      if (h_vec != '0 || c_vec != '0) begin failures++; $display("clear failed"); end
      for (int step = 0; step < 10; step++) begin
        automatic int lat = 0;
        for (int k = 0; k < NI; k++) begin x[k] = relu(rnd_q(2)); in_vec[k] = q_t'(x[k]); end
        lstm_step(NI, NU, wk, wr_, wb, x, h, c);
        start = 1; @(negedge clk); start = 0;
        while (!done && lat < 5000) begin @(negedge clk); lat++; end
        checks++;
        if (lat != NU * ROW + 2) begin failures++; $display("latency %0d", lat); end
        for (int j = 0; j < NU; j++) begin
          checks += 2;
          if (longint'(h_vec[j]) != h[j] || longint'(c_vec[j]) != c[j]) begin
            failures++;
            $display("trial %0d step %0d unit %0d: h %0d/%0d c %0d/%0d", trial, step, j,
                     h_vec[j], h[j], c_vec[j], c[j]);
          end
        end
      end
    end
    // sigmoid reference against the RTL function on a sweep including breakpoints
    for (longint v = -400000; v <= 400000; v += 997) begin
      checks++;
      if (longint'(sigmoid_pla(q_t'(v))) != sig(v)) begin
        failures++; $display("sigmoid(%0d): %0d vs %0d", v, sigmoid_pla(q_t'(v)), sig(v));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
