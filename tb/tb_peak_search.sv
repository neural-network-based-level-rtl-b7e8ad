// tb_peak_search: feeds random samples with random crossing and threshold
// flags and compares every emitted primitive (peak amplitude, peak time,
// threshold bit) and its timing with a window model in the testbench, for
// window lengths 1, 5 and 16.
module tb_peak_search;
  import nt_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic [WIN_W-1:0] win_len = 5;
  logic in_valid = 0, above = 0, crossing = 0;
  samp_t in_data = 0;
  logic [TS_W-1:0] timestamp = 0;
  logic win_open, prim_valid;
  prim_t prim;

  peak_search dut (.clk, .rst, .win_len, .in_valid, .in_data, .above, .crossing, .timestamp,
                   .win_open, .prim_valid, .prim);

  int checks = 0, failures = 0, n_prim = 0;
  bit m_open = 0;
  int m_cnt = 0;
  prim_t m_cur;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst = 0;
    for (int i = 0; i < 6000; i++) begin
      automatic bit exp_v = 0;
      if (i == 2000) win_len = 1;
      if (i == 4000) win_len = 16;
      in_valid = ($urandom_range(0, 2) != 0);
      in_data  = samp_t'(int'($urandom_range(0, 2000)) - 1000);
      crossing = ($urandom_range(0, 9) == 0);
      above    = ($urandom_range(0, 3) == 0);
      if (in_valid) begin
        timestamp++;
        if (!m_open && crossing) begin
          m_open = 1; m_cnt = 1;
          m_cur.amp = in_data; m_cur.ptime = timestamp; m_cur.thr = above;
        end else if (m_open) begin
          m_cnt++;
          if (in_data > m_cur.amp) begin m_cur.amp = in_data; m_cur.ptime = timestamp; end
          m_cur.thr |= above;
        end
        if (m_open && m_cnt >= int'(win_len)) begin exp_v = 1; m_open = 0; end
      end
      @(negedge clk);
      checks++;
      if (prim_valid != exp_v || (exp_v && prim != m_cur) || win_open != m_open) begin
        failures++;
        $display("i %0d: valid %0d/%0d amp %0d/%0d t %0d/%0d", i, prim_valid, exp_v,
                 prim.amp, m_cur.amp, prim.ptime, m_cur.ptime);
      end
      if (exp_v) n_prim++;
    end
    checks++;
    if (n_prim < 50) begin failures++; $display("few primitives"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
