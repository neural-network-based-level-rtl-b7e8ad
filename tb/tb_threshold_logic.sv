// tb_threshold_logic: drives a random walk through a hysteresis band
// (activation 2, deactivation 1, as on the reference path of the published
// study, then a wide band and negative thresholds) and compares the threshold
// bit and the crossing flag with a model in the testbench.
module tb_threshold_logic;
  import nt_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  samp_t thr_on = 2, thr_off = 1, in_data = 0, out_data;
  logic in_valid = 0, out_valid, above, crossing;

  threshold_logic dut (.clk, .rst, .thr_on, .thr_off, .in_valid, .in_data, .out_valid,
                       .out_data, .above, .crossing);

  int checks = 0, failures = 0, n_cross = 0, n_fall = 0;
  bit m_above = 0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    automatic int v = 0;
    repeat (3) @(negedge clk);
    rst = 0;
    for (int i = 0; i < 6000; i++) begin
      automatic bit m_cross;
      if (i == 2000) begin thr_on = 500; thr_off = -200; end
      if (i == 4000) begin thr_on = -100; thr_off = -300; end
      v += int'($urandom_range(0, 8)) - 4;
      if (i < 2000) v = (v > 6) ? 6 : (v < -4) ? -4 : v;
      else v = (v > 900) ? 900 : (v < -900) ? -900 : v;
      in_data = samp_t'(v);
      in_valid = ($urandom_range(0, 3) != 0);
      m_cross = 0;
      if (in_valid) begin
        m_cross = !m_above && (v >= int'(thr_on));
        if (m_cross) m_above = 1;
        else if (m_above && v < int'(thr_off)) begin m_above = 0; n_fall++; end
      end
      @(negedge clk);
      checks++;
      if (out_valid != in_valid || above != m_above || (in_valid && crossing != m_cross) ||
          (in_valid && out_data != samp_t'(v))) begin
        failures++;
        $display("i %0d v %0d: above %0d/%0d cross %0d/%0d", i, v, above, m_above, crossing, m_cross);
      end
      if (in_valid && m_cross) n_cross++;
    end
    checks++;
    if (n_cross < 5 || n_fall < 5) begin failures++; $display("few crossings %0d %0d", n_cross, n_fall); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
