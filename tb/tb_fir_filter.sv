// tb_fir_filter: loads 1024 random 16-bit coefficients (extremes at both
// ends), feeds random 24-bit samples and compares every output with the
// direct convolution y[n] = sum c[k] x[n-k] (zero history after reset),
// shifted right and saturated, computed in the testbench. Checks the
// TAPS+2 clock latency and that the clearing sweep after reset drops input.
module tb_fir_filter;
  import nt_pkg::*;
  localparam int TAPS = N_TAPS;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic cfg_we = 0;
  logic [9:0] cfg_tap = 0;
  logic signed [15:0] cfg_coef = 0;
  logic [4:0] shift = 0;
  logic in_valid = 0;
  logic signed [LC_OUT_W-1:0] in_data = 0;
  logic ready, out_valid;
  logic signed [31:0] out_data;

  fir_filter dut (.clk, .rst, .cfg_we, .cfg_tap, .cfg_coef, .shift, .in_valid, .in_data,
                  .ready, .out_valid, .out_data);

  int checks = 0, failures = 0;
  longint c [TAPS];
  longint x [$];

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint sat32r(input longint v);
    if (v > 64'sd2147483647)  return 64'sd2147483647;
    if (v < -64'sd2147483648) return -64'sd2147483648;
    return v;
  endfunction

  initial begin
    repeat (3) @(posedge clk);
    rst <= 0;
    @(posedge clk);
    checks++;
    if (ready) begin failures++; $display("ready during clear sweep"); end
    for (int k = 0; k < TAPS; k++) begin
      c[k] = (k == 0) ? 32767 : (k == 1) ? -32768 : longint'($urandom_range(0, 65535)) - 32768;
      cfg_we <= 1; cfg_tap <= 10'(k); cfg_coef <= 16'(c[k]);
      @(posedge clk);
    end
    cfg_we <= 0;
    wait (ready);
    @(posedge clk);
    for (int n = 0; n < 60; n++) begin
      automatic longint v, acc = 0, e;
      automatic int lat = 0;
      if (n == 40) begin
        // large constant run to drive the output into saturation
        v = 8388607;
      end else if (n > 40 && n < 50) v = 8388607;
      else v = longint'($urandom_range(0, 16777215)) - 8388608;
      shift <= (n < 40) ? 5'd0 : (n < 55) ? 5'd3 : 5'd12;
      x.push_front(v);
      in_data <= 24'(v);
      in_valid <= 1;
      @(posedge clk);
      in_valid <= 0;
      do begin @(posedge clk); lat++; end while (!out_valid && lat < 5000);
      for (int k = 0; k < TAPS && k < x.size(); k++) acc += c[k] * x[k];
      e = sat32r(acc >>> ((n < 40) ? 0 : (n < 55) ? 3 : 12));
      checks++;
      if (longint'(out_data) != e) begin
        failures++;
        $display("n %0d: got %0d exp %0d", n, out_data, e);
      end
      checks++;
      if (lat != TAPS + 2) begin failures++; $display("latency %0d", lat); end
      repeat ($urandom_range(0, 5)) @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
