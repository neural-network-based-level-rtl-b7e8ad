// tb_lincomb: loads random 8-bit coefficients (and the phonon-total and
// single-channel settings of 127) into one linear-combination unit, feeds
// random channel samples and compares the output with the weighted sum >>> 7
// computed in the testbench; checks the latency of N+1 = 13 clocks.
module tb_lincomb;
  import nt_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic cfg_we = 0;
  logic [3:0] cfg_ch = 0;
  logic signed [7:0] cfg_coef = 0;
  logic in_valid = 0;
  logic signed [N_CH-1:0][ADC_W-1:0] in_data = '0;
  logic out_valid;
  logic signed [LC_OUT_W-1:0] out_data;

  lincomb dut (.clk, .rst, .cfg_we, .cfg_ch, .cfg_coef, .in_valid, .in_data, .out_valid, .out_data);

  int checks = 0, failures = 0;
  int coef [N_CH];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic load(input int mode);
    for (int c = 0; c < N_CH; c++) begin
      case (mode)
        0: coef[c] = 127;                                  // phonon total
        1: coef[c] = (c == 5) ? 127 : 0;                   // single channel 6
        default: coef[c] = int'($urandom_range(0, 255)) - 128;
      endcase
      cfg_we <= 1; cfg_ch <= 4'(c); cfg_coef <= 8'(coef[c]);
      @(posedge clk);
    end
    cfg_we <= 0;
    @(posedge clk);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int mode = 0; mode < 6; mode++) begin
      load(mode);
      for (int t = 0; t < 20; t++) begin
        automatic longint s = 0;
        automatic int lat = 0;
        for (int c = 0; c < N_CH; c++) begin
          automatic int v = (t == 0) ? 32767 : (t == 1) ? -32768 : int'($urandom_range(0, 65535)) - 32768;
          in_data[c] <= ADC_W'(v);
          s += longint'(v) * coef[c];
        end
        in_valid <= 1;
        @(posedge clk);
        in_valid <= 0;
        do begin @(posedge clk); lat++; end while (!out_valid && lat < 100);
        checks++;
        if (longint'(out_data) != (s >>> 7)) begin
          failures++;
          $display("mode %0d t %0d: got %0d exp %0d", mode, t, out_data, s >>> 7);
        end
        checks++;
        if (lat != N_CH + 1) begin failures++; $display("latency %0d", lat); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
