// tb_downsampler: checks the boxcar downsampler against block averages
// computed in the testbench from random 16-bit samples, on all 12 channels,
// including full-scale values, and checks that exactly one output appears per
// 32 input samples, one clock after the last of them.
module tb_downsampler;
  import nt_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic adc_valid = 0;
  logic signed [N_CH-1:0][ADC_W-1:0] adc_data = '0;
  logic ds_valid;
  logic signed [N_CH-1:0][ADC_W-1:0] ds_data;

  downsampler dut (.clk, .rst, .adc_valid, .adc_data, .ds_valid, .ds_data);

  int checks = 0, failures = 0;
  longint sum [N_CH];
  int outs = 0;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst = 0;
    for (int blk = 0; blk < 40; blk++) begin
      foreach (sum[c]) sum[c] = 0;
      for (int s = 0; s < DS_FACTOR; s++) begin
        for (int c = 0; c < N_CH; c++) begin
          int v;
          if (blk == 0)      v = 32767;
          else if (blk == 1) v = -32768;
          else               v = int'($urandom_range(0, 65535)) - 32768;
          adc_data[c] = ADC_W'(v);
          sum[c] += v;
        end
        adc_valid = 1;
        @(negedge clk);
        adc_valid = 0;
        if (s == DS_FACTOR - 1) begin
          checks++;
          if (!ds_valid) begin failures++; $display("blk %0d: no ds_valid", blk); end
          for (int c = 0; c < N_CH; c++) begin
            automatic longint exp_v = sum[c] >>> 5;
            checks++;
            if (longint'($signed(ds_data[c])) != exp_v) begin
              failures++;
              $display("blk %0d ch %0d: got %0d exp %0d", blk, c, $signed(ds_data[c]), exp_v);
            end
          end
          outs++;
        end
        // idle gaps of 0..3 clocks between ADC samples
        repeat ($urandom_range(0, 3)) begin
          @(negedge clk);
          checks++;
          if (ds_valid) begin failures++; $display("unexpected ds_valid"); end
        end
      end
    end
    checks++;
    if (outs != 40) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
