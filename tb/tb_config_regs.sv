// tb_config_regs: checks the reset values, writes every control register and
// per-path register through the write port and reads them back from the
// register structure, and checks the decoding of coefficient and weight
// writes into one-clock strobes with the right path, index and data.
module tb_config_regs;
  import nt_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic cfg_we = 0;
  logic [19:0] cfg_addr = 0;
  logic [31:0] cfg_wdata = 0;
  cfg_t cfg;
  logic [N_PATHS-1:0] lc_we, fir_we;
  logic [3:0] lc_ch;
  logic [7:0] lc_coef;
  logic [9:0] fir_tap;
  logic [15:0] fir_coef;
  logic nn_we;
  logic [1:0] nn_layer;
  logic [NN_AW-1:0] nn_addr;
  q_t nn_data;

  config_regs dut (.clk, .rst, .cfg_we, .cfg_addr, .cfg_wdata, .cfg, .lc_we, .lc_ch, .lc_coef,
                   .fir_we, .fir_tap, .fir_coef, .nn_we, .nn_layer, .nn_addr, .nn_data);

  int checks = 0, failures = 0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic wr(input logic [3:0] rgn, input logic [15:0] a, input logic [31:0] d);
    cfg_we = 1; cfg_addr = {rgn, a}; cfg_wdata = d;
    @(negedge clk);
    cfg_we = 0;
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst = 0;
    chk(cfg.in_mask == '1 && cfg.out_sel == 6'd2 && cfg.win_len == 16'd16 && cfg.or_mask == '0,
        "reset values");
    chk(cfg.thr_on[5] == 32'h7FFF_FFFF, "reset threshold");
    wr(RGN_CTRL, 16'(A_IN_MASK), 32'h0155_5555);
    wr(RGN_CTRL, 16'(A_OUT_SEL), 32'd7);
    wr(RGN_CTRL, 16'(A_OUT_SHIFT), 32'd9);
    wr(RGN_CTRL, 16'(A_FIR_SHIFT), 32'd13);
    wr(RGN_CTRL, 16'(A_WIN_LEN), 32'd40);
    wr(RGN_CTRL, 16'(A_OR_MASK), 32'h4);
    wr(RGN_CTRL, 16'(A_AND_MASK), 32'h5);
    wr(RGN_CTRL, 16'(A_AND_LEAD), 32'd1);
    for (int p = 0; p < N_PATHS; p++) begin
      wr(RGN_CTRL, 16'(A_IN_SHIFT + 8'(p)), 32'(p % 32));
      wr(RGN_CTRL, 16'(A_THR_ON + 8'(p)), 32'(1000 + p));
      wr(RGN_CTRL, 16'(A_THR_OFF + 8'(p)), 32'(-p));
    end
    chk(cfg.in_mask == 26'h155_5555, "in_mask");
    chk(cfg.out_sel == 6'd7 && cfg.out_shift == 5'd9 && cfg.fir_shift == 5'd13, "shifts/sel");
    chk(cfg.win_len == 16'd40 && cfg.or_mask == 26'h4 && cfg.and_mask == 26'h5 && cfg.and_lead == 5'd1,
        "trigger regs");
    for (int p = 0; p < N_PATHS; p++) begin
      chk(cfg.in_shift[p] == 5'(p % 32), $sformatf("in_shift %0d", p));
      chk(cfg.thr_on[p] == 32'(1000 + p) && cfg.thr_off[p] == 32'(-p), $sformatf("thr %0d", p));
    end
    // coefficient and weight strobes
    cfg_we = 1; cfg_addr = {RGN_LC, 3'b0, 5'd17, 4'b0, 4'd9}; cfg_wdata = 32'h7F;
    @(negedge clk); cfg_we = 0;
    chk(lc_we == NP1(17) && lc_ch == 4'd9 && lc_coef == 8'h7F && fir_we == '0 && !nn_we, "lc strobe");
    @(negedge clk);
    chk(lc_we == '0, "lc strobe one clock");
    cfg_we = 1; cfg_addr = {RGN_FIR, 1'b0, 5'd25, 10'd1000}; cfg_wdata = 32'h8001;
    @(negedge clk); cfg_we = 0;
    chk(fir_we == NP1(25) && fir_tap == 10'd1000 && fir_coef == 16'h8001 && lc_we == '0, "fir strobe");
    cfg_we = 1; cfg_addr = {RGN_NN, 2'd1, 14'h2ABC}; cfg_wdata = 32'hDEAD_BEEF;
    @(negedge clk); cfg_we = 0;
    chk(nn_we && nn_layer == 2'd1 && nn_addr == 14'h2ABC && nn_data == 32'hDEAD_BEEF, "nn strobe");
    cfg_we = 1; cfg_addr = {RGN_LC, 3'b0, 5'd30, 8'd0}; cfg_wdata = 32'h1;
    @(negedge clk); cfg_we = 0;
    chk(lc_we == '0, "out-of-range path ignored");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [N_PATHS-1:0] NP1(input int p);
    return N_PATHS'(1) << p;
  endfunction
endmodule
