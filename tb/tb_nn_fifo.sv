// tb_nn_fifo: random push/pop traffic against a queue model: checks the head
// word, empty/full/count, simultaneous push and pop when full, dropped pushes
// with the overflow flag and ignored pops when empty.
module tb_nn_fifo;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  localparam int W = 64, D = 4;

  logic push = 0, pop = 0;
  logic [W-1:0] din = 0, dout;
  logic empty, full, overflow;
  logic [2:0] count;

  nn_fifo #(.WIDTH(W), .DEPTH(D)) dut (.clk, .rst, .push, .din, .pop, .dout, .empty, .full,
                                       .count, .overflow);

  int checks = 0, failures = 0, n_ovf = 0, n_full = 0;
  logic [W-1:0] q [$];

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
    for (int i = 0; i < 3000; i++) begin
      automatic bit exp_ovf;
      automatic bit popped;
      // phases: fill-heavy, drain-heavy, mixed
      automatic int pp = (i % 600 < 200) ? 80 : (i % 600 < 400) ? 20 : 50;
      push = ($urandom_range(0, 99) < pp);
      pop  = ($urandom_range(0, 99) < 100 - pp);
      din  = {$urandom, $urandom};
      checks++;
      if (empty != (q.size() == 0) || full != (q.size() == D) || count != 3'(q.size())) begin
        failures++; $display("status mismatch at %0d: count %0d model %0d", i, count, q.size());
      end
      if (q.size() > 0) begin
        checks++;
        if (dout != q[0]) begin failures++; $display("head mismatch at %0d", i); end
      end
      if (full) n_full++;
      popped  = pop && q.size() > 0;
      exp_ovf = push && q.size() == D && !popped;
      if (popped) void'(q.pop_front());
      if (push && !exp_ovf) q.push_back(din);
      @(negedge clk);
      checks++;
      if (overflow != exp_ovf) begin failures++; $display("overflow flag at %0d", i); end
      if (overflow) n_ovf++;
    end
    checks++;
    if (n_ovf == 0 || n_full == 0) begin failures++; $display("full/overflow never reached"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
