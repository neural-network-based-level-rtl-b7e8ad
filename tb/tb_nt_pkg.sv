// tb_nt_pkg: checks the fixed-point helper functions of the shared package.
//
// sat32, relu, qmul and sigmoid_pla are compared with independent models:
// 64-bit integer arithmetic for saturation and the floored Q16.16 product,
// and real arithmetic for the piecewise-linear sigmoid (floored back to
// Q16.16). Edge values (zero, breakpoints, +/- full scale, saturation limits)
// come first, then random values. The sigmoid is also checked to be
// monotonic (apart from the approximation's own step of 1/256 at
// |x| = 2.375, where its two middle segments do not quite meet), symmetric
// (s(x) + s(-x) = 1 within one LSB) and within 0.02 of the exact logistic
// function. A clocked watchdog ends a stuck run.
module tb_nt_pkg;
  import nt_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  initial begin
    repeat (100_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint m_sat(input longint v);
    if (v > 64'sd2147483647)  return 64'sd2147483647;
    if (v < -64'sd2147483648) return -64'sd2147483648;
    return v;
  endfunction

  function automatic longint m_mul(input longint a, input longint b);
    longint p = a * b;
    // floor division by 2^16 written without shifts
    longint q = p / 65536;
    if (p < 0 && q * 65536 != p) q = q - 1;
    return m_sat(q);
  endfunction

  function automatic longint m_sig(input longint x);
    real a = ((x < 0) ? -real'(x) : real'(x)) / 65536.0;
    real y;
    longint q;
    if (a >= 5.0)        y = 1.0;
    else if (a >= 2.375) y = a / 32.0 + 0.84375;
    else if (a >= 1.0)   y = a / 8.0 + 0.625;
    else                 y = a / 4.0 + 0.5;
    q = longint'($floor(y * 65536.0));
    return (x < 0) ? 65536 - q : q;
  endfunction

  task automatic chk(input string what, input longint got, input longint exp, input longint arg);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("%s(%0d): got %0d exp %0d", what, arg, got, exp);
    end
  endtask

  longint edges [] = '{0, 1, -1, 65535, 65536, -65536, 65537, 155647, 155648, -155648,
                       327679, 327680, -327680, 64'sd2147483647, -64'sd2147483648, 100000, -100000};

  initial begin
    automatic longint prev;
    automatic real maxerr = 0.0;
    @(negedge clk);
    // sat32
    foreach (edges[i]) chk("sat32", longint'(sat32(96'(edges[i]))), m_sat(edges[i]), edges[i]);
    chk("sat32", longint'(sat32(96'sh1_0000_0000)), 64'sd2147483647, 64'sh1_0000_0000);
    chk("sat32", longint'(sat32(-96'sh1_0000_0000)), -64'sd2147483648, -64'sh1_0000_0000);
    for (int i = 0; i < 2000; i++) begin
      automatic longint v = longint'({$urandom, $urandom}) >>> $urandom_range(0, 40);
      chk("sat32", longint'(sat32(96'(v))), m_sat(v), v);
    end
    // relu
    foreach (edges[i]) chk("relu", longint'(relu(q_t'(edges[i]))), (edges[i] < 0) ? 0 : edges[i], edges[i]);
    // qmul
    foreach (edges[i])
      foreach (edges[j])
        chk("qmul", longint'(qmul(q_t'(edges[i]), q_t'(edges[j]))), m_mul(edges[i], edges[j]), edges[i]);
    for (int i = 0; i < 3000; i++) begin
      automatic longint a = longint'(q_t'($urandom)) >>> $urandom_range(0, 24);
      automatic longint b = longint'(q_t'($urandom)) >>> $urandom_range(0, 24);
      chk("qmul", longint'(qmul(q_t'(a), q_t'(b))), m_mul(a, b), a);
    end
    // sigmoid: edges, random, and a sweep over [-8, 8) in steps of 1/256
    foreach (edges[i]) chk("sigmoid", longint'(sigmoid_pla(q_t'(edges[i]))), m_sig(edges[i]), edges[i]);
    for (int i = 0; i < 3000; i++) begin
      automatic longint a = longint'(q_t'($urandom)) >>> $urandom_range(8, 28);
      chk("sigmoid", longint'(sigmoid_pla(q_t'(a))), m_sig(a), a);
    end
    prev = -1;
    for (longint x = -524288; x < 524288; x += 256) begin
      automatic longint s  = longint'(sigmoid_pla(q_t'(x)));
      automatic longint sn = longint'(sigmoid_pla(q_t'(-x)));
      automatic real    e  = real'(s) / 65536.0 - 1.0 / (1.0 + $exp(-real'(x) / 65536.0));
      if (e < 0) e = -e;
      if (e > maxerr) maxerr = e;
      checks++;
      // PLAN itself steps down by 1/256 where |x| = 2.375: allow exactly that
      if (s < prev && !((x == 155648 || x == -155392) && prev - s <= 256)) begin
        failures++; $display("sigmoid not monotonic at %0d", x);
      end
      checks++;
      if (s + sn < 65535 || s + sn > 65537) begin failures++; $display("sigmoid not symmetric at %0d", x); end
      prev = s;
    end
    checks++;
    if (maxerr > 0.02) begin failures++; $display("sigmoid error %f", maxerr); end
    $display("largest sigmoid error %f", maxerr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
