// tb_trigger_logic: random primitives, threshold bits and window flags on 26
// paths against a model of the two Boolean forms: OR over masked primitives
// (lowest path reported) and the coincidence of a primitive on the lead path
// with the threshold bits of the AND-mask paths seen during the lead window.
module tb_trigger_logic;
  import nt_pkg::*;
  localparam int NP = N_PATHS;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic [NP-1:0] or_mask = 0, and_mask = 0, above = 0, win_open = 0, prim_valid = 0;
  logic [4:0] and_lead = 0;
  logic in_valid = 0;
  prim_t [NP-1:0] prim;
  logic trig_valid, trig_is_and;
  logic [4:0] trig_path;
  prim_t trig_prim;

  trigger_logic dut (.clk, .rst, .or_mask, .and_mask, .and_lead, .in_valid, .above, .win_open,
                     .prim_valid, .prim, .trig_valid, .trig_path, .trig_prim, .trig_is_and);

  int checks = 0, failures = 0, n_or = 0, n_and = 0;
  logic [NP-1:0] m_seen = 0;

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
    for (int i = 0; i < 8000; i++) begin
      automatic bit ev = 0, eand = 0;
      automatic int ep = 0;
      automatic logic [NP-1:0] s, orhit;
      if (i % 2000 == 0) begin
        or_mask  = (i < 4000) ? NP'(1 << 2) | NP'(1 << 9) : '0;
        and_mask = (i >= 2000) ? NP'(1 << 2) | NP'(1 << 7) : '0;
        and_lead = 5'd1;
      end
      in_valid   = ($urandom_range(0, 1) == 1);
      above      = NP'({$urandom, $urandom}) & NP'({$urandom, $urandom});
      win_open   = NP'({$urandom, $urandom}) | NP'({$urandom, $urandom});
      prim_valid = NP'({$urandom, $urandom}) & NP'({$urandom, $urandom}) & NP'({$urandom, $urandom});
      for (int p = 0; p < NP; p++) begin
        prim[p].amp = samp_t'($urandom); prim[p].ptime = $urandom; prim[p].thr = 1'($urandom);
      end
      s = m_seen;
      if (in_valid) s = (win_open[and_lead] ? m_seen : '0) | above;
      m_seen = s;
      orhit = prim_valid & or_mask;
      eand = (and_mask != 0 && prim_valid[and_lead] && (s & and_mask) == and_mask);
      if (orhit != 0) begin
        ev = 1;
        for (int p = NP - 1; p >= 0; p--) if (orhit[p]) ep = p;
      end else if (and_mask != 0 && prim_valid[and_lead] && (s & and_mask) == and_mask) begin
        ev = 1; eand = 1; ep = and_lead;
      end
      @(negedge clk);
      checks++;
      if (trig_valid != ev || (ev && (trig_path != 5'(ep) || trig_is_and != eand ||
                                      trig_prim != prim[ep]))) begin
        failures++;
        $display("i %0d: valid %0d/%0d path %0d/%0d and %0d/%0d", i, trig_valid, ev, trig_path, ep,
                 trig_is_and, eand);
      end
      if (ev && !eand) n_or++;
      if (eand) n_and++;
    end
    checks++;
    if (n_or < 10 || n_and < 10) begin failures++; $display("or %0d and %0d", n_or, n_and); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
