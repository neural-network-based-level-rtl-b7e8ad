// nn_ref_pkg: reference arithmetic for the testbenches of the network blocks.
//
// A plain, loop-based model of the Q16.16 network (dense layer, LSTM step,
// piecewise-linear sigmoid) written with 64-bit integers and reals, kept apart
// from the RTL so that the testbenches compare against an independent
// calculation. Values must stay small enough that 64-bit sums do not wrap.
package nn_ref_pkg;

  function automatic longint sat(input longint v);
    if (v > 64'sd2147483647)  return 64'sd2147483647;
    if (v < -64'sd2147483648) return -64'sd2147483648;
    return v;
  endfunction

  function automatic longint mulq(input longint a, input longint b);
    return sat((a * b) >>> 16);
  endfunction

  function automatic longint relu(input longint v);
    return (v < 0) ? 0 : v;
  endfunction

  // PLAN sigmoid evaluated in real arithmetic on the Q16.16 grid, then
  // floored back to Q16.16 (the breakpoints are exact in binary).
  function automatic longint sig(input longint x);
    real a, y;
    longint q;
    a = ((x < 0) ? -x : x) / 65536.0;
    if (a >= 5.0)        y = 1.0;
    else if (a >= 2.375) y = 0.03125 * a + 0.84375;
    else if (a >= 1.0)   y = 0.125 * a + 0.625;
    else                 y = 0.25 * a + 0.5;
    q = longint'($floor(y * 65536.0));
    return (x < 0) ? 65536 - q : q;
  endfunction

  // Dense layer: w[n*nin+k], b[n].
  function automatic void dense(input int nin, input int nout, input bit use_relu,
                                input longint w[], input longint b[],
                                input longint x[], output longint y[]);
    y = new[nout];
    for (int n = 0; n < nout; n++) begin
      longint s = b[n] <<< 16;
      for (int k = 0; k < nin; k++) s += w[n*nin+k] * x[k];
      y[n] = sat(s >>> 16);
      if (use_relu) y[n] = relu(y[n]);
    end
  endfunction

  // One LSTM step. wk[(g*nu+j)*nin+k], wr[(g*nu+j)*nu+m], wb[g*nu+j].
  function automatic void lstm_step(input int nin, input int nu,
                                    input longint wk[], input longint wr[], input longint wb[],
                                    input longint x[], inout longint h[], inout longint c[]);
    longint hn[];
    hn = new[nu];
    for (int j = 0; j < nu; j++) begin
      longint z[4];
      longint gi, gf, gu, go, cn;
      for (int g = 0; g < 4; g++) begin
        longint s = wb[g*nu+j] <<< 16;
        for (int k = 0; k < nin; k++) s += wk[(g*nu+j)*nin+k] * x[k];
        for (int m = 0; m < nu; m++)  s += wr[(g*nu+j)*nu+m] * h[m];
        z[g] = sat(s >>> 16);
      end
      gi = sig(z[0]); gf = sig(z[1]); gu = relu(z[2]); go = sig(z[3]);
      cn = sat(mulq(gf, c[j]) + mulq(gi, gu));
      c[j]  = cn;
      hn[j] = mulq(go, relu(cn));
    end
    h = hn;
  endfunction

  // Random Q16.16 value in [-range, +range) for range a power of two.
  function automatic longint rnd_q(input int range_log2);
    longint r = longint'($urandom_range(0, (1 << (range_log2 + 17)) - 1));
    return r - (longint'(1) << (range_log2 + 16));
  endfunction

endpackage
