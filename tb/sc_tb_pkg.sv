// sc_tb_pkg: reference functions for the testbenches, written independently
// of the RTL: the stochastic cross-correlation (SCC) of two bitstreams, and
// the reference random sequences (Van der Corput base 2, Halton base 3).
package sc_tb_pkg;

  // SCC of two streams from their overlap counts:
  // a = both 1, b = X only, c = Y only, d = both 0, n = a+b+c+d.
  function automatic real scc(input int a, input int b, input int c, input int d);
    int  n;
    real num, den;
    n   = a + b + c + d;
    num = real'(a) * real'(d) - real'(b) * real'(c);
    if (num > 0.0) begin
      den = real'(n) * real'(((a + b) < (a + c)) ? (a + b) : (a + c))
            - real'(a + b) * real'(a + c);
    end else begin
      den = real'(a + b) * real'(a + c)
            - real'(n) * real'(((a - d) > 0) ? (a - d) : 0);
    end
    if (den == 0.0) return 0.0;
    return num / den;
  endfunction

  // i-th element of the base-2 Van der Corput sequence, scaled to w bits.
  function automatic int unsigned vdc(input int unsigned i, input int unsigned w);
    int unsigned r;
    r = 0;
    for (int unsigned k = 0; k < w; k++) if (i[k]) r |= (1 << (w - 1 - k));
    return r;
  endfunction

  // i-th element of the base-3 Halton sequence, scaled to w bits
  // (floor of the radical inverse times 2**w).
  function automatic int unsigned halton3(input int unsigned i, input int unsigned w);
    real f, inv;
    int unsigned n;
    f   = 0.0;
    inv = 1.0 / 3.0;
    n   = i;
    while (n > 0) begin
      f   = f + inv * real'(n % 3);
      n   = n / 3;
      inv = inv / 3.0;
    end
    return int'($floor(f * real'(1 << w) + 1.0e-9));
  endfunction

  function automatic real absr(input real v);
    return (v < 0.0) ? -v : v;
  endfunction

endpackage
