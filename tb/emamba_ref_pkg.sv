// emamba_ref_pkg -- reference arithmetic for the eMamba testbenches.
//
// Integer models of every datapath operation, written from the design's
// equations rather than from the RTL: the piecewise-linear tables are rebuilt
// here from the real SiLU and exp functions at the segment breakpoints, the
// divider is an integer division, and shifts are floor divisions. The block
// testbenches and the end-to-end testbench compare the hardware against these.
package emamba_ref_pkg;

  function automatic int sat(input longint v, input int lo, input int hi);
    if (v > hi) return hi;
    if (v < lo) return lo;
    return int'(v);
  endfunction
  function automatic int s8(input longint v);  return sat(v, -128, 127);          endfunction
  function automatic int s24(input longint v); return sat(v, -8388608, 8388607);  endfunction

  // floor(v / 2^s) for any sign
  function automatic longint fdiv2(input longint v, input int s);
    longint d;
    d = longint'(1) << s;
    if (v >= 0) return v / d;
    return -((-v + d - 1) / d);
  endfunction

  // ---------------- piecewise-linear functions ----------------
  function automatic real silu_r(input real x); return x / (1.0 + $exp(-x)); endfunction

  function automatic real bp(input bit is_exp, input int k);
    real sb [18] = '{-7.0, -5.0, -4.0, -3.0, -2.5, -2.0, -1.5, -1.0, -0.5, 0.0,
                     0.5, 1.0, 1.5, 2.0, 3.0, 4.0, 5.0, 7.0};
    real eb [12] = '{-4.0, -3.0, -2.5, -2.0, -1.5, -1.0, -0.75, -0.5, -0.25, 0.0,
                     0.5, 1.0};
    return is_exp ? eb[k] : sb[k];
  endfunction

  function automatic real fn(input bit is_exp, input real x);
    return is_exp ? $exp(x) : silu_r(x);
  endfunction

  // chord slope / intercept of segment k in Q12
  function automatic int chord_slope(input bit is_exp, input int k);
    real a, b;
    a = bp(is_exp, k); b = bp(is_exp, k+1);
    return int'((fn(is_exp, b) - fn(is_exp, a)) / (b - a) * 4096.0);
  endfunction
  function automatic int chord_icpt(input bit is_exp, input int k);
    real a, b, s;
    a = bp(is_exp, k); b = bp(is_exp, k+1);
    s = (fn(is_exp, b) - fn(is_exp, a)) / (b - a);
    return int'((fn(is_exp, a) - s * a) * 4096.0);
  endfunction

  function automatic int pwl(input bit is_exp, input int x, input int in_frac,
                             input int out_frac);
    int     nseg;
    real    xr;
    longint acc;
    int     seg;
    nseg = is_exp ? 11 : 17;
    xr   = real'(x) / real'(1 << in_frac);
    if (xr < bp(is_exp, 0)) return 0;
    if (xr >= bp(is_exp, nseg)) begin
      if (!is_exp) return s8(fdiv2(longint'(x) << out_frac, in_frac));
      acc = int'($exp(1.0) * 4096.0);
    end else begin
      seg = 0;
      for (int k = 1; k < nseg; k++) if (xr >= bp(is_exp, k)) seg = k;
      acc = fdiv2(longint'(chord_slope(is_exp, seg)) * x, in_frac) + chord_icpt(is_exp, seg);
    end
    return s8(fdiv2(acc + (longint'(1) << (11 - out_frac)), 12 - out_frac));
  endfunction

  function automatic int silu_ref(input int x); return pwl(1'b0, x, 4, 4); endfunction
  function automatic int exp_ref (input int x); return pwl(1'b1, x, 4, 7); endfunction

  // ---------------- range normalisation, one element ----------------
  function automatic int rn_elem(input int num, input int den, input int gamma,
                                 input int beta, input int qf, input int shift);
    longint q;
    if (den == 0) q = 0;
    else begin
      q = (longint'(num < 0 ? -num : num) << qf) / den;
      if (num < 0) q = -q;
    end
    return s8(fdiv2(gamma * q, shift) + beta);
  endfunction

  function automatic int rn_mean(input int sum, input int d);
    return int'(fdiv2(longint'(sum) * ((65536 + d/2) / d), 16));
  endfunction

endpackage
