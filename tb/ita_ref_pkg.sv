// ita_ref_pkg: behavioural reference arithmetic for the ITA testbenches.
//
// Written independently of the RTL with plain integers: requantisation,
// i-GeLU, the base-2 ITAMax with its incremental maximum/denominator update,
// and a full tile reference for the engine.
package ita_ref_pkg;

  function automatic int ref_requant(input longint x, input int mult, input int shift);
    longint p;
    p = x * mult;
    if (shift > 0) p = (p + (64'sd1 <<< (shift - 1))) >>> shift;
    if (p > 127) return 127;
    if (p < -128) return -128;
    return int'(p);
  endfunction

  function automatic int ref_gelu(input int q, input int b, input int c, input int one,
                                  input int mult, input int shift);
    int a, t, l;
    a = (q < 0) ? -q : q;
    t = ((a < -b) ? a : -b) + b;
    l = c - t * t;
    if (q < 0) l = -l;
    return ref_requant(longint'(q) * longint'(l + one), mult, shift);
  endfunction

  function automatic int ref_act(input int q, input int mode, input int b, input int c,
                                 input int one, input int mult, input int shift);
    if (mode == 1) return (q < 0) ? 0 : q;
    if (mode == 2) return ref_gelu(q, b, c, one, mult, shift);
    return q;
  endfunction

  // ITAMax reference, one row at a time.
  function automatic int oct(input int mx, input int x);
    return (mx - x < 0) ? 0 : (mx - x) / 32;
  endfunction

  class itamax_row;
    int mx;
    int sum;
    bit seen;
    function new();
      seen = 0; mx = -128; sum = 0;
    endfunction
    // add N values of one cycle
    function void add(input int v[]);
      int lm, nm, s;
      lm = v[0];
      foreach (v[j]) if (v[j] > lm) lm = v[j];
      nm = (seen && mx > lm) ? mx : lm;
      s = seen ? (sum >> oct(nm, mx)) : 0;
      foreach (v[j]) s += (512 >> oct(nm, v[j]));
      if (s > 524287) s = 524287;
      sum = s; mx = nm; seen = 1;
    endfunction
    function void invert();
      int q;
      q = (sum == 0) ? 524287 : (1 << 24) / sum;
      sum = (q > 524287) ? 524287 : q;
    endfunction
    function int norm(input int x);
      int v;
      v = (sum >> oct(mx, x)) >> 8;
      return (v > 127) ? 127 : v;
    endfunction
  endclass

endpackage
