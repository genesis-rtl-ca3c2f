// tb_ref_pkg: arithmetic reference models used by the Genesis testbenches.
//
// Written from the equations, with plain integer arithmetic (floor division by powers of two,
// explicit clamping) rather than by copying the RTL bit manipulation.
package tb_ref_pkg;
  function automatic longint fdiv(input longint x, input int sh);
    longint p;
    p = longint'(1) <<< sh;
    if (x >= 0) return x / p;
    else        return -((-x + p - 1) / p);
  endfunction

  function automatic int sat(input longint x);
    if (x > 32767)  return 32767;
    if (x < -32768) return -32768;
    return int'(x);
  endfunction

  function automatic longint absl(input longint x);
    return x < 0 ? -x : x;
  endfunction

  // f(w,m) = 1 - |m*w|/2^d in Q.8, clamped to >= 0
  function automatic int ref_f(input int w, input int m, input int d);
    longint t;
    t = fdiv(absl(longint'(m)) * absl(longint'(w)), 8 + d);
    if (t >= 256) return 0;
    return int'(256 - t);
  endfunction

  function automatic int ref_meta(input int w, input int m, input int u, input int d, input int eta);
    longint dw;
    dw = fdiv(longint'(ref_f(w, m, d)) * longint'(u), 8 + eta);
    return sat(longint'(w) - dw);
  endfunction

  function automatic int ref_trace(input int t, input bit s, input int tau, input int inc);
    int r;
    r = t - (t / (1 << tau)) + (s ? inc : 0);
    return r > 255 ? 255 : r;
  endfunction

  // forward LIF step: returns {spike, V', I'}
  function automatic void ref_lif(input int v, input int i, input int acc, input int a, input int b,
                                  input int c, input int vth, input int vrest,
                                  output int v_n, output int i_n, output bit spk);
    i_n = sat(longint'(i) + fdiv(longint'(acc) - i, a));
    v_n = sat(longint'(v) + fdiv(longint'(vrest) - v, b) + fdiv(longint'(i), c));
    spk = (v_n >= vth);
    if (spk) v_n = vrest;
  endfunction

  function automatic int ref_dend(input int u, input int e, input int r, input int ush);
    return sat(longint'(u) + fdiv(fdiv(longint'(e) * r, 8), ush));
  endfunction
endpackage
