// lstm_ref_pkg: reference arithmetic for the testbenches.
//
// Integer models of the Q8.8 datapath, written independently of the RTL:
// Q16.16 -> Q8.8 conversion (floor shift by 8, clip to 16 bits), 32-bit
// wrap-around accumulation, the piecewise-linear non-linearity, and the
// generation of 13-segment tanh and sigmoid tables. A table covers
// [-L, L] (L = 3 for tanh, 6 for sigmoid) with 11 chords of equal width and
// puts a constant line on each side; the last limit is 0x7FFF so that every
// input is caught.
package lstm_ref_pkg;

  localparam int NS = 13;

  typedef struct {
    int a   [NS];
    int b   [NS];
    int lim [NS];
  } tab_t;

  function automatic int q_sat(longint v);
    longint s;
    s = v >>> 8;
    if (s > 32767)  return 32767;
    if (s < -32768) return -32768;
    return int'(s);
  endfunction

  function automatic bit q_clips(longint v);
    longint s;
    s = v >>> 8;
    return (s > 32767) || (s < -32768);
  endfunction

  function automatic int to_q(real r);
    real s;
    s = r * 256.0;
    if (s >= 32767.0)  return 32767;
    if (s <= -32768.0) return -32768;
    return (s >= 0.0) ? int'($floor(s + 0.5)) : -int'($floor(-s + 0.5));
  endfunction

  function automatic real from_q(int q);
    return real'(q) / 256.0;
  endfunction

  function automatic real fn(bit is_tanh, real x);
    if (is_tanh) return $tanh(x);
    return 1.0 / (1.0 + $exp(-x));
  endfunction

  function automatic tab_t make_tab(bit is_tanh);
    tab_t t;
    real  L, w, x0, x1, a, b;
    L = is_tanh ? 3.0 : 6.0;
    w = 2.0 * L / 11.0;
    t.a[0] = 0;  t.b[0] = to_q(fn(is_tanh, -L));  t.lim[0] = to_q(-L);
    for (int k = 1; k <= 11; k++) begin
      x0 = -L + (k - 1) * w;
      x1 = -L + k * w;
      a  = (fn(is_tanh, x1) - fn(is_tanh, x0)) / w;
      b  = fn(is_tanh, x0) - a * x0;
      t.a[k]   = to_q(a);
      t.b[k]   = to_q(b);
      t.lim[k] = to_q(x1);
    end
    t.a[12] = 0;  t.b[12] = to_q(fn(is_tanh, L));  t.lim[12] = 32767;
    return t;
  endfunction

  // first segment whose limit is not below x; 0 if none
  function automatic int nl_eval(tab_t t, int x);
    for (int s = 0; s < NS; s++)
      if (x <= t.lim[s])
        return q_sat(longint'(t.a[s]) * longint'(x) + longint'(t.b[s]) * 256);
    return 0;
  endfunction

  function automatic int nl_segment(tab_t t, int x);
    for (int s = 0; s < NS; s++)
      if (x <= t.lim[s]) return s;
    return NS;
  endfunction

  // random Q8.8 value in [-m, m]
  function automatic int rnd_q(int m);
    return int'($urandom_range(2 * m)) - m;
  endfunction

  function automatic int sext16(logic [15:0] v);
    return int'(signed'(v));
  endfunction

endpackage
