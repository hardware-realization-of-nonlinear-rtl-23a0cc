// eq_ref_pkg: reference arithmetic for the equalizer testbenches.
//
// Plain integer models of the Q3.12 fixed-point operations, written from the
// number format alone (not from the RTL): saturation to 16 bits, product
// rescaling with rounding toward minus infinity, the hard sigmoid and hard
// tanh in closed form, and a table-driven piecewise-linear function.
package eq_ref_pkg;

  localparam int F    = 12;
  localparam int QONE = 1 << F;
  localparam int MAXSEG = 9;

  typedef struct {
    int n;
    int lo    [MAXSEG];
    int slope [MAXSEG];
    int icpt  [MAXSEG];
  } ref_pwl_t;

  function automatic int sat16(input longint v);
    if (v > 32767)  return 32767;
    if (v < -32768) return -32768;
    return int'(v);
  endfunction

  // floor(v / 2^F) for signed v, written without a shift
  function automatic longint floor_div(input longint v);
    longint q;
    q = v / QONE;
    if ((v % QONE) != 0 && v < 0) q = q - 1;
    return q;
  endfunction

  function automatic int clampi(input int v, input int lo, input int hi);
    return (v < lo) ? lo : ((v > hi) ? hi : v);
  endfunction

  // hard tanh: clamp(x, -1, 1)
  function automatic int hard_tanh(input int x);
    return clampi(x, -QONE, QONE);
  endfunction

  // hard sigmoid: clamp(x/4 + 1/2, 0, 1), x/4 rounded down
  function automatic int hard_sig(input int x);
    return clampi(int'(floor_div(longint'(x) * (QONE / 4))) + QONE / 2, 0, QONE);
  endfunction

  // piecewise-linear function given by a table
  function automatic int pwl(input ref_pwl_t t, input int x);
    int s = 0;
    for (int i = t.n - 1; i >= 1; i--) begin
      if (x >= t.lo[i]) begin
        s = i;
        break;
      end
    end
    return sat16(floor_div(longint'(t.slope[s]) * x) + t.icpt[s]);
  endfunction

  function automatic int seg_of(input ref_pwl_t t, input int x);
    int s = 0;
    for (int i = 1; i < t.n; i++) if (x >= t.lo[i]) s = i;
    return s;
  endfunction

  function automatic ref_pwl_t hard_tanh_tab();
    ref_pwl_t t;
    t.n = 3;
    t.lo[0] = -32768; t.slope[0] = 0;    t.icpt[0] = -QONE;
    t.lo[1] = -QONE;  t.slope[1] = QONE; t.icpt[1] = 0;
    t.lo[2] = QONE;   t.slope[2] = 0;    t.icpt[2] = QONE;
    return t;
  endfunction

  function automatic ref_pwl_t hard_sig_tab();
    ref_pwl_t t;
    t.n = 3;
    t.lo[0] = -32768;    t.slope[0] = 0;        t.icpt[0] = 0;
    t.lo[1] = -2 * QONE; t.slope[1] = QONE / 4; t.icpt[1] = QONE / 2;
    t.lo[2] = 2 * QONE;  t.slope[2] = 0;        t.icpt[2] = QONE;
    return t;
  endfunction

  // n-segment chord fit of f on [-xm, xm]: n-2 equal inner chords, the two
  // outer segments hold the end values. is_sig selects sigmoid over tanh.
  function automatic ref_pwl_t chord_tab(input int n, input real xm, input bit is_sig);
    ref_pwl_t t;
    real x0, x1, y0, y1, a, b;
    t.n = n;
    for (int s = 0; s < n; s++) begin
      t.lo[s] = 0; t.slope[s] = 0; t.icpt[s] = 0;
    end
    for (int s = 1; s <= n - 2; s++) begin
      x0 = -xm + 2.0 * xm * (s - 1) / (n - 2);
      x1 = -xm + 2.0 * xm * s / (n - 2);
      y0 = is_sig ? 1.0 / (1.0 + $exp(-x0)) : $tanh(x0);
      y1 = is_sig ? 1.0 / (1.0 + $exp(-x1)) : $tanh(x1);
      a  = (y1 - y0) / (x1 - x0);
      b  = y0 - a * x0;
      t.lo[s]    = int'($floor(x0 * QONE + 0.5));
      t.slope[s] = int'($floor(a * QONE + 0.5));
      t.icpt[s]  = int'($floor(b * QONE + 0.5));
    end
    t.lo[0] = -32768;
    t.icpt[0] = is_sig ? int'($floor(QONE / (1.0 + $exp(xm)) + 0.5))
                       : -int'($floor($tanh(xm) * QONE + 0.5));
    t.lo[n-1] = int'($floor(xm * QONE + 0.5));
    t.icpt[n-1] = is_sig ? int'($floor(QONE / (1.0 + $exp(-xm)) + 0.5))
                         : int'($floor($tanh(xm) * QONE + 0.5));
    return t;
  endfunction

  // LSTM cell reference: pre = {i, f, g, o}
  function automatic void lstm_cell_ref(input int pre[4], input int c,
                                        input ref_pwl_t st, input ref_pwl_t tt,
                                        output int c_new, output int h_new);
    int ig, fg, gg, og;
    ig = pwl(st, pre[0]);
    fg = pwl(st, pre[1]);
    gg = pwl(tt, pre[2]);
    og = pwl(st, pre[3]);
    c_new = sat16(floor_div(longint'(fg) * c + longint'(ig) * gg));
    h_new = sat16(floor_div(longint'(og) * pwl(tt, c_new)));
  endfunction

endpackage
