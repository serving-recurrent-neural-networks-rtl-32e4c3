// tb_ref_pkg: reference arithmetic for the testbenches, written
// independently of the RTL (plain integer and real arithmetic, no RTL
// functions). It mirrors the number formats documented in rnn_pkg:
// int8 weights (Q1.6) and inputs (Q0.7), exact 16-bit products, saturating
// 16-bit pair sums, 32-bit dot products, Q16 element-wise values.
package tb_ref_pkg;

  function automatic longint clamp(input longint v, input longint lo, input longint hi);
    return (v < lo) ? lo : (v > hi) ? hi : v;
  endfunction

  // Floor division by 2^s for signed values, written with '/'.
  function automatic longint fdiv(input longint v, input int s);
    longint d;
    d = longint'(1) << s;
    if (v >= 0) return v / d;
    return -((-v + d - 1) / d);
  endfunction

  // Contribution of one 32-bit word (four int8 pairs) to a PCU dot product.
  function automatic longint word_dot(input int w, input int x);
    longint p [4];
    for (int k = 0; k < 4; k++)
      p[k] = longint'($signed(w[8*k +: 8])) * longint'($signed(x[8*k +: 8]));
    return clamp(p[0] + p[2], -32768, 32767) + clamp(p[1] + p[3], -32768, 32767);
  endfunction

  // Wrap to signed 32 bits.
  function automatic int wrap32(input longint v);
    return int'(v);
  endfunction

  // Piecewise-linear sigmoid in Q16 (same breakpoints as the RTL's unit).
  function automatic longint ref_sigmoid(input longint x);
    longint ax, r;
    ax = (x < 0) ? -x : x;
    if (ax >= 5 * 65536)          r = 65536;
    else if (ax >= 155648)        r = ax / 32 + 55296;
    else if (ax >= 65536)         r = ax / 8 + 40960;
    else                          r = ax / 4 + 32768;
    return (x < 0) ? 65536 - r : r;
  endfunction

  function automatic longint ref_tanh(input longint x);
    longint xc;
    xc = clamp(x, -8 * 65536, 8 * 65536);
    return 2 * ref_sigmoid(2 * xc) - 65536;
  endfunction

  typedef struct {
    longint c;
    longint h;
    int     h8;
  } cell_out_t;

  // One LSTM element from the four Q13 dot products, Q13 biases and Q16 c_prev.
  function automatic cell_out_t ref_cell(input longint dot [4], input longint bias [4],
                                         input longint c_prev);
    longint pre [4];
    longint i, j, f, o, c, tc, h;
    cell_out_t r;
    for (int g = 0; g < 4; g++)
      pre[g] = clamp((dot[g] + bias[g]) * 8, -64'sd2147483648, 64'sd2147483647);
    i = ref_sigmoid(pre[0]);
    j = ref_tanh(pre[1]);
    f = ref_sigmoid(pre[2]);
    o = ref_sigmoid(pre[3]);
    c = clamp(fdiv(f * c_prev + i * j, 16), -64'sd2147483648, 64'sd2147483647);
    tc = ref_tanh(c);
    h = fdiv(o * tc, 16);
    r.c  = c;
    r.h  = h;
    r.h8 = int'(clamp(fdiv(o * tc, 25), -128, 127));
    return r;
  endfunction

endpackage
