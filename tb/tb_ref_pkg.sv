// tb_ref_pkg -- reference arithmetic for the testbenches, written apart
// from the RTL package so that a fault in one is not copied by the other.
// Q8.24 values are held in int; products in longint.
package tb_ref_pkg;

  localparam int ONE = 1 << 24;

  function automatic int r_mul(int a, int b);
    longint p;
    p = longint'(a) * longint'(b);
    // floor division by 2^24, then keep the low 32 bits
    if (p < 0) p = -((-p + longint'(ONE) - 1) / longint'(ONE));
    else       p = p / longint'(ONE);
    return int'(p);
  endfunction

  // Piecewise-linear sigmoid, breakpoints 1, 2.375, 5.
  function automatic int r_sig(int x);
    longint a, y;
    a = (x < 0) ? -longint'(x) : longint'(x);
    if (a >= 5 * longint'(ONE))            y = longint'(ONE);
    else if (a * 8 >= 19 * longint'(ONE))  y = a / 32 + longint'(ONE) * 27 / 32;
    else if (a >= longint'(ONE))           y = a / 8 + longint'(ONE) * 5 / 8;
    else                                   y = a / 4 + longint'(ONE) / 2;
    if (x < 0) y = longint'(ONE) - y;
    return int'(y);
  endfunction

  function automatic int r_tanh(int x);
    if (x >= 4 * ONE)  return ONE;
    if (x <= -4 * ONE) return -ONE;
    return 2 * r_sig(2 * x) - ONE;
  endfunction

  // Random Q8.24 value in [-2^(s-1), 2^(s-1)) / 2^24.
  function automatic int r_rand(int s);
    int v;
    v = int'($urandom());
    return v >>> (32 - s);
  endfunction

  // Reference LSTM layer over a whole sequence (fresh state at t = 0).
  // wx[r*(lx+1)+j]: W_x row r = gate*lh+k (gates i,f,g,o), column j, with
  // j = lx the bias b_x; wh likewise with lh+1 columns. x[t*lx+j] is the
  // input, h[t*lh+k] the result.
  function automatic void r_lstm(input int lx, input int lh, input int ts,
                                 input int wx[], input int wh[],
                                 input int x[], output int h[]);
    int c [], hp [], pre [4];
    c  = new[lh];
    hp = new[lh];
    h  = new[ts * lh];
    for (int k = 0; k < lh; k++) begin c[k] = 0; hp[k] = 0; end
    for (int t = 0; t < ts; t++) begin
      for (int k = 0; k < lh; k++) begin
        for (int g = 0; g < 4; g++) begin
          int r;
          r = g * lh + k;
          pre[g] = wx[r * (lx + 1) + lx] + wh[r * (lh + 1) + lh];
          for (int j = 0; j < lx; j++) pre[g] += r_mul(wx[r * (lx + 1) + j], x[t * lx + j]);
          for (int j = 0; j < lh; j++) pre[g] += r_mul(wh[r * (lh + 1) + j], hp[j]);
        end
        c[k] = r_mul(r_sig(pre[1]), c[k]) + r_mul(r_sig(pre[0]), r_tanh(pre[2]));
        h[t * lh + k] = r_mul(r_sig(pre[3]), r_tanh(c[k]));
      end
      for (int k = 0; k < lh; k++) hp[k] = h[t * lh + k];
    end
  endfunction

endpackage
