// ref_pkg: bit-exact reference model of the equalizer arithmetic, used by the
// testbenches.  It is written independently of the RTL: fixed-point helpers
// on C-style int/longint, the PWL tables re-entered in their printed order
// (top row, largest x, first), the Taylor polynomials summed term by term and
// the LUT index found with real arithmetic.  Numbers are 32-bit, 16
// fractional bits; a product is rescaled (arithmetic shift) before adding.
package ref_pkg;

  function automatic int r_fx(real r);
    return $rtoi(r * 65536.0 + ((r >= 0.0) ? 0.5 : -0.5));
  endfunction

  function automatic real r_real(int v);
    return real'(v) / 65536.0;
  endfunction

  function automatic int r_mul(int a, int b);
    longint p;
    p = longint'(a) * longint'(b);
    return int'(p >>> 16);
  endfunction

  // PWL, printed order: row 0 is the top row ("x > a"), the last row is "x <= b".
  // lowb[r] is the lower (open) bound of row r; the last row has none.
  function automatic int r_pwl(bit is_tanh, int nseg, int x, output int row);
    real lowb[$], sl[$], ic[$];
    if (is_tanh) begin
      case (nseg)
        3: begin lowb = '{1.1, -1.1}; sl = '{0.0, 0.90909, 0.0}; ic = '{1.0, 0.0, -1.0}; end
        5: begin lowb = '{1.7, 0.5, -0.5, -1.7}; sl = '{0.0, 0.41666, 1.0, 0.41666, 0.0};
                 ic = '{1.0, 0.29166, 0.0, -0.29166, -1.0}; end
        7: begin lowb = '{1.8, 1.1, 0.4, -0.4, -1.1, -1.8};
                 sl = '{0.0, 0.285, 0.57214, 1.0, 0.57214, 0.285, 0.0};
                 ic = '{1.0, 0.48699, 0.17114, 0.0, -0.17114, -0.48699, -1.0}; end
        default: begin lowb = '{2.2, 1.4, 0.9, 0.3, -0.3, -0.9, -1.4, -2.2};
                 sl = '{0.0, 0.14331, 0.3381, 0.269382, 1.0, 0.269382, 0.3381, 0.14331, 0.0};
                 ic = '{1.0, 0.68417, 0.412, 0.09185, 0.0, -0.09185, -0.412, -0.68417, -1.0}; end
      endcase
    end else begin
      case (nseg)
        3: begin lowb = '{2.2, -2.2}; sl = '{0.0, 0.22727, 0.0}; ic = '{1.0, 0.5, 0.0}; end
        5: begin lowb = '{2.6, 0.8, -0.8, -2.6}; sl = '{0.0, 0.17223, 0.23747, 0.17223, 0.0};
                 ic = '{1.0, 0.55219, 0.5, 0.44781, 0.0}; end
        7: begin lowb = '{3.0, 1.4, 0.8, -0.8, -1.4, -3.0};
                 sl = '{0.0, 0.12363, 0.18701, 0.23747, 0.18701, 0.12363, 0.0};
                 ic = '{1.0, 0.62909, 0.54036, 0.5, 0.45964, 0.37091, 0.0}; end
        default: begin lowb = '{3.4, 2.0, 1.5, 0.8, -0.8, -1.5, -2.0, -3.4};
                 sl = '{0.0, 0.08514, 0.12644, 0.182242, 0.23747, 0.08514, 0.12644, 0.182242, 0.0};
                 ic = '{1.0, 0.71051, 0.62791, 0.09185, 0.5, 0.45585, 0.37209, 0.28949, 0.0}; end
      endcase
    end
    row = nseg - 1;
    for (int r = 0; r < nseg - 1; r++)
      if (x > r_fx(lowb[r])) begin row = r; break; end
    return r_mul(r_fx(sl[row]), x) + r_fx(ic[row]);
  endfunction

  // Taylor polynomial in real arithmetic (used with a tolerance)
  function automatic real r_taylor_real(bit is_tanh, int order, real x);
    real a[5], s, p;
    if (is_tanh) begin
      a = '{1.0, -1.0/3.0, 2.0/15.0, -17.0/315.0, 62.0/2835.0};
      if (x > 1.0) return 1.0;
      if (x < -1.0) return -1.0;
      s = 0.0;
    end else begin
      a = '{0.25, -1.0/48.0, 1.0/480.0, -17.0/80640.0, 31.0/1451520.0};
      if (x > 2.0) return 1.0;
      if (x < -2.0) return 0.0;
      s = 0.5;
    end
    p = x;
    for (int i = 0; 2 * i + 1 <= order; i++) begin
      s += a[i] * p;
      p = p * x * x;
    end
    return s;
  endfunction

  // LUT: nearest of 2^bits levels over [-4, 4]
  function automatic int r_lut(bit is_tanh, int bits, int x, output int idx);
    real step, v, lev;
    int  nl;
    nl   = 1 << bits;
    step = 8.0 / real'(nl - 1);
    v    = (r_real(x) + 4.0) / step;
    idx  = $rtoi($floor(v + 0.5));
    if (idx < 0) idx = 0;
    if (idx > nl - 1) idx = nl - 1;
    lev  = -4.0 + real'(idx) * step;
    return r_fx(is_tanh ? $tanh(lev) : 1.0 / (1.0 + $exp(-lev)));
  endfunction

  // Activation selected by approximation kind: 0 PWL, 1 Taylor, 2 LUT.
  // For Taylor the model mirrors the fixed-point Horner evaluation.
  function automatic int r_act(int approx, bit is_tanh, int nseg, int order, int bits, int x);
    int row, idx, x2, acc, nt;
    int a[5];
    if (approx == 0) return r_pwl(is_tanh, nseg, x, row);
    if (approx == 2) return r_lut(is_tanh, bits, x, idx);
    if (is_tanh) begin
      a = '{r_fx(1.0), r_fx(-1.0/3.0), r_fx(2.0/15.0), r_fx(-17.0/315.0), r_fx(62.0/2835.0)};
      if (x > r_fx(1.0)) return r_fx(1.0);
      if (x < -r_fx(1.0)) return r_fx(-1.0);
    end else begin
      a = '{r_fx(0.25), r_fx(-1.0/48.0), r_fx(1.0/480.0), r_fx(-17.0/80640.0), r_fx(31.0/1451520.0)};
      if (x > r_fx(2.0)) return r_fx(1.0);
      if (x < -r_fx(2.0)) return 0;
    end
    nt  = (order + 1) / 2;
    x2  = r_mul(x, x);
    acc = a[nt-1];
    for (int i = nt - 2; i >= 0; i--) acc = a[i] + r_mul(x2, acc);
    return (is_tanh ? 0 : r_fx(0.5)) + r_mul(x, acc);
  endfunction

  // Counters of activation regions met by the model (PWL only): saturated
  // (top or bottom row of the table) and inside the sloped rows.
  int n_sat_hi = 0, n_sat_lo = 0, n_slope = 0;

  function automatic void r_count(int approx, bit is_tanh, int nseg, int x);
    int row, y;
    if (approx != 0) return;
    y = r_pwl(is_tanh, nseg, x, row);
    if (row == 0) n_sat_hi++;
    else if (row == nseg - 1) n_sat_lo++;
    else n_slope++;
  endfunction

  // One LSTM time step.  w[col][row]: cols 0..nx-1 = W, nx..nx+nh-1 = U,
  // nx+nh = bias; rows gate*nh+j with gates i, f, o, c~.  swap models an
  // equalizer whose coefficient memory holds the tanh set in the sigmoid
  // slot and the sigmoid set in the tanh slot.
  function automatic void r_lstm_step(int nx, int nh, int approx, int nseg, int order, int bits,
                                      const ref int w[][], const ref int x[],
                                      ref int h[], ref int c[], input bit swap = 1'b0);
    int pre[], g[], v[], hn[];
    pre = new[4*nh];  g = new[4*nh];  v = new[nx+nh];  hn = new[nh];
    for (int k = 0; k < nx; k++) v[k] = x[k];
    for (int k = 0; k < nh; k++) v[nx+k] = h[k];
    for (int r = 0; r < 4*nh; r++) begin
      pre[r] = w[nx+nh][r];
      for (int k = 0; k < nx+nh; k++) pre[r] += r_mul(w[k][r], v[k]);
      g[r] = r_act(approx, (r >= 3*nh) ^ swap, nseg, order, bits, pre[r]);
      r_count(approx, (r >= 3*nh) ^ swap, nseg, pre[r]);
    end
    for (int j = 0; j < nh; j++) begin
      c[j]  = r_mul(g[nh+j], c[j]) + r_mul(g[j], g[3*nh+j]);
      hn[j] = r_mul(g[2*nh+j], r_act(approx, !swap, nseg, order, bits, c[j]));
    end
    for (int j = 0; j < nh; j++) h[j] = hn[j];
  endfunction

  // Whole equalizer: forward and backward LSTM over the window, concatenation
  // [forward | backward], then the valid 1-D convolution.  wc[f][k][ch], bc[f].
  function automatic void r_equalize(int nsym, int nx, int nh, int nk, int nf,
                                     int approx, int nseg, int order, int bits,
                                     const ref int wf[][], const ref int wb[][],
                                     const ref int wc[][][], const ref int bc[],
                                     const ref int x[][], ref int y[][], input bit swap = 1'b0);
    int hs[][], xr[], hr[], cr[];
    hs = new[nsym];
    foreach (hs[t]) hs[t] = new[2*nh];
    xr = new[nx]; hr = new[nh]; cr = new[nh];
    for (int d = 0; d < 2; d++) begin
      foreach (hr[j]) begin hr[j] = 0; cr[j] = 0; end
      for (int s = 0; s < nsym; s++) begin
        int t;
        t = (d == 0) ? s : nsym - 1 - s;
        foreach (xr[k]) xr[k] = x[t][k];
        if (d == 0) r_lstm_step(nx, nh, approx, nseg, order, bits, wf, xr, hr, cr, swap);
        else        r_lstm_step(nx, nh, approx, nseg, order, bits, wb, xr, hr, cr, swap);
        foreach (cr[j]) r_count(approx, !swap, nseg, cr[j]);
        for (int j = 0; j < nh; j++) hs[t][d*nh + j] = hr[j];
      end
    end
    y = new[nsym - nk + 1];
    foreach (y[j]) begin
      y[j] = new[nf];
      for (int f = 0; f < nf; f++) begin
        y[j][f] = bc[f];
        for (int k = 0; k < nk; k++)
          for (int ch = 0; ch < 2*nh; ch++) y[j][f] += r_mul(wc[f][k][ch], hs[j+k][ch]);
      end
    end
  endfunction

endpackage
