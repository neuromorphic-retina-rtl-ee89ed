// retina_ref_pkg: frame-at-a-time reference model of the digital retina for
// the testbenches.
//
// Each function processes one whole frame (a flat W*H array in raster order)
// and the per-pixel state arrays it is given, following the model equations
// directly: zero-padded 2-D convolution, first-order IIR low-pass and
// high-pass, bipolar contrast gain control, ganglion nonlinearity and LIF
// neuron. Numbers are integers scaled by 2^10, with the hardware's rounding
// (products truncated to 10 fractional bits) and 19-bit saturation, so the
// hardware must match it bit for bit. It is written without the streaming
// machinery (line buffers, prefetching frame memories, lagging write-back)
// that the hardware needs, so it checks that machinery too.
package retina_ref_pkg;
  import retina_pkg::retina_cfg_t;

  typedef longint frame_t [];

  function automatic longint sat(longint v);
    if (v > 262143)  return 262143;
    if (v < -262144) return -262144;
    return v;
  endfunction

  function automatic longint mulw(longint a, longint b);
    return (a * b) >>> 10;
  endfunction

  // zero-padded N x N convolution; kern row-major, kern[0] top-left
  function automatic frame_t conv(frame_t x, int w, int h, int n, longint kern []);
    frame_t y = new [w*h];
    int p = n / 2;
    for (int r = 0; r < h; r++)
      for (int c = 0; c < w; c++) begin
        longint s = 0;
        for (int dy = 0; dy < n; dy++)
          for (int dx = 0; dx < n; dx++) begin
            int rr = r - p + dy, cc = c - p + dx;
            if (rr >= 0 && rr < h && cc >= 0 && cc < w)
              s += kern[dy*n + dx] * x[rr*w + cc];
          end
        y[r*w + c] = sat(s >>> 10);
      end
    return y;
  endfunction

  function automatic frame_t lpf(frame_t x, ref frame_t st, input longint a, input longint b);
    frame_t y = new [x.size()];
    foreach (x[i]) begin
      y[i]  = sat(mulw(b, x[i]) - mulw(a, st[i]));
      st[i] = y[i];
    end
    return y;
  endfunction

  function automatic frame_t hpf(frame_t x, ref frame_t st, input longint a, input longint b);
    frame_t y = new [x.size()];
    foreach (x[i]) begin
      longint z = sat(mulw(b, x[i]) - mulw(a, st[i]));
      st[i] = z;
      y[i]  = sat(x[i] - z);
    end
    return y;
  endfunction

  function automatic longint exp_neg(longint x);
    longint k, f, f2, f3, f4, s, ek;
    longint tbl [8] = '{1024, 377, 139, 51, 19, 7, 3, 1};
    if (x <= 0) return 1024;
    k  = x >>> 10;
    f  = x % 1024;
    f2 = (f * f) >>> 10;
    f3 = (f2 * f) >>> 10;
    f4 = (f3 * f) >>> 10;
    s  = 1024 - f + (f2 >>> 1) - f3 / 6 + f4 / 24;
    ek = (k < 8) ? tbl[k] : 0;
    return sat((ek * s) >>> 10);
  endfunction

  function automatic frame_t kern_of(retina_cfg_t cfg, int which);
    frame_t k;
    if (which == 1) begin
      k = new [9];
      foreach (k[i]) k[i] = longint'(cfg.k1[i]);
    end else begin
      k = new [25];
      foreach (k[i]) k[i] = (which == 2) ? longint'(cfg.k2[i]) : longint'(cfg.k3[i]);
    end
    return k;
  endfunction

  // OPL layer: returns I_OPL; c_out / s_out return the centre and surround
  typedef struct {
    frame_t lc, hc, ls;     // E_tauC, T_w,tau, E_tauS states
  } opl_state_t;

  function automatic frame_t opl(frame_t lum, int w, int h, retina_cfg_t cfg,
                                 ref opl_state_t st, output frame_t c_out, output frame_t s_out);
    frame_t gc, e, c, gs, s, y;
    gc = conv(lum, w, h, 3, kern_of(cfg, 1));
    e  = lpf(gc, st.lc, cfg.a1, cfg.b1);
    c  = hpf(e, st.hc, cfg.a2, cfg.b2);
    gs = conv(c, w, h, 5, kern_of(cfg, 2));
    s  = lpf(gs, st.ls, cfg.a3, cfg.b3);
    y  = new [w*h];
    foreach (y[i]) y[i] = sat(mulw(cfg.lambda_opl, sat(c[i] - sat(mulw(cfg.omega_opl, s[i])))));
    c_out = c;
    s_out = s;
    return y;
  endfunction

  // bipolar contrast gain control; v and ea are the per-pixel states
  function automatic frame_t bipolar(frame_t iopl, int w, int h, retina_cfg_t cfg,
                                     ref frame_t v, ref frame_t ea);
    frame_t vout = new [w*h];
    frame_t raw  = new [w*h];
    foreach (iopl[i]) begin
      longint ga, att, einf;
      ga      = sat(cfg.g0_a + ea[i]);
      att     = exp_neg(sat(mulw(cfg.step, ga)));
      einf    = sat(mulw(cfg.input_amp, iopl[i]));
      vout[i] = sat(sat(mulw(sat(v[i] - einf), att)) + einf);
      raw[i]  = sat(mulw(sat(mulw(v[i], v[i])), cfg.b4) - mulw(ea[i], cfg.a4));
    end
    ea = conv(raw, w, h, 5, kern_of(cfg, 3));
    v  = vout;
    return vout;
  endfunction

  function automatic longint gang_n(longint x, retina_cfg_t cfg);
    longint d, lin, den;
    d   = sat(x - cfg.v0_g);
    lin = mulw(cfg.lambda_g, d);
    den = longint'(cfg.i0_g) - lin;
    if (x > cfg.v0_g) return sat(cfg.i0_g + lin);
    if (den <= 0)     return 0;
    return sat((longint'(cfg.i0_g) * cfg.i0_g) / den);
  endfunction

  function automatic frame_t ganglion(frame_t vbip, retina_cfg_t cfg, ref frame_t st);
    frame_t h = hpf(vbip, st, cfg.a5, cfg.b5);
    frame_t y = new [vbip.size()];
    foreach (h[i]) y[i] = gang_n(cfg.xi_on ? h[i] : sat(-h[i]), cfg);
    return y;
  endfunction

  function automatic frame_t lif(frame_t ig, retina_cfg_t cfg, ref frame_t vm, ref frame_t rt);
    frame_t spk = new [ig.size()];
    foreach (ig[i]) begin
      longint v, r;
      v = sat(vm[i] + sat(mulw(sat(ig[i] - sat(mulw(cfg.g_l, vm[i]))), cfg.tau)));
      r = (rt[i] > 0) ? rt[i] - 1 : 0;
      if (r >= 1) v = 0;
      spk[i] = (v > cfg.v_th);
      if (spk[i] != 0) begin
        v = 0;
        r = cfg.refr;
      end
      vm[i] = v;
      rt[i] = r;
    end
    return spk;
  endfunction

  function automatic frame_t zeros(int n);
    frame_t z = new [n];
    foreach (z[i]) z[i] = 0;
    return z;
  endfunction

endpackage
