// tb_rnn_ref_pkg: reference arithmetic and a behavioural model of the whole
// RNN engine, used by the testbenches to compute expected values.
//
// The activation functions are evaluated here in floating point ($exp) and
// quantised with the same rule the lookup tables were built with, so a wrong
// table entry, a wrong binary point or a wrong pipeline shows up as a
// mismatch.  rnn_model holds every parameter and the context memory as flat
// integer arrays and computes one command (acoustic-model frame or LM step)
// exactly as the hardware defines it: saturating 16-bit accumulation in input
// order (bias, x elements, h_{t-1} elements), then the EPU equations.
package tb_rnn_ref_pkg;

  function automatic int sat16(input longint v);
    if (v > 32767)  return 32767;
    if (v < -32768) return -32768;
    return int'(v);
  endfunction

  function automatic int lut_s(input int v);
    int s;
    s = v >>> 6;
    if (s > 127)  s = 127;
    if (s < -128) s = -128;
    return s;
  endfunction

  function automatic int sig_q(input int v);
    real x, r;
    int q;
    x = real'(lut_s(v)) / 16.0;
    r = 256.0 / (1.0 + $exp(-x));
    q = int'($floor(r + 0.5));
    if (q > 255) q = 255;
    return q;
  endfunction

  function automatic int tanh_q(input int v);
    real x, e, r;
    int q;
    x = real'(lut_s(v)) / 16.0;
    e = $exp(2.0 * x);
    r = 128.0 * (e - 1.0) / (e + 1.0);
    q = int'($floor(r + 0.5));
    if (q > 127)  q = 127;
    if (q < -128) q = -128;
    return q;
  endfunction

  // One element of the LSTM EPU.
  function automatic void epu_ref(input int c_prev, input int pi, input int pf, input int po,
                         input int pc, input int wi, input int wf, input int wo,
                         output int h, output int c);
    int ai, af, ao, gi, gf, gg, go, tc;
    ai = sat16(longint'(pi) + ((c_prev * wi) >>> 4));
    af = sat16(longint'(pf) + ((c_prev * wf) >>> 4));
    gi = sig_q(ai);
    gf = sig_q(af);
    gg = tanh_q(pc);
    c  = sat16(longint'((gf * c_prev) >>> 8) + ((gi * gg) >>> 5));
    ao = sat16(longint'(po) + ((c * wo) >>> 4));
    go = sig_q(ao);
    tc = tanh_q(c);
    h  = (go * tc) >>> 9;
  endfunction

  class rnn_model;
    int hid, am_in, lm_in, aml, lml, nctx, amo, lmo, nl, nout, wdepth, cdepth;
    int w0[], w1[];          // [row*hid + k]
    int bias[];              // [(gate*nl + layer)*hid + k], gate 0..3 = i f o c
    int peep[];              // [(layer*hid + k)*3 + {0,1,2}] = wi wf wo
    int ow[];                // [(net*hid + k)*nout + o]
    int ob[];                // [net*nout + o]
    int cc[], ch[];          // context memory
    int sat_events;          // accumulations that hit a saturation limit

    function new(int hid_, int am_in_, int lm_in_, int aml_, int lml_, int nctx_,
                 int amo_, int lmo_);
      hid = hid_; am_in = am_in_; lm_in = lm_in_; aml = aml_; lml = lml_;
      nctx = nctx_; amo = amo_; lmo = lmo_;
      nl = aml + lml;
      nout = (amo > lmo) ? amo : lmo;
      wdepth = 0;
      for (int g = 0; g < nl; g++) wdepth += 2 * (n_in(g) + hid);
      cdepth = hid * (aml + nctx * lml);
      w0 = new[wdepth * hid];
      w1 = new[wdepth * hid];
      bias = new[4 * nl * hid];
      peep = new[nl * hid * 3];
      ow = new[2 * hid * nout];
      ob = new[2 * nout];
      cc = new[cdepth];
      ch = new[cdepth];
      sat_events = 0;
    endfunction

    function int n_in(int g);
      if (g == 0) return am_in;
      if (g == aml) return lm_in;
      return hid;
    endfunction

    function int wbase(int g);
      int b;
      b = 0;
      for (int i = 0; i < g; i++) b += 2 * (n_in(i) + hid);
      return b;
    endfunction

    function int caddr(bit net, int slot, int l, int e);
      if (!net) return l * hid + e;
      return aml * hid + (slot * lml + l) * hid + e;
    endfunction

    function int acc(int a, int x, int w);
      longint s;
      s = longint'(a) + longint'(x * w);
      if (s > 32767 || s < -32768) sat_events++;
      return sat16(s);
    endfunction

    // One command; y receives the output layer.
    function void step(bit net, int src, int dst, int x[], output int y[]);
      int g0, nlay, n, wb, g, row, a0, a1, h, c, base, ni, no;
      int inp[];
      int pe_i[], pe_f[], pe_o[], pe_c[];
      g0   = net ? aml : 0;
      nlay = net ? lml : aml;
      pe_i = new[hid]; pe_f = new[hid]; pe_o = new[hid]; pe_c = new[hid];
      for (int l = 0; l < nlay; l++) begin
        g  = g0 + l;
        n  = n_in(g);
        wb = wbase(g);
        inp = new[n + hid];
        for (int j = 0; j < n; j++)
          inp[j] = (l == 0) ? x[j] : ch[caddr(net, dst, l - 1, j)];
        for (int j = 0; j < hid; j++)
          inp[n + j] = ch[caddr(net, src, l, j)];
        for (int p = 0; p < 2; p++)
          for (int k = 0; k < hid; k++) begin
            a0 = bias[((p ? 2 : 0) * nl + g) * hid + k];
            a1 = bias[((p ? 3 : 1) * nl + g) * hid + k];
            for (int j = 0; j < n + hid; j++) begin
              row = wb + p * (n + hid) + j;
              a0 = acc(a0, inp[j], w0[row * hid + k]);
              a1 = acc(a1, inp[j], w1[row * hid + k]);
            end
            if (p == 0) begin pe_i[k] = a0; pe_f[k] = a1; end
            else        begin pe_o[k] = a0; pe_c[k] = a1; end
          end
        for (int k = 0; k < hid; k++) begin
          base = (g * hid + k) * 3;
          epu_ref(cc[caddr(net, src, l, k)], pe_i[k], pe_f[k], pe_o[k], pe_c[k],
                  peep[base], peep[base + 1], peep[base + 2], h, c);
          cc[caddr(net, dst, l, k)] = c;
          ch[caddr(net, dst, l, k)] = h;
        end
      end
      ni = net ? 1 : 0;
      no = net ? lmo : amo;
      y = new[no];
      for (int o = 0; o < no; o++) begin
        a0 = ob[ni * nout + o];
        for (int k = 0; k < hid; k++) begin
          c  = ch[caddr(net, dst, nlay - 1, k)];
          a0 = acc(a0, c, ow[(ni * hid + k) * nout + o]);
        end
        y[o] = a0;
      end
    endfunction
  endclass

endpackage
