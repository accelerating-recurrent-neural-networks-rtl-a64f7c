// tb_ref_pkg: bit-exact reference arithmetic for the LSTM autoencoder
// testbenches, written independently of the RTL.
//
// Numbers are plain ints: 16-bit values in Q6.10, 32-bit values in Q12.20.
// 32-bit sums wrap (SystemVerilog int arithmetic), products are truncated by
// arithmetic shift and narrowing to 16 bits saturates. The sigmoid table and
// the tanh breakpoints are recomputed here from $exp and $tanh rather than
// read from the RTL:
//   sigmoid: entry k = round(1024 / (1 + exp(-(k-512)/64))), index
//            clamp(x >>> 14, -512, 511) + 512
//   tanh:    linear interpolation between round(1024*tanh(k/2)), k = 0..8,
//            on |x| < 4, 1023 beyond, odd symmetry.
// lstm_ref runs a whole LSTM layer over a sequence; weights are flat
// row-major arrays with rows ordered i, f, g, o.
package tb_ref_pkg;

  function automatic int sat16(longint v);
    if (v > 32767)  return 32767;
    if (v < -32768) return -32768;
    return int'(v);
  endfunction

  function automatic int sig_ref(int x);
    int s;
    s = x >>> 14;
    if (s > 511)  s = 511;
    if (s < -512) s = -512;
    return int'($floor(1024.0 / (1.0 + $exp(-real'(s) / 64.0)) + 0.5));
  endfunction

  function automatic int tanh_pt(int k);
    return int'($floor(1024.0 * $tanh(real'(k) / 2.0) + 0.5));
  endfunction

  function automatic int tanh_ref(int x);
    longint m;
    int seg, pos, lo, hi, y;
    m = (x < 0) ? -longint'(x) : longint'(x);
    if (m >= (longint'(4) << 20)) y = tanh_pt(8);
    else begin
      seg = int'(m >> 19);
      pos = int'((m >> 9) & 1023);
      lo  = tanh_pt(seg);
      hi  = tanh_pt(seg + 1);
      y   = lo + (((hi - lo) * pos) >> 10);
    end
    return (x < 0) ? -y : y;
  endfunction

  // one LSTM cell step for lane j given the four pre-activations
  function automatic void cell_ref(int pi, int pf, int pg, int po, int c_prev,
                                   output int c_new, output int h);
    int i, f, g, o, fc, ig;
    i  = sig_ref(pi);
    f  = sig_ref(pf);
    g  = tanh_ref(pg);
    o  = sig_ref(po);
    fc = int'((longint'(f) * longint'(c_prev)) >>> 10);
    ig = i * g;
    c_new = fc + ig;
    h = sat16((longint'(o) * longint'(tanh_ref(c_new))) >>> 10);
  endfunction

  // full layer: xs is ts*lx inputs, hs returns ts*lh hidden vectors
  function automatic void lstm_ref(int lx, int lh, int ts, input int wx[], input int wh[],
                                   input int b[], input int xs[], output int hs[]);
    int hprev[], c[], hn[], pre[];
    hprev = new[lh];
    c     = new[lh];
    hn    = new[lh];
    pre   = new[4 * lh];
    hs    = new[ts * lh];
    foreach (hprev[j]) begin hprev[j] = 0; c[j] = 0; end
    for (int t = 0; t < ts; t++) begin
      for (int r = 0; r < 4 * lh; r++) begin
        pre[r] = b[r];
        for (int k = 0; k < lx; k++) pre[r] += wx[r * lx + k] * xs[t * lx + k];
        for (int k = 0; k < lh; k++) pre[r] += wh[r * lh + k] * hprev[k];
      end
      for (int j = 0; j < lh; j++) begin
        int cn, hh;
        cell_ref(pre[j], pre[lh + j], pre[2 * lh + j], pre[3 * lh + j], c[j], cn, hh);
        c[j]  = cn;
        hn[j] = hh;
      end
      for (int j = 0; j < lh; j++) begin
        hprev[j] = hn[j];
        hs[t * lh + j] = hn[j];
      end
    end
  endfunction

  // dense layer on one vector, saturated to Q6.10
  function automatic int dense_ref(int nin, int o, input int w[], input int b[], input int v[], int base);
    int acc;
    acc = b[o];
    for (int k = 0; k < nin; k++) acc += w[o * nin + k] * v[base + k];
    return sat16(longint'(acc) >>> 10);
  endfunction

endpackage
