// tb_ttn_ref_pkg: reference arithmetic for the TTN testbenches, written independently
// of the RTL from the defining equation z_i = sum_j sum_k x_j y_k V_ijk.
//
// Numbers are plain ints holding signed fixed-point values with `frac` fractional bits
// and `dw` total bits. Each two-factor product is rescaled by an arithmetic shift right
// by `frac` and saturated to dw bits (the hardware multiplier's rule); the products of
// one output are then summed exactly and the sum saturated to dw bits. Weight order of a
// node: (i*din + j)*din + k. Tree order: layer 1 first, node n of layer l contracts the
// vectors 2n (x) and 2n+1 (y) of layer l-1.
package tb_ttn_ref_pkg;

  function automatic int sat(input longint v, input int dw);
    longint mx, mn;
    mx = (longint'(1) << (dw - 1)) - 1;
    mn = -(longint'(1) << (dw - 1));
    if (v > mx) return int'(mx);
    if (v < mn) return int'(mn);
    return int'(v);
  endfunction

  function automatic int fmul(input int a, input int b, input int frac, input int dw);
    longint p;
    p = longint'(a) * longint'(b);
    return sat(p >>> frac, dw);
  endfunction

  // One node: x, y of length din, w of length dout*din*din, result of length dout.
  function automatic void node(input int din, input int dout, input int x[], input int y[],
                               input int w[], input int frac, input int dw, ref int z[]);
    z = new[dout];
    for (int i = 0; i < dout; i++) begin
      longint s;
      s = 0;
      for (int j = 0; j < din; j++)
        for (int k = 0; k < din; k++)
          s += longint'(fmul(fmul(x[j], y[k], frac, dw), w[(i*din + j)*din + k], frac, dw));
      z[i] = sat(s, dw);
    end
  endfunction

  // Whole tree. chi = [D, chi_1, ..., O]; feat[f*D + d]; w flat as described above.
  function automatic void tree(input int chi[], input int feat[], input int w[],
                               input int frac, input int dw, ref int pred[]);
    int nl, n, off;
    int cur[][];
    nl  = chi.size() - 1;
    n   = 1 << nl;
    cur = new[n];
    for (int f = 0; f < n; f++) begin
      cur[f] = new[chi[0]];
      for (int d = 0; d < chi[0]; d++) cur[f][d] = feat[f*chi[0] + d];
    end
    off = 0;
    for (int l = 1; l <= nl; l++) begin
      int nn, nwn;
      int nxt[][];
      nn  = n >> l;
      nwn = chi[l] * chi[l-1] * chi[l-1];
      nxt = new[nn];
      for (int q = 0; q < nn; q++) begin
        int wv[];
        int zv[];
        wv = new[nwn];
        for (int t = 0; t < nwn; t++) wv[t] = w[off + q*nwn + t];
        node(chi[l-1], chi[l], cur[2*q], cur[2*q+1], wv, frac, dw, zv);
        nxt[q] = zv;
      end
      off += nn * nwn;
      cur = nxt;
    end
    pred = cur[0];
  endfunction

  // Random fixed-point value in [-range/2^frac, range/2^frac].
  function automatic int rnd(input int range);
    return int'($urandom_range(2*range)) - range;
  endfunction

endpackage
