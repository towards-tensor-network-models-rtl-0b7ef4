// tn_ref_pkg: bit-exact software reference of the tensor-network engines, for testbenches.
//
// Written independently of the RTL: plain sequential loops on 64-bit integers, tensor
// shapes and memory offsets recomputed here from the model definitions.
//   TTN: layer l (0 = root) has 2^l nodes with child dimension min(d^(2^(L-l-1)), chi)
//        and parent dimension equal to the child dimension of layer l-1 (C at the root);
//        node tensors are stored root first, layer by layer, element (a*Dc + b)*Dp + c.
//   MPS: bond k has dimension min(d^(k+1), d^(N-1-k), D); site k stores element
//        ((l*d + i)*Dr + r)*Ck + c, the label site N/2 having Ck = C.
// Every contraction result is floored to FB fraction bits and clipped to W bits, which is
// the arithmetic the engines implement.
package tn_ref_pkg;

  typedef longint lvec_t[];

  // Uniform random signed value of `bits` bits: [-2^(bits-1), 2^(bits-1) - 1].
  function automatic longint rnd(int bits);
    return longint'($urandom_range((1 << bits) - 1)) - (longint'(1) <<< (bits - 1));
  endfunction

  // floor(x / 2^sh) clipped to a W-bit signed range; sets sat when it clips.
  function automatic longint qclip(longint x, int sh, int w, ref bit sat);
    longint y, mx, mn;
    y  = x >>> sh;
    mx = (longint'(1) <<< (w - 1)) - 1;
    mn = -(longint'(1) <<< (w - 1));
    if (y > mx) begin sat = 1'b1; return mx; end
    if (y < mn) begin sat = 1'b1; return mn; end
    return y;
  endfunction

  function automatic int powcap(int b, int e, int cap);
    longint r;
    r = 1;
    for (int i = 0; i < e; i++) begin
      r = r * b;
      if (r >= longint'(cap)) return cap;
    end
    return int'(r);
  endfunction

  function automatic int ttn_dim(int l, int nl, int d, int chi, int c);
    if (l < 0) return c;
    return powcap(d, 1 << (nl - l - 1), chi);
  endfunction

  function automatic int ttn_params(int n, int d, int chi, int c);
    int nl, tot;
    nl = $clog2(n);
    tot = 0;
    for (int l = 0; l < nl; l++)
      tot += (1 << l) * ttn_dim(l, nl, d, chi, c) * ttn_dim(l, nl, d, chi, c) * ttn_dim(l - 1, nl, d, chi, c);
    return tot;
  endfunction

  // phi is flat [i*d + e]; returns the C scores; clipped accumulates saturation.
  function automatic lvec_t ttn_ref(int n, int d, int chi, int c, int fb, int w,
                                    const ref longint wts[], const ref longint phi[],
                                    ref bit clipped);
    int nl, off, dc, dp, np;
    longint cur[][];
    longint nxt[][];
    longint acc;
    lvec_t res;
    nl = $clog2(n);
    cur = new[n];
    for (int i = 0; i < n; i++) begin
      cur[i] = new[d];
      for (int e = 0; e < d; e++) cur[i][e] = phi[i*d + e];
    end
    for (int l = nl - 1; l >= 0; l--) begin
      dc = ttn_dim(l, nl, d, chi, c);
      dp = ttn_dim(l - 1, nl, d, chi, c);
      np = dc * dc * dp;
      off = 0;
      for (int m = 0; m < l; m++)
        off += (1 << m) * ttn_dim(m, nl, d, chi, c) * ttn_dim(m, nl, d, chi, c) * ttn_dim(m - 1, nl, d, chi, c);
      nxt = new[1 << l];
      for (int j = 0; j < (1 << l); j++) begin
        nxt[j] = new[dp];
        for (int o = 0; o < dp; o++) begin
          acc = 0;
          for (int a = 0; a < dc; a++)
            for (int b = 0; b < dc; b++)
              acc += wts[off + j*np + (a*dc + b)*dp + o] * cur[2*j][a] * cur[2*j+1][b];
          nxt[j][o] = qclip(acc, 2 * fb, w, clipped);
        end
      end
      cur = nxt;
    end
    res = new[c];
    for (int o = 0; o < c; o++) res[o] = cur[0][o];
    return res;
  endfunction

  function automatic int mps_bond(int k, int n, int d, int db);
    int a, b;
    a = powcap(d, k + 1, db);
    b = powcap(d, n - 1 - k, db);
    return (a < b) ? a : b;
  endfunction

  function automatic int mps_params(int n, int d, int db, int c);
    int tot, dl, dr, ck;
    tot = 0;
    for (int k = 0; k < n; k++) begin
      dl = (k == 0) ? 1 : mps_bond(k - 1, n, d, db);
      dr = (k == n - 1) ? 1 : mps_bond(k, n, d, db);
      ck = (k == n / 2) ? c : 1;
      tot += dl * d * dr * ck;
    end
    return tot;
  endfunction

  function automatic lvec_t mps_ref(int n, int d, int db, int c, int fb, int w,
                                    const ref longint wts[], const ref longint phi[],
                                    ref bit clipped);
    int p, off, dl, dr, ck;
    int dls[], drs[], offs[];
    longint site[][];     // site k contracted with its particle, flat (l*Dr + r)*Ck + c
    longint vl[], vr[], tmp[], tp[];
    longint acc;
    lvec_t res;
    p = n / 2;
    site = new[n];
    dls = new[n]; drs = new[n]; offs = new[n];
    off = 0;
    for (int k = 0; k < n; k++) begin
      dl = (k == 0) ? 1 : mps_bond(k - 1, n, d, db);
      dr = (k == n - 1) ? 1 : mps_bond(k, n, d, db);
      ck = (k == p) ? c : 1;
      dls[k] = dl; drs[k] = dr; offs[k] = off;
      site[k] = new[dl * dr * ck];
      for (int l = 0; l < dl; l++)
        for (int r = 0; r < dr; r++)
          for (int o = 0; o < ck; o++) begin
            acc = 0;
            for (int i = 0; i < d; i++)
              acc += wts[off + ((l*d + i)*dr + r)*ck + o] * phi[k*d + i];
            site[k][(l*dr + r)*ck + o] = qclip(acc, fb, w, clipped);
          end
      off += dl * d * dr * ck;
    end
    // left chain
    vl = site[0];
    for (int k = 1; k < p; k++) begin
      tmp = new[drs[k]];
      for (int r = 0; r < drs[k]; r++) begin
        acc = 0;
        for (int l = 0; l < dls[k]; l++) acc += vl[l] * site[k][l*drs[k] + r];
        tmp[r] = qclip(acc, fb, w, clipped);
      end
      vl = tmp;
    end
    // right chain
    vr = site[n-1];
    for (int k = n - 2; k > p; k--) begin
      tmp = new[dls[k]];
      for (int l = 0; l < dls[k]; l++) begin
        acc = 0;
        for (int r = 0; r < drs[k]; r++) acc += site[k][l*drs[k] + r] * vr[r];
        tmp[l] = qclip(acc, fb, w, clipped);
      end
      vr = tmp;
    end
    // absorb the right vector into the label tensor
    tp = new[dls[p] * c];
    for (int l = 0; l < dls[p]; l++)
      for (int o = 0; o < c; o++) begin
        acc = 0;
        for (int r = 0; r < drs[p]; r++) acc += site[p][(l*drs[p] + r)*c + o] * vr[r];
        tp[l*c + o] = qclip(acc, fb, w, clipped);
      end
    // final contraction with the left vector
    res = new[c];
    for (int o = 0; o < c; o++) begin
      acc = 0;
      for (int l = 0; l < dls[p]; l++) acc += vl[l] * tp[l*c + o];
      res[o] = qclip(acc, fb, w, clipped);
    end
    return res;
  endfunction

endpackage
