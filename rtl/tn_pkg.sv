// tn_pkg: shared constants and shape functions of the tensor-network jet taggers.
//
// Both engines work on Q2.FB fixed-point words: W = FB + 2 bits, two's complement,
// two integer bits (sign included) and FB fractional bits.
//
// The functions below give the shape of every tensor of the two models, and the place
// of each tensor in the flat parameter memory of its engine. They reproduce the
// parameter counts of the models exactly (TTN with chi=10: 4460, 10420, 22340 for
// N = 8, 16, 32; MPS with D=10: 6678, 12278, 23478).
//
// TTN (binary tree, L = log2(N) layers, layer 0 is the root that carries the class leg):
//   child dimension of a node in layer l  D_l = min(d^(2^(L-l-1)), chi)
//   parent dimension                      D_(l-1) for l >= 1, and C for the root
//   weight A[a][b][c] of node (l,j) lives at ttn_node_offset(l,j) + (a*D_l + b)*Dp + c
//   nodes are stored layer by layer from the root down, left to right inside a layer.
//
// MPS (chain of N sites, the label site p = N/2 carries the class leg):
//   bond k joins sites k and k+1:   Db_k = min(d^(k+1), d^(N-1-k), D)
//   site k has left dimension Dl (1 at site 0), physical d, right dimension Dr
//   (1 at site N-1) and, at site p, the class dimension C.
//   weight A[l][i][r][c] of site k lives at mps_site_offset(k) + ((l*d + i)*Dr + r)*Ck + c.
package tn_pkg;

  // Physical dimension d of one embedded particle: [1, pT, Erel, dR, pT^2, Erel^2, dR^2].
  localparam int unsigned D_PHYS    = 7;
  // Number of jet classes (g, q, W, Z, t).
  localparam int unsigned N_CLASSES = 5;
  // Integer bits of the fixed-point format, sign included.
  localparam int unsigned INT_BITS  = 2;

  // min(b^e, cap), computed without overflow.
  function automatic int unsigned pow_cap(int unsigned b, int unsigned e, int unsigned cap);
    int unsigned r;
    r = 1;
    for (int unsigned i = 0; i < e; i++) begin
      r = r * b;
      if (r >= cap) return cap;
    end
    return (r < cap) ? r : cap;
  endfunction

  function automatic int unsigned imin(int unsigned a, int unsigned b);
    return (a < b) ? a : b;
  endfunction

  function automatic int unsigned imax(int unsigned a, int unsigned b);
    return (a > b) ? a : b;
  endfunction

  // ---------------------------------------------------------------- TTN shapes
  // Child (input) dimension of the nodes of layer l.
  function automatic int unsigned ttn_child_dim(int unsigned l, int unsigned nl,
                                                int unsigned d, int unsigned chi);
    return pow_cap(d, 1 << (nl - l - 1), chi);
  endfunction

  // Parent (output) dimension of the nodes of layer l.
  function automatic int unsigned ttn_parent_dim(int unsigned l, int unsigned nl, int unsigned d,
                                                 int unsigned chi, int unsigned c);
    return (l == 0) ? c : ttn_child_dim(l - 1, nl, d, chi);
  endfunction

  function automatic int unsigned ttn_node_params(int unsigned l, int unsigned nl, int unsigned d,
                                                  int unsigned chi, int unsigned c);
    int unsigned dc;
    dc = ttn_child_dim(l, nl, d, chi);
    return dc * dc * ttn_parent_dim(l, nl, d, chi, c);
  endfunction

  function automatic int unsigned ttn_node_offset(int unsigned l, int unsigned j, int unsigned nl,
                                                  int unsigned d, int unsigned chi, int unsigned c);
    int unsigned off;
    off = 0;
    for (int unsigned m = 0; m < l; m++) off += (1 << m) * ttn_node_params(m, nl, d, chi, c);
    return off + j * ttn_node_params(l, nl, d, chi, c);
  endfunction

  function automatic int unsigned ttn_num_params(int unsigned nl, int unsigned d,
                                                 int unsigned chi, int unsigned c);
    return ttn_node_offset(nl, 0, nl, d, chi, c);
  endfunction

  // Cycles spent in layer l: the multiplier pipeline plus one adder-tree level per halving.
  function automatic int unsigned ttn_layer_latency(int unsigned l, int unsigned nl, int unsigned d,
                                                    int unsigned chi, int unsigned nreg);
    int unsigned dc;
    dc = ttn_child_dim(l, nl, d, chi);
    return nreg + $clog2(dc * dc);
  endfunction

  // Cycles spent in layers 0 .. lim-1, i.e. from the output of layer lim to the root's output.
  function automatic int unsigned ttn_latency_upto(int unsigned lim, int unsigned nl, int unsigned d,
                                                   int unsigned chi, int unsigned nreg);
    int unsigned t;
    t = 0;
    for (int unsigned l = 0; l < lim; l++) t += ttn_layer_latency(l, nl, d, chi, nreg);
    return t;
  endfunction

  function automatic int unsigned ttn_latency(int unsigned nl, int unsigned d, int unsigned chi,
                                              int unsigned nreg);
    return ttn_latency_upto(nl, nl, d, chi, nreg);
  endfunction

  // ---------------------------------------------------------------- MPS shapes
  function automatic int unsigned mps_bond(int unsigned k, int unsigned n, int unsigned d,
                                           int unsigned dbond);
    return imin(pow_cap(d, k + 1, dbond), pow_cap(d, n - 1 - k, dbond));
  endfunction

  function automatic int unsigned mps_left_dim(int unsigned k, int unsigned n, int unsigned d,
                                               int unsigned dbond);
    return (k == 0) ? 1 : mps_bond(k - 1, n, d, dbond);
  endfunction

  function automatic int unsigned mps_right_dim(int unsigned k, int unsigned n, int unsigned d,
                                                int unsigned dbond);
    return (k == n - 1) ? 1 : mps_bond(k, n, d, dbond);
  endfunction

  function automatic int unsigned mps_class_dim(int unsigned k, int unsigned n, int unsigned c);
    return (k == n / 2) ? c : 1;
  endfunction

  function automatic int unsigned mps_site_params(int unsigned k, int unsigned n, int unsigned d,
                                                  int unsigned dbond, int unsigned c);
    return mps_left_dim(k, n, d, dbond) * d * mps_right_dim(k, n, d, dbond) * mps_class_dim(k, n, c);
  endfunction

  function automatic int unsigned mps_site_offset(int unsigned k, int unsigned n, int unsigned d,
                                                  int unsigned dbond, int unsigned c);
    int unsigned off;
    off = 0;
    for (int unsigned m = 0; m < k; m++) off += mps_site_params(m, n, d, dbond, c);
    return off;
  endfunction

  function automatic int unsigned mps_num_params(int unsigned n, int unsigned d,
                                                 int unsigned dbond, int unsigned c);
    return mps_site_offset(n, n, d, dbond, c);
  endfunction

  // Site contraction, one chain step, and whole-engine latency.
  function automatic int unsigned mps_site_latency(int unsigned d, int unsigned nreg);
    return nreg + $clog2(d);
  endfunction

  function automatic int unsigned mps_step_latency(int unsigned dbond, int unsigned nreg);
    return nreg + $clog2(dbond);
  endfunction

  function automatic int unsigned mps_latency(int unsigned n, int unsigned d, int unsigned dbond,
                                              int unsigned nreg);
    return mps_site_latency(d, nreg) + (n / 2) * mps_step_latency(dbond, nreg);
  endfunction

endpackage
