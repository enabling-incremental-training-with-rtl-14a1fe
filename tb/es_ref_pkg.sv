// es_ref_pkg: behavioural reference of the ES incremental-training layer,
// used by the end-to-end testbenches. Written from the algorithm, in plain
// integer arithmetic, without reusing any of the RTL:
//   theta_j = sat12(w_j + floor(eps_b / 2^sigma_shift))  for weights in the group
//   yhat_o  = min(15, floor(max(0, sum_i x_i * theta[o][i]) / 256))
//   L       = sum over images and outputs of |yhat - y|
//   F       = -(2^floor(log2 L)), or 0 when L = 0
//   acc_b   = sat32(acc_b + eps_b * F)
//   w_j     = sat12(w_j + floor(acc_b / 2^grad_shift))   at the end of a group
// The training set is generated from the image index: inputs by a hash of
// the index, labels by a fixed "true" 2-input layer, so that the data can be
// produced on the fly by the data-source model and by the reference alike.
package es_ref_pkg;

  function automatic longint sat(input longint v, input int bits);
    longint hi, lo;
    hi = (longint'(1) << (bits - 1)) - 1;
    lo = -(longint'(1) << (bits - 1));
    if (v > hi) return hi;
    if (v < lo) return lo;
    return v;
  endfunction

  function automatic longint floor_shift(input longint v, input int s);
    longint d;
    d = longint'(1) << s;
    if (v >= 0) return v / d;
    return -((-v + d - 1) / d);
  endfunction

  function automatic int img_x(input int idx, input int i);
    int unsigned h;
    h = idx * 32'd2654435761 + i * 32'd40503 + 32'd12345;
    h = h ^ (h >> 13);
    return int'(h % 16);
  endfunction

  // "true" layer that produced the labels (weights in 1/256 units)
  function automatic int true_w(input int o, input int i);
    int tw [2][2] = '{'{256, 128}, '{64, 320}};
    return tw[o % 2][i % 2];
  endfunction

  function automatic int layer_out(input int s);
    if (s < 0) return 0;
    s = s / 256;
    return (s > 15) ? 15 : s;
  endfunction

  function automatic int img_y(input int idx, input int o, input int n_in);
    int s;
    s = 0;
    for (int i = 0; i < n_in; i++) s += img_x(idx, i) * true_w(o, i);
    return layer_out(s);
  endfunction

  function automatic logic [7:0] lfsr_next(input logic [7:0] s);
    return {s[6:0], ^(s & 8'hB8)};
  endfunction

  function automatic longint fitness(input longint l);
    longint p;
    if (l == 0) return 0;
    p = 1;
    while (p * 2 <= l) p = p * 2;
    return -p;
  endfunction

endpackage
