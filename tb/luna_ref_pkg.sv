// luna_ref_pkg: reference model used by the LUNA testbenches.
//
// Re-states, independently of the RTL, what the datapath must compute: the
// arithmetic pre-shift / window sum / post-shift of the integrator, and a
// LogicNet evaluated neuron by neuron from the documented stand-in network
// (hash-selected sparse sources, sign-weighted sum, bias, clamped shift).
// The hash constants are part of that documented network definition.
package luna_ref_pkg;

  function automatic bit [31:0] ref_mix(bit [31:0] a);
    bit [31:0] x;
    x = a ^ (a >> 16);
    x = x * 32'h7feb352d;
    x = x ^ (x >> 15);
    x = x * 32'h846ca68b;
    return x ^ (x >> 16);
  endfunction

  function automatic bit [31:0] ref_hash(int unsigned l, int unsigned n, int unsigned s);
    return ref_mix(ref_mix(ref_mix(l + 32'h9e3779b9) ^ n) ^ s);
  endfunction

  function automatic int unsigned ref_src(int unsigned l, int unsigned n, int unsigned j,
                                          int unsigned n_prev, int unsigned fanin);
    int unsigned smax;
    smax = n_prev / fanin;
    if (smax == 0) smax = 1;
    return (ref_hash(l, n, 'hFFFF) % n_prev + j * (1 + ref_hash(l, n, 'hFFFE) % smax)) % n_prev;
  endfunction

  // neuron output from the list of its input values (each 0 .. 2^inbits-1)
  function automatic int unsigned ref_neuron(int unsigned l, int unsigned n, int unsigned fanin,
                                             int unsigned inbits, int unsigned outbits,
                                             int unsigned vals[$]);
    int signed acc, lvl, top, q;
    int unsigned sh, bound, lg;
    bit [31:0] h;
    acc = int'(ref_hash(l, n, 'hFFFD) & 15) - 8;
    top = (1 << inbits) - 1;
    for (int unsigned j = 0; j < fanin; j++) begin
      h   = ref_hash(l, n, j);
      lvl = 2 * int'(vals[j]) - top;
      if (h[1]) lvl = 2 * lvl;
      if (h[0]) acc -= lvl; else acc += lvl;
    end
    bound = fanin * top * 2;
    lg = 0;
    while ((1 << lg) < bound) lg++;
    sh = (lg > outbits) ? lg - outbits : 0;
    // floor division by 2^sh
    q = (acc >= 0) ? acc / (1 << sh) : -((-acc + (1 << sh) - 1) / (1 << sh));
    q += 1 << (outbits - 1);
    if (q < 0) q = 0;
    if (q > (1 << outbits) - 1) q = (1 << outbits) - 1;
    return q;
  endfunction

  // One LogicNet layer on a list of source values.
  function automatic void ref_layer(int unsigned l, int unsigned fanin, int unsigned inbits,
                                    int unsigned outbits, int unsigned n_out,
                                    int unsigned src_vals[$], ref int unsigned out_vals[$]);
    int unsigned vals[$];
    out_vals = {};
    for (int unsigned n = 0; n < n_out; n++) begin
      vals = {};
      for (int unsigned j = 0; j < fanin; j++)
        vals.push_back(src_vals[ref_src(l, n, j, src_vals.size(), fanin)]);
      out_vals.push_back(ref_neuron(l, n, fanin, inbits, outbits, vals));
    end
  endfunction

  // Whole network: feature bits in, final code out.
  function automatic int unsigned ref_net(int unsigned nl, int unsigned width[],
                                          int unsigned fanin[], int unsigned inbits[],
                                          int unsigned outbits, bit feat[]);
    int unsigned cur[$], nxt[$];
    int unsigned ob;
    cur = {};
    foreach (feat[i]) cur.push_back(32'(feat[i]));
    for (int unsigned l = 0; l < nl; l++) begin
      ob = (l + 1 < nl) ? inbits[l+1] : outbits;
      ref_layer(l, fanin[l], inbits[l], ob, width[l], cur, nxt);
      cur = nxt;
    end
    return cur[0];
  endfunction

  // Integrator feature: floor(floor(sum of floor(x / 2^m)) / 2^n)
  function automatic int ref_feature(int samples[$], int unsigned m, int unsigned n);
    int acc;
    acc = 0;
    foreach (samples[i]) acc += (samples[i] >= 0) ? samples[i] / (1 << m)
                                 : -((-samples[i] + (1 << m) - 1) / (1 << m));
    return (acc >= 0) ? acc / (1 << n) : -((-acc + (1 << n) - 1) / (1 << n));
  endfunction

endpackage
