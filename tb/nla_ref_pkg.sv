// nla_ref_pkg: software reference model of a NeuraLUT-Assemble network,
// used by the testbenches to work out expected outputs.
//
// It is written independently of the RTL package: the network tables are
// kept as plain arrays, the L-LUT content is recomputed from its defining
// formula (hash-weighted sum of the input codes, rescaled onto the output
// range) and a whole inference is run layer by layer on integer arrays,
// without any notion of buses, bit slices or pipeline registers.
//
// Configuration indices: 0 MNIST, 1 JSC CERNBox, 2 JSC OpenML, 3 NID
// (the same order as nla_pkg::net_e).
package nla_ref_pkg;

  typedef int unsigned uint_q_t[$];

  // ---- network tables (Table II of the paper, bit widths read as
  // [input, hidden, output]) -------------------------------------------
  function automatic int unsigned ref_layers(int net);
    int unsigned n [4] = '{6, 7, 7, 5};
    return n[net];
  endfunction

  function automatic int unsigned ref_inputs(int net);
    int unsigned n [4] = '{784, 16, 16, 593};
    return n[net];
  endfunction

  function automatic int unsigned ref_width(int net, int unsigned l);
    int unsigned m [6] = '{2160, 360, 2160, 360, 60, 10};
    int unsigned j [7] = '{320, 160, 80, 40, 20, 10, 5};
    int unsigned d [5] = '{60, 20, 9, 3, 1};
    if (net == 0) return m[l];
    if (net == 3) return d[l];
    return j[l];
  endfunction

  function automatic int unsigned ref_fanin(int net, int unsigned l);
    int unsigned d [5] = '{6, 3, 3, 3, 3};
    if (net == 0) return 6;
    if (net == 3) return d[l];
    return (l == 0) ? 1 : 2;
  endfunction

  function automatic bit ref_assemble(int net, int unsigned l);
    bit m [6] = '{0, 1, 0, 1, 1, 1};
    bit d [5] = '{0, 1, 0, 1, 1};
    if (net == 0) return m[l];
    if (net == 3) return d[l];
    return l != 0;
  endfunction

  // beta as [input, hidden, output]
  function automatic int unsigned ref_bw(int net, int which);
    int unsigned t [4][3] = '{'{1, 1, 6}, '{8, 4, 8}, '{6, 3, 8}, '{1, 2, 2}};
    return t[net][which];
  endfunction

  function automatic int unsigned ref_in_bw(int net, int unsigned l);
    return (l == 0) ? ref_bw(net, 0) : ref_bw(net, 1);
  endfunction

  function automatic int unsigned ref_out_bw(int net, int unsigned l);
    return (l == ref_layers(net) - 1) ? ref_bw(net, 2) : ref_bw(net, 1);
  endfunction

  function automatic int unsigned ref_prev_n(int net, int unsigned l);
    return (l == 0) ? ref_inputs(net) : ref_width(net, l - 1);
  endfunction

  // ---- generators -------------------------------------------------------
  function automatic int unsigned ref_mix(int unsigned v);
    longint unsigned x = v;
    x = x ^ (x >> 16);
    x = (x * 64'h7feb352d) & 64'hffff_ffff;
    x = x ^ (x >> 15);
    x = (x * 64'h846ca68b) & 64'hffff_ffff;
    x = x ^ (x >> 16);
    return 32'(x);
  endfunction

  function automatic int unsigned ref_hash(int unsigned a, int unsigned b, int unsigned c);
    return ref_mix(ref_mix(ref_mix(a) ^ b) ^ c);
  endfunction

  function automatic int unsigned ref_map(int unsigned seed, int unsigned layer,
                                          int unsigned j, int unsigned k,
                                          int unsigned in_n, int unsigned f);
    int unsigned h = ref_hash(seed, 4096 + layer, j);
    int unsigned smax = (f > 1) ? (in_n - 1) / (f - 1) : 1;
    int unsigned step = (smax == 0) ? 1 : (ref_mix(h) % smax) + 1;
    return 32'((longint'(h % in_n) + longint'(k) * step) % in_n);
  endfunction

  function automatic int unsigned ref_entry(int unsigned seed, int unsigned layer,
                                            int unsigned idx, int unsigned f,
                                            int unsigned in_bw, int unsigned out_bw,
                                            int unsigned addr);
    int unsigned h = ref_hash(seed, 8192 + layer, idx);
    int xmax = (1 << in_bw) - 1;
    int s = 0, lo = 0, hi = 0;
    for (int unsigned k = 0; k < f; k++) begin
      int w = int'((ref_mix(h + k) / 256) % 8) - 3;
      int x = int'((addr >> (k * in_bw)) % (1 << in_bw));
      if (w == 0) w = 1;
      s += w * x;
      if (w > 0) hi += w * xmax; else lo += w * xmax;
    end
    return 32'(((s - lo) * (1 << out_bw)) / (hi - lo + 1));
  endfunction

  // One L-LUT evaluated on its F input values.
  function automatic int unsigned ref_llut(int unsigned seed, int unsigned layer,
                                           int unsigned idx, int unsigned f,
                                           int unsigned in_bw, int unsigned out_bw,
                                           uint_q_t vals);
    int unsigned a = 0;
    for (int k = 0; k < f; k++) a += vals[k] << (k * in_bw);
    return ref_entry(seed, layer, idx, f, in_bw, out_bw, a);
  endfunction

  // One layer on integer values.
  function automatic uint_q_t ref_layer(int net, int unsigned seed, int unsigned l,
                                        uint_q_t x);
    uint_q_t y;
    int unsigned f = ref_fanin(net, l);
    for (int unsigned j = 0; j < ref_width(net, l); j++) begin
      uint_q_t v;
      for (int unsigned k = 0; k < f; k++) begin
        int unsigned src = ref_assemble(net, l) ? j * f + k
                         : ref_map(seed, l, j, k, ref_prev_n(net, l), f);
        v.push_back(x[src]);
      end
      y.push_back(ref_llut(seed, l, j, f, ref_in_bw(net, l), ref_out_bw(net, l), v));
    end
    return y;
  endfunction

  // Whole network.
  function automatic uint_q_t ref_forward(int net, int unsigned seed, uint_q_t x);
    uint_q_t a = x;
    for (int unsigned l = 0; l < ref_layers(net); l++) a = ref_layer(net, seed, l, a);
    return a;
  endfunction

endpackage
