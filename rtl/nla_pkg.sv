// nla_pkg: shared types, network descriptions and table generators for the
// NeuraLUT-Assemble inference netlist.
//
// A NeuraLUT-Assemble network is a feed-forward chain of layers of logical
// LUTs (L-LUTs). Every layer l is described by four numbers taken from the
// published configurations: its width w_l (number of L-LUTs), its fan-in F_l,
// whether it is an "assemble" layer a_l (fixed tree grouping: L-LUT j reads
// outputs j*F .. j*F+F-1 of the layer before) or a "learned mapping" layer
// (each L-LUT reads F inputs picked by training), and the activation
// bit-widths. The bit-width list beta is read as [input width, hidden width
// ..., output width]: the network input uses beta[0] bits per feature, every
// hidden activation uses beta[1] bits and the outputs of the last layer use
// the last entry of beta. This reading is this design's own; it is the one
// that makes every L-LUT of the MNIST, JSC OpenML and NID networks a 6-input
// function, as the evaluation states.
//
// Training results are not published, so two things a trained network
// would supply are generated here from a seed instead:
//   * llut_entry()  - the content of an L-LUT. It is a stand-in neuron: a
//     weighted sum of the F input codes, with small signed weights drawn
//     from a hash, rescaled linearly onto the output code range
//     (ReLU-free, saturating quantiser). A trained table replaces this.
//   * map_index()   - the learned connection of input k of L-LUT j. The F
//     picks of one L-LUT are distinct: base + k*stride (mod in_n) with
//     1 <= stride <= (in_n-1)/(F-1).
// Both are pure functions of (seed, layer, index, ...), evaluated at
// elaboration time, so the netlist stays a network of constant ROMs.
package nla_pkg;

  // The four configurations evaluated in the paper (Table II).
  typedef enum logic [1:0] {
    NET_MNIST       = 2'd0,
    NET_JSC_CERNBOX = 2'd1,
    NET_JSC_OPENML  = 2'd2,
    NET_NID         = 2'd3
  } net_e;

  // One layer of the network, as the top module needs it.
  typedef struct packed {
    logic [31:0] w;       // L-LUTs in this layer (w_l)
    logic [31:0] f;       // fan-in of each L-LUT (F_l)
    logic [31:0] in_n;    // values arriving from the layer before
    logic [31:0] in_bw;   // bits per arriving value
    logic [31:0] out_bw;  // bits per L-LUT output
    logic        assemble;// 1: fixed tree grouping, 0: learned mapping
  } layer_cfg_t;

  function automatic int unsigned net_layers(net_e net);
    case (net)
      NET_MNIST:       return 6;
      NET_JSC_CERNBOX: return 7;
      NET_JSC_OPENML:  return 7;
      default:         return 5;
    endcase
  endfunction

  // Number of input features of the network.
  function automatic int unsigned net_in_n(net_e net);
    case (net)
      NET_MNIST:       return 784;
      NET_JSC_CERNBOX: return 16;
      NET_JSC_OPENML:  return 16;
      default:         return 593;
    endcase
  endfunction

  // beta[0], beta[1], beta[last] of Table II.
  function automatic int unsigned net_in_bw(net_e net);
    case (net)
      NET_MNIST:       return 1;
      NET_JSC_CERNBOX: return 8;
      NET_JSC_OPENML:  return 6;
      default:         return 1;
    endcase
  endfunction

  function automatic int unsigned net_hid_bw(net_e net);
    case (net)
      NET_MNIST:       return 1;
      NET_JSC_CERNBOX: return 4;
      NET_JSC_OPENML:  return 3;
      default:         return 2;
    endcase
  endfunction

  function automatic int unsigned net_out_bw(net_e net);
    case (net)
      NET_MNIST:       return 6;
      NET_JSC_CERNBOX: return 8;
      NET_JSC_OPENML:  return 8;
      default:         return 2;
    endcase
  endfunction

  // w_l of Table II.
  function automatic int unsigned net_w(net_e net, int unsigned l);
    int unsigned mnist [6] = '{2160, 360, 2160, 360, 60, 10};
    int unsigned jsc   [7] = '{320, 160, 80, 40, 20, 10, 5};
    int unsigned nid   [5] = '{60, 20, 9, 3, 1};
    case (net)
      NET_MNIST:       return (l < 6) ? mnist[l] : 0;
      NET_JSC_CERNBOX,
      NET_JSC_OPENML:  return (l < 7) ? jsc[l] : 0;
      default:         return (l < 5) ? nid[l] : 0;
    endcase
  endfunction

  // F of Table II.
  function automatic int unsigned net_f(net_e net, int unsigned l);
    int unsigned nid [5] = '{6, 3, 3, 3, 3};
    case (net)
      NET_MNIST:       return 6;
      NET_JSC_CERNBOX,
      NET_JSC_OPENML:  return (l == 0) ? 1 : 2;
      default:         return (l < 5) ? nid[l] : 3;
    endcase
  endfunction

  // a_l of Table II.
  function automatic logic net_a(net_e net, int unsigned l);
    logic [5:0] mnist = 6'b111010; // bit l = a_l, [0,1,0,1,1,1]
    logic [4:0] nid   = 5'b11010;  // [0,1,0,1,1]
    case (net)
      NET_MNIST:       return mnist[l % 6];
      NET_JSC_CERNBOX,
      NET_JSC_OPENML:  return (l != 0);
      default:         return nid[l % 5];
    endcase
  endfunction

  function automatic layer_cfg_t layer_cfg(net_e net, int unsigned l);
    layer_cfg_t c;
    int unsigned nl = net_layers(net);
    c.w        = net_w(net, l);
    c.f        = net_f(net, l);
    c.in_n     = (l == 0) ? net_in_n(net) : net_w(net, l - 1);
    c.in_bw    = (l == 0) ? net_in_bw(net) : net_hid_bw(net);
    c.out_bw   = (l + 1 == nl) ? net_out_bw(net) : net_hid_bw(net);
    c.assemble = net_a(net, l);
    return c;
  endfunction

  // Widest activation bus anywhere in the network (input included).
  function automatic int unsigned net_max_bits(net_e net);
    int unsigned m = net_in_n(net) * net_in_bw(net);
    for (int unsigned l = 0; l < net_layers(net); l++) begin
      int unsigned b = net_w(net, l) *
                       ((l + 1 == net_layers(net)) ? net_out_bw(net) : net_hid_bw(net));
      if (b > m) m = b;
    end
    return m;
  endfunction

  // Clock cycles from in_valid to out_valid when a register follows every
  // pipe_every-th layer and the last layer.
  function automatic int unsigned net_latency(net_e net, int unsigned pipe_every);
    return (net_layers(net) + pipe_every - 1) / pipe_every;
  endfunction

  function automatic int unsigned net_out_n(net_e net);
    return net_w(net, net_layers(net) - 1);
  endfunction

  // 32-bit integer mixer (xor-shift / multiply).
  function automatic logic [31:0] mix32(logic [31:0] x);
    logic [31:0] y = x;
    y = y ^ (y >> 16);
    y = y * 32'h7feb352d;
    y = y ^ (y >> 15);
    y = y * 32'h846ca68b;
    y = y ^ (y >> 16);
    return y;
  endfunction

  function automatic logic [31:0] hash3(logic [31:0] a, logic [31:0] b,
                                        logic [31:0] c);
    return mix32(mix32(mix32(a) ^ b) ^ c);
  endfunction

  // Learned mapping: index (into the previous layer) of input k of
  // L-LUT j in layer `layer`.
  function automatic int unsigned map_index(int unsigned seed, int unsigned layer,
                                            int unsigned j, int unsigned k,
                                            int unsigned in_n, int unsigned f);
    logic [31:0] h     = hash3(seed, 32'h1000 + layer, j);
    int unsigned base  = h % in_n;
    int unsigned smax  = (f > 1) ? (in_n - 1) / (f - 1) : 1;
    int unsigned step  = (smax == 0) ? 1 : (mix32(h) % smax) + 1;
    return (base + k * step) % in_n;
  endfunction

  // Content of entry `addr` of L-LUT `idx` of layer `layer`. Input k
  // occupies address bits [k*in_bw +: in_bw].
  function automatic logic [31:0] llut_entry(int unsigned seed, int unsigned layer,
                                             int unsigned idx, int unsigned f,
                                             int unsigned in_bw, int unsigned out_bw,
                                             logic [31:0] addr);
    logic [31:0] h    = hash3(seed, 32'h2000 + layer, idx);
    logic [31:0] mask = (32'd1 << in_bw) - 32'd1;
    int          xmax = int'(mask);
    int          acc  = 0;
    int          lo   = 0;
    int          hi   = 0;
    for (int unsigned k = 0; k < f; k++) begin
      // weight in [-3, 4], never zero so that every input matters
      logic [31:0] hk = mix32(h + k);
      int wk = int'(hk[10:8]) - 3;
      int xk = int'((addr >> (k * in_bw)) & mask);
      if (wk == 0) wk = 1;
      acc += wk * xk;
      if (wk > 0) hi += wk * xmax;
      else        lo += wk * xmax;
    end
    // linear rescale of [lo, hi] onto [0, 2^out_bw - 1]
    return 32'(((acc - lo) << out_bw) / (hi - lo + 1));
  endfunction

endpackage
