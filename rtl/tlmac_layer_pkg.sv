// tlmac_layer_pkg: contents of a compiled layer.
//
// A TLMAC processing element has no weight memory. Its weights live in the
// truth tables of the LUT arrays; a wiring list per output says which arrays
// its switch multiplexer reaches; and two read-only maps say, for every
// step of the layer, which weight-group index the arrays use and which LUT
// array each switch multiplexer forwards. These contents are produced offline
// by the compile flow (clustering of steps, then placement of weight groups
// by simulated annealing) and are compiled into the bitstream.
//
// This package is the interface between that flow and the RTL: five pure
// functions, each taking a LAYER number so that several processing elements
// can hold different layers. The bodies below generate a deterministic
// pseudo-random example layer from a hash. Any contents are hardware-legal,
// because the weight tensor a layer computes is defined by the same tables.
// To deploy a real network, replace the bodies with look-ups into the tables
// the compile flow writes.
package tlmac_layer_pkg;

  // 32-bit integer hash of four values.
  function automatic int unsigned mix4(int unsigned a, int unsigned b,
                                       int unsigned c, int unsigned d);
    int unsigned h;
    h = (a * 32'h9E37_79B1) ^ (b * 32'h85EB_CA77) ^ (c * 32'hC2B2_AE3D) ^ (d * 32'h27D4_EB2F);
    h = h ^ (h >> 15);
    h = h * 32'h2C1B_3C6D;
    h = h ^ (h >> 12);
    h = h * 32'h297A_2D39;
    h = h ^ (h >> 15);
    return h;
  endfunction

  // Weight g (signed, b_w bits) of the weight group stored at select index s
  // of LUT array e.
  function automatic int layer_weight(int layer, int e, int s, int g, int b_w);
    int unsigned h;
    h = mix4(layer + 1, e, s, g);
    return int'(h % (32'd1 << b_w)) - (1 << (b_w - 1));
  endfunction

  // Cluster (weight-group select index) used by all LUT arrays at step t.
  function automatic int layer_step_sel(int layer, int t, int n_clus);
    return int'(mix4(layer + 1, t, 32'h51, 32'h3) % n_clus);
  endfunction

  // LUT array wired to input k of the switch multiplexer of output p. The
  // inputs of one multiplexer are distinct arrays as long as its fan-in is
  // at most n_arr.
  function automatic int layer_conn(int layer, int p, int k, int n_arr);
    return int'((mix4(layer + 1, p, 32'h77, 32'h5) + k) % n_arr);
  endfunction

  // Number of LUT arrays wired to the multiplexer of output p, at most
  // mux_in. Routing optimisation leaves each output its own fan-in; the
  // example spreads it between 3/4 mux_in and mux_in.
  function automatic int layer_fanin(int layer, int p, int mux_in);
    return mux_in - int'(mix4(layer + 1, p, 32'hF1, 32'h7) % (mux_in / 4 + 1));
  endfunction

  // Multiplexer input chosen by output p at step t, below its fan-in.
  function automatic int layer_switch_sel(int layer, int t, int p, int mux_in);
    return int'(mix4(layer + 1, t, p, 32'h99) % layer_fanin(layer, p, mux_in));
  endfunction

endpackage
