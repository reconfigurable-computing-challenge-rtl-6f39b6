// ccn_tb_pkg: reference arithmetic shared by the testbenches.
//
// Weights are generated from a hash of (layer, output, input) so that each
// testbench can both load them into the design over the configuration bus
// and use them in its own model, without data files. Index i == IN of an
// output row is the bias. The reference layer below is written directly from
// the layer definition y = sat(relu((W x + (b << s)) >>> s)) and shares no
// code with the RTL.
package ccn_tb_pkg;
  import ccn_pkg::*;

  // Range of generated weights for 8-bit and 16-bit layers.
  function automatic int wgen(int layer, int o, int i, int ww);
    int unsigned h;
    int r;
    h = 32'(layer) * 32'd7919 + 32'(o) * 32'd104729 + 32'(i) * 32'd1299709 + 32'd12345;
    h = h ^ (h >> 15);
    h = h * 32'h2c1b3c6d;
    h = h ^ (h >> 12);
    h = h * 32'h297a2d39;
    h = h ^ (h >> 15);
    r = (ww == 8) ? 15 : 200;
    return int'(h % 32'(2 * r + 1)) - r;
  endfunction

  function automatic int sat(longint v, int bits);
    longint hi, lo;
    hi = (longint'(1) <<< (bits - 1)) - 1;
    lo = -(longint'(1) <<< (bits - 1));
    if (v > hi) return int'(hi);
    if (v < lo) return int'(lo);
    return int'(v);
  endfunction

  // One fully connected layer on one node.
  function automatic void dense_ref(input int layer, input int x[$], input int n_in, input int n_out,
                                    input int ww, input int ow, input int shift, input bit relu,
                                    output int y[$]);
    y = {};
    for (int o = 0; o < n_out; o++) begin
      longint acc;
      acc = longint'(wgen(layer, o, n_in, ww)) * (longint'(1) <<< shift);
      for (int i = 0; i < n_in; i++) acc += longint'(x[i]) * longint'(wgen(layer, o, i, ww));
      acc = acc >>> shift;
      if (relu && acc < 0) acc = 0;
      y.push_back(sat(acc, ow));
    end
  endfunction

  // Sign-extend a 'bits'-wide field.
  function automatic int sx(logic [31:0] v, int bits);
    logic [31:0] m;
    m = 32'(1) << (bits - 1);
    v = v & ((m << 1) - 1);
    return int'((v ^ m) - m);
  endfunction

  // Stand-in for a GravNetConv (the real layer is not part of the RTL): every
  // output feature f of node n is sat8(x[n][f % GC_IN] + max_m(x[m][f % GC_IN]) / 2),
  // which depends on the whole event.
  function automatic void gravnet_standin(input int x[$][$], output int y[$][$]);
    int mx[$];
    y = {};
    for (int f = 0; f < GC_IN; f++) begin
      int m;
      m = -128;
      foreach (x[n]) if (x[n][f] > m) m = x[n][f];
      mx.push_back(m);
    end
    foreach (x[n]) begin
      int row[$];
      row = {};
      for (int f = 0; f < GC_OUT; f++) row.push_back(sat(longint'(x[n][f % GC_IN] + (mx[f % GC_IN] >>> 1)), 8));
      y.push_back(row);
    end
  endfunction

  // Stand-in for condensation point selection: a node is selected when its
  // beta lies in the top quarter of the range of betas in its event. With
  // untrained weights beta has no fixed sign, so the rule is relative.
  function automatic void cps_standin(input int beta[$], output int sel[$]);
    int mx, mn;
    mx = -32768; mn = 32767;
    foreach (beta[n]) begin
      if (beta[n] > mx) mx = beta[n];
      if (beta[n] < mn) mn = beta[n];
    end
    sel = {};
    foreach (beta[n]) sel.push_back((mx > mn && 4 * (beta[n] - mn) >= 3 * (mx - mn)) ? 1 : 0);
  endfunction
endpackage
