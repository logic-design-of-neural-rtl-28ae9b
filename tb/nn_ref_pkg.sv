// nn_ref_pkg -- integer reference model of the flattened network, for the
// testbenches.
//
// Computes a neuron, a layer or the whole network with plain integer
// arithmetic on longint values, independent of the RTL structure (no
// signed-digit recoding, no bit slicing): sum of products plus bias,
// saturation to the accumulator width, requantisation
// floor((acc * mult + 2**(shift-1)) / 2**shift) saturated to -128..127, and
// ReLU. It reads the embedded constants from nn_pkg, which is the network's
// data, not its logic. Event counters record how often each mechanism was
// exercised: accumulator saturation, requantiser saturation, ReLU clearing
// a negative value, and pruned (zero-weight) connections.
package nn_ref_pkg;

  int unsigned n_acc_sat;
  int unsigned n_req_sat;
  int unsigned n_relu_zero;
  int unsigned n_pruned;

  function automatic void clear_counts();
    n_acc_sat   = 0;
    n_req_sat   = 0;
    n_relu_zero = 0;
    n_pruned    = 0;
  endfunction

  function automatic longint clamp(longint v, longint lo, longint hi, ref int unsigned cnt);
    if (v > hi) begin
      cnt++;
      return hi;
    end
    if (v < lo) begin
      cnt++;
      return lo;
    end
    return v;
  endfunction

  // Saturate to an acc_w-bit signed accumulator.
  function automatic longint acc_sat(longint s, int unsigned acc_w);
    longint hi = (longint'(1) <<< (acc_w - 1)) - 1;
    return clamp(s, -hi - 1, hi, n_acc_sat);
  endfunction

  // Requantise and clip to an 8-bit signed activation.
  function automatic longint requant(longint acc, longint mult, int unsigned shift);
    longint p = acc * mult + (longint'(1) <<< (shift - 1));
    // floor division by 2**shift
    longint q = (p >= 0) ? (p / (longint'(1) <<< shift))
                         : -((-p + (longint'(1) <<< shift) - 1) / (longint'(1) <<< shift));
    return clamp(q, -128, 127, n_req_sat);
  endfunction

  function automatic longint relu(longint v, bit en);
    if (en && v < 0) begin
      n_relu_zero++;
      return 0;
    end
    return v;
  endfunction

  // One layer of the network built from nn_pkg constants.
  function automatic void layer(int unsigned seed, int unsigned lidx, int unsigned n_in,
                                int unsigned n_out, int unsigned acc_w, bit relu_en,
                                input longint a[], output longint y[]);
    longint mult = longint'(nn_pkg::req_mult(seed, lidx));
    y = new[n_out];
    for (int unsigned j = 0; j < n_out; j++) begin
      longint s = longint'(nn_pkg::bias(seed, lidx, j));
      for (int unsigned i = 0; i < n_in; i++) begin
        longint w = longint'(nn_pkg::weight(seed, lidx, j, i));
        if (w == 0) n_pruned++;
        s += a[i] * w;
      end
      y[j] = relu(requant(acc_sat(s, acc_w), mult, nn_pkg::REQ_SHIFT), relu_en);
    end
  endfunction

  // Whole network: sizes[0] inputs, sizes.size()-1 layers, ReLU on all but
  // the last layer.
  function automatic void network(int unsigned seed, input int unsigned sizes[],
                                  int unsigned acc_w, input longint x[], output longint y[]);
    longint a[];
    longint b[];
    int unsigned nl = sizes.size() - 1;
    a = x;
    for (int unsigned l = 0; l < nl; l++) begin
      layer(seed, l, sizes[l], sizes[l+1], acc_w, l != nl - 1, a, b);
      a = b;
    end
    y = a;
  endfunction

endpackage
