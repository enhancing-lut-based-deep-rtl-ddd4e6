// lutnn_pkg -- shared constants and elaboration-time helpers of the LUT network.
//
// A LUT network has no run-time arithmetic: every neuron is a pre-computed truth
// table. The helpers here compute, while the design is elaborated, what those
// tables hold and how the layers are wired:
//
//   * mix4()         a 32-bit integer hash used as a reproducible random source.
//   * param_weight() the weight of one polynomial term (or the bias) of one
//                    sub-neuron; num_terms() and sub_shift() size and scale the
//                    sub-neuron polynomial that subneuron_lut enumerates.
//   * bn_gain(), bn_offset()
//                    the folded batch-normalisation constants of one adder,
//                    used by adder_lut.
//   * conn_index()   the connectivity: which previous-layer output feeds input
//                    slot k of one sub-neuron. Each sub-neuron reads exactly F
//                    distinct inputs (the fixed fan-in rule); slots are filled
//                    in ascending input order, i.e. slot k is the k-th set bit of
//                    that sub-neuron's row of the connectivity mask M.
//
// The structure (F-input sub-neurons with (beta+1)-bit outputs, an adder with a
// beta-bit quantised activation, a fixed fan-in mask) follows the PolyLUT-Add /
// SparseLUT architecture. The numbers inside the tables normally come from an
// offline trained, quantised model; trained weights and trained masks are not
// available here, so the weights and the mask are drawn from mix4() instead.
// To deploy a trained model, replace the table builders of subneuron_lut and
// adder_lut (or the helpers they call) and conn_index() with trained values.
package lutnn_pkg;

  // Default seed of the placeholder weights and connectivity.
  localparam int unsigned DEFAULT_SEED = 32'h5EED_1234;

  // Largest fan-in of one sub-neuron the helpers handle.
  localparam int unsigned MAX_FANIN = 8;
  // Adder constants are drawn with sub-neuron index ADD_ID, so A must stay below it.
  localparam int unsigned ADD_ID = 15;

  // Placeholder weight ranges: term weights in [-W_MAG, W_MAG],
  // biases in [-B_MAG, B_MAG].
  localparam int W_MAG = 4;
  localparam int B_MAG = 8;

  function automatic int unsigned mix4(int unsigned seed, int unsigned a,
                                       int unsigned b, int unsigned c);
    int unsigned h;
    h = seed ^ 32'h9E37_79B9;
    h = (h ^ a) * 32'h85EB_CA6B;
    h = h ^ (h >> 13);
    h = (h ^ b) * 32'hC2B2_AE35;
    h = h ^ (h >> 16);
    h = (h ^ c) * 32'h27D4_EB2F;
    h = h ^ (h >> 15);
    return h;
  endfunction

  // Signed value in [-mag, mag] for (layer, neuron, sub-neuron, term).
  function automatic int param_weight(int unsigned seed, int unsigned layer,
                                      int unsigned neuron, int unsigned sub,
                                      int unsigned term, int mag);
    int unsigned h;
    h = mix4(seed, layer, (neuron << 4) | sub, term);
    return int'(h % (2 * mag + 1)) - mag;
  endfunction

  // Number of polynomial terms (bias excluded) of F inputs up to degree D (D <= 3).
  function automatic int unsigned num_terms(int unsigned fanin, int unsigned degree);
    int unsigned n;
    n = 0;
    for (int unsigned i = 0; i < fanin; i++) begin
      n++;
      if (degree >= 2)
        for (int unsigned j = i; j < fanin; j++) begin
          n++;
          if (degree >= 3)
            for (int unsigned k = j; k < fanin; k++) n++;
        end
    end
    return n;
  endfunction

  // Right-shift of the sub-neuron accumulator before quantisation.
  function automatic int unsigned sub_shift(int unsigned beta_in, int unsigned degree);
    return beta_in + degree - 1;
  endfunction

  // Saturate v to [lo, hi].
  function automatic int clamp(int v, int lo, int hi);
    return (v < lo) ? lo : ((v > hi) ? hi : v);
  endfunction

  // Batch-normalisation constants of one adder, folded to v = (g*sum + t) >>> 1:
  // gain g in [1,3], offset t in [0,4].
  function automatic int bn_gain(int unsigned seed, int unsigned layer, int unsigned neuron);
    return 1 + int'(mix4(seed, layer, (neuron << 4) | ADD_ID, 1000) % 3);
  endfunction

  function automatic int bn_offset(int unsigned seed, int unsigned layer, int unsigned neuron);
    return int'(mix4(seed, layer, (neuron << 4) | ADD_ID, 1001) % 5);
  endfunction

  // Connectivity: index of the previous-layer output that feeds input slot
  // `slot` of mask row `row` (row = neuron*A + sub-neuron). The F chosen inputs
  // are start + k*step (mod n_in), k = 0..F-1, which are distinct because
  // (F-1)*step < n_in; they are then put in ascending order.
  function automatic int unsigned conn_index(int unsigned seed, int unsigned layer,
                                             int unsigned row, int unsigned slot,
                                             int unsigned n_in, int unsigned fanin);
    int unsigned idx[MAX_FANIN];
    int unsigned start, step, tmp;
    start = mix4(seed, layer, row, 2000) % n_in;
    step  = (fanin > 1) ? 1 + mix4(seed, layer, row, 2001) % ((n_in - 1) / (fanin - 1)) : 1;
    for (int unsigned k = 0; k < MAX_FANIN; k++)
      idx[k] = (k < fanin) ? (start + k * step) % n_in : 0;
    for (int unsigned i = 1; i < fanin; i++)
      for (int unsigned j = i; j > 0; j--)
        if (idx[j-1] > idx[j]) begin
          tmp = idx[j-1];
          idx[j-1] = idx[j];
          idx[j] = tmp;
        end
    return idx[slot];
  endfunction

endpackage
