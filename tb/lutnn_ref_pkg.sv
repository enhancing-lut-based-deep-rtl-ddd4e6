// lutnn_ref_pkg -- reference model of the LUT network for the testbenches.
//
// It computes, directly from the network definition and without any truth
// table, what every sub-neuron, adder, connection and layer must produce:
// the placeholder weight source (a 32-bit hash), the degree-D polynomial
// sub-neuron with its signed (beta+1)-bit quantiser, the adder with folded
// batch normalisation and ReLU quantiser, and the fixed fan-in connectivity,
// rebuilt here as an explicit N-bit mask row that is scanned for its set bits.
// The design builds tables from the same definition; this model evaluates it
// sample by sample, so a wrong table entry, a wrong address packing or a wrong
// wire shows up as a mismatch.
package lutnn_ref_pkg;

  localparam logic [31:0] SEED0 = 32'h5EED_1234;

  // Event counters filled by net_eval (how often each quantiser path was taken).
  int unsigned ev_sub_neg;    // a sub-neuron result below zero
  int unsigned ev_sub_sat;    // a sub-neuron result clipped by the quantiser
  int unsigned ev_relu_zero;  // an adder result clipped to zero by the ReLU
  int unsigned ev_act_sat;    // an activation clipped at 2^beta-1

  function automatic logic [31:0] hash(logic [31:0] seed, logic [31:0] a,
                                       logic [31:0] b, logic [31:0] c);
    logic [31:0] h;
    h = seed ^ 32'h9E37_79B9;
    h = 32'((h ^ a) * 32'h85EB_CA6B);  h = h ^ {13'b0, h[31:13]};
    h = 32'((h ^ b) * 32'hC2B2_AE35);  h = h ^ {16'b0, h[31:16]};
    h = 32'((h ^ c) * 32'h27D4_EB2F);  h = h ^ {15'b0, h[31:15]};
    return h;
  endfunction

  function automatic int weight(logic [31:0] seed, int l, int n, int s, int t, int mag);
    logic [31:0] h;
    h = hash(seed, 32'(l), 32'(n * 16 + s), 32'(t));
    return int'(h % 32'(2 * mag + 1)) - mag;
  endfunction

  function automatic int sat(int v, int lo, int hi);
    if (v < lo) return lo;
    if (v > hi) return hi;
    return v;
  endfunction

  // Floor division by 2^k for a signed value.
  function automatic int floor_shift(int v, int k);
    int d;
    d = 1 << k;
    return (v >= 0) ? v / d : -((-v + d - 1) / d);
  endfunction

  function automatic int sub_eval(logic [31:0] seed, int l, int n, int s, int f,
                                  int beta_in, int beta, int degree, int x[]);
    int acc, t, raw, q;
    acc = weight(seed, l, n, s, 0, 8);
    t = 1;
    for (int i = 0; i < f; i++) begin
      acc += weight(seed, l, n, s, t++, 4) * x[i];
      for (int j = i; j < f && degree >= 2; j++) begin
        acc += weight(seed, l, n, s, t++, 4) * x[i] * x[j];
        for (int k = j; k < f && degree >= 3; k++)
          acc += weight(seed, l, n, s, t++, 4) * x[i] * x[j] * x[k];
      end
    end
    raw = floor_shift(acc, beta_in + degree - 1);
    q = sat(raw, -(2 ** beta), 2 ** beta - 1);
    if (q != raw) ev_sub_sat++;
    if (q < 0) ev_sub_neg++;
    return q;
  endfunction

  function automatic int add_eval(logic [31:0] seed, int l, int n, int nadd, int beta, int z[]);
    int s, g, t, raw, q;
    s = 0;
    foreach (z[a]) s += z[a];
    g = 1 + int'(hash(seed, 32'(l), 32'(n * 16 + 15), 32'd1000) % 32'd3);
    t = int'(hash(seed, 32'(l), 32'(n * 16 + 15), 32'd1001) % 32'd5);
    raw = floor_shift(g * s + t, 1);
    q = sat(raw, 0, 2 ** beta - 1);
    if (raw < 0) ev_relu_zero++;
    if (raw > 2 ** beta - 1) ev_act_sat++;
    return q;
  endfunction

  // Input indices of mask row `row`, ascending: build the row as a bit mask,
  // then scan it.
  function automatic void conn(logic [31:0] seed, int l, int row, int n_in, int f,
                               output int idx[]);
    bit m[];
    int start, step, c;
    m = new[n_in];
    start = int'(hash(seed, 32'(l), 32'(row), 32'd2000) % 32'(n_in));
    step  = (f > 1) ? 1 + int'(hash(seed, 32'(l), 32'(row), 32'd2001) % 32'((n_in - 1) / (f - 1))) : 1;
    for (int k = 0; k < f; k++) m[(start + k * step) % n_in] = 1'b1;
    idx = new[f];
    c = 0;
    for (int j = 0; j < n_in; j++)
      if (m[j]) idx[c++] = j;
    if (c != f) $display("REF: mask row %0d of layer %0d has %0d ones, not %0d", row, l, c, f);
  endfunction

  // One neuron: gather its A*F inputs through the mask, evaluate sub-neurons and adder.
  function automatic int neuron_eval(logic [31:0] seed, int l, int n, int n_in, int f,
                                     int nadd, int beta_in, int beta, int degree, int xin[]);
    int z[], xs[], idx[];
    z = new[nadd];
    for (int a = 0; a < nadd; a++) begin
      conn(seed, l, n * nadd + a, n_in, f, idx);
      xs = new[f];
      for (int k = 0; k < f; k++) xs[k] = xin[idx[k]];
      z[a] = sub_eval(seed, l, n, a, f, beta_in, beta, degree, xs);
    end
    return add_eval(seed, l, n, nadd, beta, z);
  endfunction

  // One layer of n_out neurons.
  function automatic void layer_eval(logic [31:0] seed, int l, int n_in, int n_out, int f,
                                     int nadd, int beta_in, int beta, int degree,
                                     int xin[], output int yout[]);
    yout = new[n_out];
    for (int n = 0; n < n_out; n++)
      yout[n] = neuron_eval(seed, l, n, n_in, f, nadd, beta_in, beta, degree, xin);
  endfunction

  // The whole network; neurons[0] is the input count.
  function automatic void net_eval(logic [31:0] seed, int neurons[], int beta_in, int f_in,
                                   int beta, int f, int nadd, int degree,
                                   int xin[], output int yout[]);
    int cur[], nxt[];
    cur = xin;
    for (int l = 0; l + 1 < neurons.size(); l++) begin
      layer_eval(seed, l, neurons[l], neurons[l+1], (l == 0) ? f_in : f, nadd,
                 (l == 0) ? beta_in : beta, beta, degree, cur, nxt);
      cur = nxt;
    end
    yout = cur;
  endfunction

endpackage
