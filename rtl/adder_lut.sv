// adder_lut -- the Adder-layer stage of one neuron as a pre-computed truth table.
//
// It receives the A signed (BETA+1)-bit outputs of the neuron's sub-neurons and
// produces the neuron's unsigned BETA-bit activation. The sum of the A words,
// the batch normalisation and the quantised ReLU activation are enumerated at
// elaboration into a table of 2^(A*(BETA+1)) words, addressed by the
// concatenated sub-neuron outputs.
//
// Interface: z holds sub-neuron a's word in z[a*(BETA+1) +: BETA+1]; y is the
// activation. Purely combinational, no clock.
//
// Following the paper: the (beta+1)-bit adder inputs, batch normalisation after
// the addition, a beta-bit quantised activation, 2^(A(beta+1)) entries. Own
// choice: the batch-normalisation constants and quantiser scale, which stand in
// for a trained model (see lutnn_pkg::bn_gain and bn_offset).
module adder_lut #(
  parameter int unsigned SEED   = lutnn_pkg::DEFAULT_SEED,
  parameter int unsigned LAYER  = 0,
  parameter int unsigned NEURON = 0,
  parameter int unsigned A      = 2,
  parameter int unsigned BETA   = 2
) (
  input  logic [A*(BETA+1)-1:0] z,
  output logic [BETA-1:0]       y
);
  localparam int unsigned ADDR_W  = A * (BETA + 1);
  localparam int unsigned ENTRIES = 1 << ADDR_W;

  typedef logic [BETA-1:0] word_t;
  typedef word_t table_t [ENTRIES];

  // Enumerate the transfer function: sum of the A signed sub-neuron words,
  // folded batch normalisation v = (g*sum + t) >>> 1, ReLU saturating at
  // 2^BETA-1.
  function automatic table_t build_table();
    table_t tbl;
    int g, t, s, zv;
    int unsigned f;
    g = lutnn_pkg::bn_gain(SEED, LAYER, NEURON);
    t = lutnn_pkg::bn_offset(SEED, LAYER, NEURON);
    for (int unsigned e = 0; e < ENTRIES; e++) begin
      s = 0;
      for (int unsigned a = 0; a < A; a++) begin
        f = (e >> (a * (BETA + 1))) & ((1 << (BETA + 1)) - 1);
        zv = (f >= (1 << BETA)) ? int'(f) - (1 << (BETA + 1)) : int'(f);
        s += zv;
      end
      tbl[e] = word_t'(lutnn_pkg::clamp((g * s + t) >>> 1, 0, (1 << BETA) - 1));
    end
    return tbl;
  endfunction

  localparam table_t TABLE = build_table();

  assign y = TABLE[z];

endmodule
