// subneuron_lut -- one Poly-layer sub-neuron as a pre-computed truth table.
//
// A sub-neuron reads F inputs of BETA_IN bits each and produces a signed
// (BETA+1)-bit partial result. Its whole transfer function (bias, weighted
// polynomial terms up to degree DEGREE, quantiser) is enumerated while the
// design is elaborated into a table of 2^(F*BETA_IN) words, and the hardware
// is only that table: the concatenated inputs are its address. The output is
// one bit wider than a layer activation because it is not passed through a ReLU
// and can be negative, so the adder that follows cannot overflow.
//
// Interface: x is the table address, input slot i in x[i*BETA_IN +: BETA_IN];
// z is the two's-complement table word. Purely combinational, no clock.
//
// Following the paper: a table of 2^(beta*F) entries with a (beta+1)-bit
// output, no batch normalisation in the sub-neuron. Own choice: the table
// contents, which stand in for a trained model (weights from
// lutnn_pkg::param_weight).
module subneuron_lut #(
  parameter int unsigned SEED    = lutnn_pkg::DEFAULT_SEED,
  parameter int unsigned LAYER   = 0,
  parameter int unsigned NEURON  = 0,
  parameter int unsigned SUB     = 0,
  parameter int unsigned F       = 4,
  parameter int unsigned BETA_IN = 2,
  parameter int unsigned BETA    = 2,
  parameter int unsigned DEGREE  = 2
) (
  input  logic [F*BETA_IN-1:0] x,
  output logic [BETA:0]        z
);
  localparam int unsigned ADDR_W  = F * BETA_IN;
  localparam int unsigned ENTRIES = 1 << ADDR_W;

  typedef logic [BETA:0] word_t;
  typedef word_t table_t [ENTRIES];

  localparam int unsigned NT = lutnn_pkg::num_terms(F, DEGREE);

  // Enumerate the transfer function: bias plus the weighted monomials of the F
  // inputs up to degree DEGREE (x_i, x_i*x_j for j>=i, x_i*x_j*x_k for k>=j>=i),
  // then an arithmetic right shift and saturation to [-2^BETA, 2^BETA-1].
  function automatic table_t build_table();
    table_t tbl;
    int w[NT+1];
    int xv[F];
    int acc;
    int unsigned t;
    for (int unsigned i = 0; i <= NT; i++)
      w[i] = lutnn_pkg::param_weight(SEED, LAYER, NEURON, SUB, i,
                                     (i == 0) ? lutnn_pkg::B_MAG : lutnn_pkg::W_MAG);
    for (int unsigned e = 0; e < ENTRIES; e++) begin
      for (int unsigned i = 0; i < F; i++)
        xv[i] = int'((e >> (i * BETA_IN)) & ((1 << BETA_IN) - 1));
      acc = w[0];
      t = 1;
      for (int unsigned i = 0; i < F; i++) begin
        acc += w[t] * xv[i];
        t++;
        if (DEGREE >= 2)
          for (int unsigned j = i; j < F; j++) begin
            acc += w[t] * xv[i] * xv[j];
            t++;
            if (DEGREE >= 3)
              for (int unsigned k = j; k < F; k++) begin
                acc += w[t] * xv[i] * xv[j] * xv[k];
                t++;
              end
          end
      end
      tbl[e] = word_t'(lutnn_pkg::clamp(acc >>> lutnn_pkg::sub_shift(BETA_IN, DEGREE),
                                        -(1 << BETA), (1 << BETA) - 1));
    end
    return tbl;
  endfunction

  localparam table_t TABLE = build_table();

  assign z = TABLE[x];

endmodule
