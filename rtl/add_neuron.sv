// add_neuron -- one PolyLUT-Add neuron: A sub-neuron tables feeding one adder table.
//
// The neuron's total fan-in is A*F. Its inputs are split into A groups of F;
// each group addresses its own subneuron_lut, which returns a signed
// (BETA+1)-bit partial result, and the A partial results together address the
// adder_lut, which returns the BETA-bit activation. Splitting the fan-in this
// way costs A*2^(F*BETA_IN) + 2^(A*(BETA+1)) table entries instead of the
// 2^(A*F*BETA_IN) a single table of the same fan-in would need.
//
// Interface: x carries input slot i of sub-neuron a in
// x[(a*F+i)*BETA_IN +: BETA_IN]; y is the activation. Purely combinational:
// the two table levels form one logic stage, and the layer registers the result.
//
// Following the paper: the A-way split, the (beta+1)-bit internal word and
// the two table levels (Fig. 2 and Fig. 5 of the paper). Own choice: contents
// of the tables (placeholders for a trained model).
module add_neuron #(
  parameter int unsigned SEED    = lutnn_pkg::DEFAULT_SEED,
  parameter int unsigned LAYER   = 0,
  parameter int unsigned NEURON  = 0,
  parameter int unsigned F       = 4,
  parameter int unsigned A       = 2,
  parameter int unsigned BETA_IN = 2,
  parameter int unsigned BETA    = 2,
  parameter int unsigned DEGREE  = 2
) (
  input  logic [A*F*BETA_IN-1:0] x,
  output logic [BETA-1:0]        y
);
  logic [A*(BETA+1)-1:0] z;

  for (genvar a = 0; a < A; a++) begin : g_sub
    subneuron_lut #(
      .SEED(SEED), .LAYER(LAYER), .NEURON(NEURON), .SUB(a),
      .F(F), .BETA_IN(BETA_IN), .BETA(BETA), .DEGREE(DEGREE)
    ) u_sub (
      .x(x[a*F*BETA_IN +: F*BETA_IN]),
      .z(z[a*(BETA+1) +: BETA+1])
    );
  end

  adder_lut #(
    .SEED(SEED), .LAYER(LAYER), .NEURON(NEURON), .A(A), .BETA(BETA)
  ) u_add (
    .z(z),
    .y(y)
  );

endmodule
