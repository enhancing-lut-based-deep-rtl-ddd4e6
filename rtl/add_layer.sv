// add_layer -- one pipelined layer of the PolyLUT-Add network.
//
// The layer is the "Poly layer" plus "Adder layer" pair: sparse_connect picks
// F inputs for each of the N_OUT*A sub-neurons, N_OUT add_neuron instances turn
// them into N_OUT activations of BETA bits, and one register stage holds the
// result. A new input vector can be accepted every clock; the output appears
// one clock later, so a network of L layers has a latency of L clocks.
//
// Interface: x[j*BETA_IN +: BETA_IN] is input j, in_valid marks a valid input
// vector; y[n*BETA +: BETA] is neuron n's registered activation, out_valid its
// registered valid. rst_n is an active-low synchronous reset clearing y and
// out_valid.
//
// Following the paper: one register per layer (a latency in cycles equal to
// the number of layers), the two-level sub-neuron/adder structure. Own choice:
// the valid flag travelling with the data, and the reset.
module add_layer #(
  parameter int unsigned SEED    = lutnn_pkg::DEFAULT_SEED,
  parameter int unsigned LAYER   = 0,
  parameter int unsigned N_IN    = 784,
  parameter int unsigned N_OUT   = 256,
  parameter int unsigned F       = 4,
  parameter int unsigned A       = 2,
  parameter int unsigned BETA_IN = 2,
  parameter int unsigned BETA    = 2,
  parameter int unsigned DEGREE  = 2
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic [N_IN*BETA_IN-1:0] x,
  output logic                    out_valid,
  output logic [N_OUT*BETA-1:0]   y
);
  localparam int unsigned NW = A * F * BETA_IN;  // input bits of one neuron

  logic [N_OUT*NW-1:0]   sel;
  logic [N_OUT*BETA-1:0] act;

  sparse_connect #(
    .SEED(SEED), .LAYER(LAYER), .N_IN(N_IN), .ROWS(N_OUT*A), .F(F), .W(BETA_IN)
  ) u_conn (
    .x(x),
    .sel(sel)
  );

  for (genvar n = 0; n < N_OUT; n++) begin : g_neuron
    add_neuron #(
      .SEED(SEED), .LAYER(LAYER), .NEURON(n), .F(F), .A(A),
      .BETA_IN(BETA_IN), .BETA(BETA), .DEGREE(DEGREE)
    ) u_neuron (
      .x(sel[n*NW +: NW]),
      .y(act[n*BETA +: BETA])
    );
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      y         <= '0;
    end else begin
      out_valid <= in_valid;
      y         <= act;
    end
  end

endmodule
