// sparselut_net -- a complete PolyLUT-Add network with fixed fan-in connectivity.
//
// The network is a chain of NUM_LAYERS add_layer stages. Layer l has
// NEURONS[l+1] neurons and reads the NEURONS[l] outputs of the layer before it
// (NEURONS[0] is the number of input features). Every neuron sums A
// sub-neurons of fan-in F; activations are BETA bits wide. The first layer may
// use its own input width BETA_IN and fan-in F_IN, as some of the networks
// this architecture is evaluated with quantise their input features more
// finely than their hidden activations.
//
// Timing: fully pipelined. One input vector is accepted on every clock where
// in_valid is high, and its result leaves NUM_LAYERS clocks later with
// out_valid high. There is no back-pressure: the network never stalls.
//
// Interface: x[j*BETA_IN +: BETA_IN] is input feature j (unsigned);
// y[c*BETA +: BETA] is output neuron c (unsigned). A classifier takes the
// arg-max of y off the network. rst_n is an active-low synchronous reset.
//
// Defaults: the MNIST network "HDR-Add2" (784 inputs, layers of
// 256,100,100,100,100,10 neurons, beta=2, F=4, A=2), with degree-2
// sub-neurons. The table contents and the connectivity mask are placeholders
// generated from SEED (see lutnn_pkg); a trained model replaces them.
module sparselut_net #(
  parameter int unsigned NUM_LAYERS          = 6,
  parameter int unsigned NEURONS [NUM_LAYERS+1] = '{784, 256, 100, 100, 100, 100, 10},
  parameter int unsigned BETA_IN             = 2,
  parameter int unsigned F_IN                = 4,
  parameter int unsigned BETA                = 2,
  parameter int unsigned F                   = 4,
  parameter int unsigned A                   = 2,
  parameter int unsigned DEGREE              = 2,
  parameter int unsigned SEED                = lutnn_pkg::DEFAULT_SEED
) (
  input  logic                                     clk,
  input  logic                                     rst_n,
  input  logic                                     in_valid,
  input  logic [NEURONS[0]*BETA_IN-1:0]            x,
  output logic                                     out_valid,
  output logic [NEURONS[NUM_LAYERS]*BETA-1:0]      y
);
  if (A < 1 || A >= lutnn_pkg::ADD_ID) begin : g_chk_a
    $error("sparselut_net: A must be 1..14");
  end
  if (DEGREE < 1 || DEGREE > 3) begin : g_chk_d
    $error("sparselut_net: DEGREE must be 1..3");
  end

  for (genvar l = 0; l < NUM_LAYERS; l++) begin : g_layer
    localparam int unsigned BI = (l == 0) ? BETA_IN : BETA;
    localparam int unsigned FL = (l == 0) ? F_IN : F;

    logic [NEURONS[l]*BI-1:0]     lx;
    logic                         lv;
    logic [NEURONS[l+1]*BETA-1:0] ly;
    logic                         lyv;

    if (l == 0) begin : g_in
      assign lx = x;
      assign lv = in_valid;
    end else begin : g_chain
      assign lx = g_layer[l-1].ly;
      assign lv = g_layer[l-1].lyv;
    end

    add_layer #(
      .SEED(SEED), .LAYER(l), .N_IN(NEURONS[l]), .N_OUT(NEURONS[l+1]),
      .F(FL), .A(A), .BETA_IN(BI), .BETA(BETA), .DEGREE(DEGREE)
    ) u_layer (
      .clk(clk), .rst_n(rst_n),
      .in_valid(lv), .x(lx),
      .out_valid(lyv), .y(ly)
    );
  end

  assign y         = g_layer[NUM_LAYERS-1].ly;
  assign out_valid = g_layer[NUM_LAYERS-1].lyv;

endmodule
