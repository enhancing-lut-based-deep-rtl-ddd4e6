// sparse_connect -- the fixed fan-in connectivity between two layers.
//
// Every sub-neuron of a layer reads exactly F of the N_IN outputs of the
// previous layer. Which ones is given by one row of the connectivity mask M per
// sub-neuron (ROWS = neurons * A rows of N_IN bits, F bits set in each). The
// module turns each row into F constant indices and routes those inputs to the
// sub-neuron's F input slots, in ascending input order. Once elaborated it is
// pure wiring: no logic, no delay. Inputs that no row selects are left
// unread (lint reports them as unused bits of x); that is what a sparse mask
// does, not a wiring fault.
//
// Interface: x[j*W +: W] is previous-layer output j; sel[(r*F+k)*W +: W] is
// input slot k of mask row r. Combinational.
//
// Following the paper: fixed fan-in F per sub-neuron, a mask that only selects
// wires (so a trained mask costs no extra logic). Own choice: the mask itself,
// produced by lutnn_pkg::conn_index from a seed in place of a trained mask
// (the "random sparsity" connectivity of the paper's baselines).
module sparse_connect #(
  parameter int unsigned SEED  = lutnn_pkg::DEFAULT_SEED,
  parameter int unsigned LAYER = 0,
  parameter int unsigned N_IN  = 784,
  parameter int unsigned ROWS  = 512,
  parameter int unsigned F     = 4,
  parameter int unsigned W     = 2
) (
  input  logic [N_IN*W-1:0]   x,
  output logic [ROWS*F*W-1:0] sel
);
  if (F < 1 || F > lutnn_pkg::MAX_FANIN || F > N_IN) begin : g_chk_f
    $error("sparse_connect: fan-in F must be 1..MAX_FANIN and no more than N_IN");
  end

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar k = 0; k < F; k++) begin : g_slot
      localparam int unsigned IDX = lutnn_pkg::conn_index(SEED, LAYER, r, k, N_IN, F);
      assign sel[(r*F+k)*W +: W] = x[IDX*W +: W];
    end
  end

endmodule
