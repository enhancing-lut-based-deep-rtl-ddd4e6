// tb_adder_lut -- exhaustive check of the adder truth table.
//
// Drives every combination of the A signed sub-neuron words into an adder
// table (default A=2, beta=2, and a second instance with A=3, beta=3) and
// compares the activation with the reference sum, folded batch normalisation
// and ReLU quantiser. It also requires that both clipping paths (ReLU to zero
// and saturation at 2^beta-1) occur. A watchdog ends the run if it hangs.
module tb_adder_lut;
  import lutnn_ref_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic [2*3-1:0] z0;  logic [1:0] y0;
  logic [3*4-1:0] z1;  logic [2:0] y1;

  adder_lut #(.LAYER(2), .NEURON(11)) dut0 (.z(z0), .y(y0));
  adder_lut #(.LAYER(0), .NEURON(5), .A(3), .BETA(3)) dut1 (.z(z1), .y(y1));

  int checks = 0, failures = 0;

  task automatic run(int nadd, int beta, int l, int n);
    int zs[];
    int w, got, exp;
    w = beta + 1;
    zs = new[nadd];
    for (int e = 0; e < 2 ** (nadd * w); e++) begin
      if (nadd == 2) z0 = 6'(e); else z1 = 12'(e);
      @(posedge clk);
      for (int a = 0; a < nadd; a++) begin
        zs[a] = (e >> (a * w)) & (2 ** w - 1);
        if (zs[a] >= 2 ** beta) zs[a] -= 2 ** w;
      end
      exp = add_eval(SEED0, l, n, nadd, beta, zs);
      got = (nadd == 2) ? int'(y0) : int'(y1);
      checks++;
      if (got != exp) begin
        failures++;
        if (failures < 10) $display("MISMATCH A=%0d addr %0d: got %0d expected %0d", nadd, e, got, exp);
      end
    end
  endtask

  initial begin
    ev_relu_zero = 0; ev_act_sat = 0;
    run(2, 2, 2, 11);
    run(3, 3, 0, 5);
    $display("ReLU clips %0d, saturations %0d", ev_relu_zero, ev_act_sat);
    checks++;
    if (ev_relu_zero == 0 || ev_act_sat == 0) begin
      failures++;
      $display("a clipping path never occurred");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
