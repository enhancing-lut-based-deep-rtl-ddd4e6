// tb_add_neuron -- random-stimulus check of one PolyLUT-Add neuron.
//
// Two neurons are checked: one at the default size (A=2 sub-neurons of F=4
// 2-bit inputs) and one with A=3, F=2, beta=3, degree 1. Random input words are
// applied and the activation is compared with the reference: each sub-neuron
// evaluated on its own slice of the input, then the adder on the sub-neuron
// results. A watchdog ends the run if it hangs.
module tb_add_neuron;
  import lutnn_ref_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic [2*4*2-1:0] x0;  logic [1:0] y0;
  logic [3*2*3-1:0] x1;  logic [2:0] y1;

  add_neuron #(.LAYER(3), .NEURON(42)) dut0 (.x(x0), .y(y0));
  add_neuron #(.LAYER(1), .NEURON(9), .F(2), .A(3), .BETA_IN(3), .BETA(3), .DEGREE(1))
    dut1 (.x(x1), .y(y1));

  int checks = 0, failures = 0;

  function automatic int ref_neuron(int l, int n, int f, int nadd, int bi, int b, int d,
                                    logic [63:0] x);
    int z[], xs[];
    z = new[nadd];
    xs = new[f];
    for (int a = 0; a < nadd; a++) begin
      for (int i = 0; i < f; i++) xs[i] = int'((x >> ((a * f + i) * bi)) & ((64'd1 << bi) - 1));
      z[a] = sub_eval(SEED0, l, n, a, f, bi, b, d, xs);
    end
    return add_eval(SEED0, l, n, nadd, b, z);
  endfunction

  initial begin
    int exp;
    for (int t = 0; t < 2000; t++) begin
      x0 = 16'($urandom);
      x1 = 18'($urandom);
      @(posedge clk);
      exp = ref_neuron(3, 42, 4, 2, 2, 2, 2, 64'(x0));
      checks++;
      if (int'(y0) != exp) begin
        failures++;
        if (failures < 10) $display("MISMATCH dut0 x=%h: got %0d expected %0d", x0, y0, exp);
      end
      exp = ref_neuron(1, 9, 2, 3, 3, 3, 1, 64'(x1));
      checks++;
      if (int'(y1) != exp) begin
        failures++;
        if (failures < 10) $display("MISMATCH dut1 x=%h: got %0d expected %0d", x1, y1, exp);
      end
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
