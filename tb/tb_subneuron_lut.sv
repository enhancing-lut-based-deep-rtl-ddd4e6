// tb_subneuron_lut -- exhaustive check of one sub-neuron truth table.
//
// Drives every address of a sub-neuron with the default size (F=4 inputs of
// 2 bits, 3-bit signed output) and of a second, degree-3 instance with 3-bit
// inputs, and compares each word with the reference polynomial neuron of
// lutnn_ref_pkg. It also checks that the table really uses its sign bit
// (some entries negative, some positive). A watchdog ends the run if it hangs.
module tb_subneuron_lut;
  import lutnn_ref_pkg::*;

  localparam int F0 = 4, BI0 = 2, B0 = 2, D0 = 2;
  localparam int F1 = 2, BI1 = 3, B1 = 3, D1 = 3;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic [F0*BI0-1:0] x0;  logic [B0:0] z0;
  logic [F1*BI1-1:0] x1;  logic [B1:0] z1;

  subneuron_lut #(.LAYER(1), .NEURON(7), .SUB(1)) dut0 (.x(x0), .z(z0));
  subneuron_lut #(.LAYER(0), .NEURON(3), .SUB(0), .F(F1), .BETA_IN(BI1), .BETA(B1),
                  .DEGREE(D1)) dut1 (.x(x1), .z(z1));

  int checks = 0, failures = 0;
  int neg = 0, pos = 0;

  task automatic check_one(int got, int exp, string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("MISMATCH %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    int xs[];
    for (int e = 0; e < 2 ** (F0 * BI0); e++) begin
      x0 = (F0*BI0)'(e);
      @(posedge clk);
      xs = new[F0];
      for (int i = 0; i < F0; i++) xs[i] = (e >> (i * BI0)) & (2 ** BI0 - 1);
      check_one($signed(z0), sub_eval(SEED0, 1, 7, 1, F0, BI0, B0, D0, xs), $sformatf("dut0 addr %0d", e));
      if ($signed(z0) < 0) neg++; else if ($signed(z0) > 0) pos++;
    end
    for (int e = 0; e < 2 ** (F1 * BI1); e++) begin
      x1 = (F1*BI1)'(e);
      @(posedge clk);
      xs = new[F1];
      for (int i = 0; i < F1; i++) xs[i] = (e >> (i * BI1)) & (2 ** BI1 - 1);
      check_one($signed(z1), sub_eval(SEED0, 0, 3, 0, F1, BI1, B1, D1, xs), $sformatf("dut1 addr %0d", e));
    end
    checks++;
    if (neg == 0 || pos == 0) begin
      failures++;
      $display("table of dut0 does not use both signs: neg=%0d pos=%0d", neg, pos);
    end
    $display("negative entries %0d, positive entries %0d", neg, pos);
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
