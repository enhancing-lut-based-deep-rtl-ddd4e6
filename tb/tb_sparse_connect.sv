// tb_sparse_connect -- check of the fixed fan-in connectivity.
//
// A small connection block (20 inputs of 3 bits, 6 mask rows of fan-in 3) and
// one of the default size are driven with random input vectors; every output
// slot must carry the input that the reference mask row names (the k-th set
// bit of the row, in ascending order). A watchdog ends the run if it hangs.
module tb_sparse_connect;
  import lutnn_ref_pkg::*;

  localparam int N0 = 20, R0 = 6, F0 = 3, W0 = 3;
  localparam int N1 = 784, R1 = 512, F1 = 4, W1 = 2;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic [N0*W0-1:0]    x0;  logic [R0*F0*W0-1:0] s0;
  logic [N1*W1-1:0]    x1;  logic [R1*F1*W1-1:0] s1;

  sparse_connect #(.LAYER(4), .N_IN(N0), .ROWS(R0), .F(F0), .W(W0)) dut0 (.x(x0), .sel(s0));
  sparse_connect dut1 (.x(x1), .sel(s1));

  int checks = 0, failures = 0;
  int idx0[R0][], idx1[R1][];

  initial begin
    for (int r = 0; r < R0; r++) conn(SEED0, 4, r, N0, F0, idx0[r]);
    for (int r = 0; r < R1; r++) conn(SEED0, 0, r, N1, F1, idx1[r]);
    for (int t = 0; t < 50; t++) begin
      for (int j = 0; j < N0; j++) x0[j*W0 +: W0] = W0'($urandom);
      for (int j = 0; j < N1; j++) x1[j*W1 +: W1] = W1'($urandom);
      @(posedge clk);
      for (int r = 0; r < R0; r++)
        for (int k = 0; k < F0; k++) begin
          checks++;
          if (s0[(r*F0+k)*W0 +: W0] != x0[idx0[r][k]*W0 +: W0]) begin
            failures++;
            if (failures < 10) $display("MISMATCH dut0 row %0d slot %0d", r, k);
          end
        end
      for (int r = 0; r < R1; r++)
        for (int k = 0; k < F1; k++) begin
          checks++;
          if (s1[(r*F1+k)*W1 +: W1] != x1[idx1[r][k]*W1 +: W1]) begin
            failures++;
            if (failures < 10) $display("MISMATCH dut1 row %0d slot %0d", r, k);
          end
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
