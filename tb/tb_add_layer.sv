// tb_add_layer -- check of one pipelined layer.
//
// A layer of 8 neurons (A=2, F=2, 3-bit activations) reading 16 inputs is fed
// a stream of random vectors with random gaps in in_valid. Every output that
// leaves with out_valid must equal the reference layer applied to the vector
// that entered exactly one clock earlier, and out_valid must follow in_valid
// with that one-clock latency. Reset must clear out_valid. A watchdog ends the
// run if it hangs.
module tb_add_layer;
  import lutnn_ref_pkg::*;

  localparam int NI = 16, NO = 8, F = 2, A = 2, BI = 3, B = 3, D = 2, L = 1;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic rst_n, in_valid, out_valid;
  logic [NI*BI-1:0] x;
  logic [NO*B-1:0]  y;

  add_layer #(.LAYER(L), .N_IN(NI), .N_OUT(NO), .F(F), .A(A), .BETA_IN(BI), .BETA(B),
              .DEGREE(D)) dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .x(x), .out_valid(out_valid), .y(y));

  int checks = 0, failures = 0;
  int exp_q[$][];
  bit vld_q[$];

  initial begin
    int xi[], yo[], e[];
    rst_n = 1'b0; in_valid = 1'b1; x = '0;
    repeat (2) @(posedge clk);
    #1;
    checks++;
    if (out_valid !== 1'b0) begin failures++; $display("out_valid not cleared by reset"); end
    rst_n = 1'b1;
    for (int t = 0; t < 400; t++) begin
      in_valid = ($urandom % 4) != 0;
      xi = new[NI];
      for (int j = 0; j < NI; j++) begin
        xi[j] = int'($urandom % (2 ** BI));
        x[j*BI +: BI] = BI'(xi[j]);
      end
      layer_eval(SEED0, L, NI, NO, F, A, BI, B, D, xi, yo);
      exp_q.push_back(yo);
      vld_q.push_back(in_valid);
      @(posedge clk);
      #1;
      e = exp_q.pop_front();
      checks++;
      if (out_valid != vld_q.pop_front()) begin
        failures++;
        if (failures < 10) $display("out_valid wrong at step %0d", t);
      end
      if (out_valid)
        for (int n = 0; n < NO; n++) begin
          checks++;
          if (int'(y[n*B +: B]) != e[n]) begin
            failures++;
            if (failures < 10) $display("MISMATCH step %0d neuron %0d: got %0d expected %0d", t, n, y[n*B +: B], e[n]);
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
