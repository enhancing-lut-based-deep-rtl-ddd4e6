// tb_sparselut_net -- end-to-end test of the network at the JSC-M Lite-Add2 size.
//
// The network (16 input features, layers of 64, 32 and 5 neurons, 3-bit
// activations, F=2, A=2, degree 2) is streamed random feature vectors, mostly
// back to back with occasional gaps, through a reset in the middle of the
// stream. Each result must equal the reference network evaluated on the
// vector that entered exactly NUM_LAYERS clocks earlier (the pipeline latency),
// and out_valid must track in_valid with that latency.
//
// The test also counts how often each mechanism of the design is exercised and
// fails if one never is: back-to-back samples (one result per clock), bubbles
// in the stream, reset flushing the pipeline, negative sub-neuron results (the
// reason for the extra bit), sub-neuron quantiser saturation, ReLU clipping to
// zero and activation saturation. A watchdog ends the run if it hangs.
module tb_sparselut_net;
  import lutnn_ref_pkg::*;

  localparam int NL = 3;
  localparam int unsigned NEUR [NL+1] = '{16, 64, 32, 5};
  localparam int BI = 3, FI = 2, B = 3, F = 2, A = 2, D = 2;
  localparam int NIN = NEUR[0], NOUT = NEUR[NL];

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic rst_n, in_valid, out_valid;
  logic [NIN*BI-1:0] x;
  logic [NOUT*B-1:0] y;

  sparselut_net #(.NUM_LAYERS(NL), .NEURONS(NEUR), .BETA_IN(BI), .F_IN(FI), .BETA(B),
                  .F(F), .A(A), .DEGREE(D)) dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .x(x), .out_valid(out_valid), .y(y));

  int checks = 0, failures = 0;
  int n_b2b = 0, n_bubble = 0, n_flush = 0, n_results = 0, n_nonzero = 0, n_changed = 0;
  logic [NOUT*B-1:0] last_y = '0;
  int exp_q[$][];
  bit vld_q[$];
  int neur[];

  // Fill the expectation queues for the clocks before the first input can
  // reach the output: a vector captured at one clock edge leaves the last of
  // the NL registers NL-1 edges later.
  task automatic prime();
    int z[];
    z = new[NOUT];
    for (int i = 0; i < NL - 1; i++) begin
      exp_q.push_back(z);
      vld_q.push_back(1'b0);
    end
  endtask

  task automatic fail(string msg);
    failures++;
    if (failures < 10) $display("FAIL: %s", msg);
  endtask

  task automatic need(int count, string what);
    checks++;
    $display("%-34s %0d", what, count);
    if (count == 0) fail({what, " never happened"});
  endtask

  initial begin
    int xi[], yo[], e[];
    bit prev_out = 0;
    neur = new[NL+1];
    foreach (neur[i]) neur[i] = NEUR[i];
    ev_sub_neg = 0; ev_sub_sat = 0; ev_relu_zero = 0; ev_act_sat = 0;
    rst_n = 1'b0; in_valid = 1'b0; x = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    prime();
    for (int t = 0; t < 1500; t++) begin
      if (t == 700) begin
        // Reset in mid-stream: whatever is in flight is dropped.
        rst_n = 1'b0;
        in_valid = 1'b1;
        @(posedge clk);
        #1;
        checks++;
        if (out_valid) fail("out_valid high during reset");
        rst_n = 1'b1;
        exp_q.delete(); vld_q.delete();
        prime();
        n_flush++;
      end
      in_valid = ($urandom % 8) != 0;
      xi = new[NIN];
      for (int j = 0; j < NIN; j++) begin
        xi[j] = int'($urandom % (2 ** BI));
        x[j*BI +: BI] = BI'(xi[j]);
      end
      if (in_valid) net_eval(SEED0, neur, BI, FI, B, F, A, D, xi, yo);
      else yo = new[NOUT];
      exp_q.push_back(yo);
      vld_q.push_back(in_valid);
      @(posedge clk);
      #1;
      e = exp_q.pop_front();
      checks++;
      if (out_valid != vld_q.pop_front()) fail($sformatf("out_valid wrong at step %0d", t));
      if (out_valid) begin
        n_results++;
        if (prev_out) n_b2b++;
        if (y != '0) n_nonzero++;
        if (y != last_y) n_changed++;
        last_y = y;
        for (int c = 0; c < NOUT; c++) begin
          checks++;
          if (int'(y[c*B +: B]) != e[c])
            fail($sformatf("step %0d output %0d: got %0d expected %0d", t, c, y[c*B +: B], e[c]));
        end
      end else if (rst_n) n_bubble++;
      prev_out = out_valid;
    end
    need(n_results, "results checked");
    need(n_nonzero, "results with a non-zero output");
    need(n_changed, "results differing from the one before");
    need(n_b2b, "back-to-back results");
    need(n_bubble, "bubbles in the output stream");
    need(n_flush, "pipeline flushed by reset");
    need(int'(ev_sub_neg), "negative sub-neuron results");
    need(int'(ev_sub_sat), "sub-neuron quantiser saturations");
    need(int'(ev_relu_zero), "ReLU clips to zero");
    need(int'(ev_act_sat), "activation saturations");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
