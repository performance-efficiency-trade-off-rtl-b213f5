// tb_workload_nets: two-layer networks shaped like the evaluated data sets,
// run end to end on the default layer.
//
// The hidden layer is dp_dense_layer at its defaults (ten 8-bit posit, es = 1,
// ReLU neurons, quires sized for 784 terms).  Its ten outputs are streamed,
// one per cycle, into a second dp_dense_layer with ReLU off, which plays the
// output (class score) layer.  Four network shapes are run, with input
// fan-ins of 4 (Iris), 30 (breast-cancer diagnostics), 117 (one-hot encoded
// mushroom attributes) and 784 (28x28 images); the output layer keeps the
// first 3, 2, 2 and 10 of its scores as classes.  The fan-ins are the usual
// sizes of those public data sets; hidden and output widths are this test's
// choice.  Weights, biases and inputs are random posits, since trained
// parameters are not available.  Every hidden and output value is compared
// with an exact reference, as is the index of the largest class score (the
// predicted class, ties to the lower index), and each layer's result must
// appear three cycles after its last input.
module tb_workload_nets;
  import dp_pkg::*;
  import dp_ref_pkg::*;
  import dp_fmt_ref_pkg::*;

  localparam int M = 10;

  logic clk = 1'b0, rst_n = 1'b0;
  emac_ctl_t ctl1, ctl2;
  logic [7:0] act1, act2;
  logic [M-1:0][7:0] wt1, bs1, out1, wt2, bs2, out2;
  logic ov1, ov2;

  dp_dense_layer hidden (.clk, .rst_n, .in_ctl(ctl1), .activation(act1), .weight(wt1),
                         .bias(bs1), .out_valid(ov1), .out(out1));
  dp_dense_layer #(.RELU(1'b0)) scores (.clk, .rst_n, .in_ctl(ctl2), .activation(act2),
                         .weight(wt2), .bias(bs2), .out_valid(ov2), .out(out2));

  always #5 clk = ~clk;

  int checks = 0, failures = 0, cyc = 0, samples = 0, class_checks = 0;
  always @(posedge clk) cyc <= cyc + 1;

  function automatic int argmax(logic [M-1:0][7:0] v, int c);
    int best = 0;
    for (int j = 1; j < c; j++)
      if (ref_value(FMT_POSIT, v[j]) > ref_value(FMT_POSIT, v[best])) best = j;
    return best;
  endfunction

  // Wait for a layer's out_valid and check its latency.
  task automatic wait_valid(bit second, int due);
    int t0 = cyc;
    do @(negedge clk); while (!(second ? ov2 : ov1) && cyc < t0 + 20);
    checks++;
    if (cyc != due) begin
      failures++;
      $display("FAIL: layer %0d result at %0d expected %0d", second + 1, cyc, due);
    end
  endtask

  task automatic sample(int fanin, int classes);
    big_t sum[M];
    logic [M-1:0][7:0] bv, eh, es, hv;
    logic [M-1:0][7:0] w2[M];
    int due;
    // Layer 1: fanin inputs.
    for (int j = 0; j < M; j++) begin
      bv[j]  = ref_rand(FMT_POSIT);
      sum[j] = ref_bias(FMT_POSIT, bv[j]);
    end
    for (int i = 0; i < fanin; i++) begin
      logic [M-1:0][7:0] wv;
      logic [7:0] av;
      av = ref_rand(FMT_POSIT);
      for (int j = 0; j < M; j++) begin
        wv[j] = ref_rand(FMT_POSIT);
        sum[j] += ref_prod(FMT_POSIT, wv[j], av);
      end
      @(negedge clk);
      ctl1 = '{valid: 1'b1, first: (i == 0), last: (i == fanin - 1)};
      act1 = av; wt1 = wv; bs1 = (i == 0) ? bv : '0;
      if (i == fanin - 1) due = cyc + 3;
    end
    for (int j = 0; j < M; j++) begin
      eh[j] = ref_round(FMT_POSIT, sum[j]);
      if (eh[j][7]) eh[j] = '0;
    end
    @(negedge clk);
    ctl1 = '0;
    wait_valid(1'b0, due);
    hv = out1;
    for (int j = 0; j < M; j++) begin
      checks++;
      if (hv[j] !== eh[j]) begin
        failures++;
        $display("FAIL: fan-in %0d hidden %0d = %h expected %h", fanin, j, hv[j], eh[j]);
      end
    end
    // Layer 2: the ten hidden outputs as inputs, reference on the expected ones.
    for (int j = 0; j < M; j++) begin
      bv[j]  = ref_rand(FMT_POSIT);
      sum[j] = ref_bias(FMT_POSIT, bv[j]);
    end
    for (int i = 0; i < M; i++) begin
      for (int j = 0; j < M; j++) begin
        w2[i][j] = ref_rand(FMT_POSIT);
        sum[j] += ref_prod(FMT_POSIT, w2[i][j], eh[i]);
      end
      @(negedge clk);
      ctl2 = '{valid: 1'b1, first: (i == 0), last: (i == M - 1)};
      act2 = hv[i]; wt2 = w2[i]; bs2 = (i == 0) ? bv : '0;
      if (i == M - 1) due = cyc + 3;
    end
    for (int j = 0; j < M; j++) es[j] = ref_round(FMT_POSIT, sum[j]);
    @(negedge clk);
    ctl2 = '0;
    wait_valid(1'b1, due);
    for (int j = 0; j < M; j++) begin
      checks++;
      if (out2[j] !== es[j]) begin
        failures++;
        $display("FAIL: fan-in %0d score %0d = %h expected %h", fanin, j, out2[j], es[j]);
      end
    end
    checks++;
    class_checks++;
    if (argmax(out2, classes) != argmax(es, classes)) begin
      failures++;
      $display("FAIL: fan-in %0d predicted class %0d expected %0d", fanin,
               argmax(out2, classes), argmax(es, classes));
    end
    samples++;
  endtask

  initial begin
    ctl1 = '0; act1 = '0; wt1 = '0; bs1 = '0;
    ctl2 = '0; act2 = '0; wt2 = '0; bs2 = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    repeat (10) sample(4, 3);      // Iris
    repeat (10) sample(30, 2);     // breast-cancer diagnostics
    repeat (5)  sample(117, 2);    // mushroom, one-hot
    repeat (3)  sample(784, 10);   // 28x28 images
    $display("samples=%0d class_checks=%0d", samples, class_checks);
    checks++;
    if (samples != 28) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
