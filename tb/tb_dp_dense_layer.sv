// tb_dp_dense_layer: end-to-end testbench of the layer top, dp_dense_layer.
//
// Three layers of M = 10 neurons run side by side on one control stream:
// the top exactly at its default parameters (8-bit posit, es = 1, K = 784,
// hidden layer with ReLU), and two copies changed only in format, fixed
// point and float.  A fourth layer, the posit output layer (no ReLU), takes
// the default layer's ten results, one per cycle, as its activations, so the
// pair forms a two-layer network.
//
// The run feeds one full 784-input dot product (a whole MNIST-sized input
// vector), then 60 short random ones, back to back or with gaps.  Every
// neuron output is compared with the exact reference (dp_fmt_ref_pkg), and
// every result must appear three cycles after the last input.  Counted, and
// required at least once: bias preload (every dot product), clipping to the
// largest magnitude, rounding, ReLU clearing a negative result, a negative
// output passed by the output layer, back-to-back dot products, float
// subnormal results and network results through the second layer.
module tb_dp_dense_layer;
  import dp_pkg::*;
  import dp_ref_pkg::*;
  import dp_fmt_ref_pkg::*;

  localparam int M  = 10;
  localparam int NL = 3;
  localparam fmt_e FMTS[NL] = '{FMT_POSIT, FMT_FIXED, FMT_FLOAT};

  logic clk = 1'b0, rst_n = 1'b0;
  emac_ctl_t ctl, ctl2;
  logic [7:0] act[NL];
  logic [M-1:0][7:0] wt[NL], bs[NL], outs[NL];
  logic ov[NL];
  logic [7:0] act2;
  logic [M-1:0][7:0] wt2, bs2, out2;
  logic ov2;

  // The top at its defaults.
  dp_dense_layer u_posit (.clk, .rst_n, .in_ctl(ctl), .activation(act[0]), .weight(wt[0]),
                          .bias(bs[0]), .out_valid(ov[0]), .out(outs[0]));
  dp_dense_layer #(.FMT(FMT_FIXED)) u_fixed (.clk, .rst_n, .in_ctl(ctl), .activation(act[1]),
                          .weight(wt[1]), .bias(bs[1]), .out_valid(ov[1]), .out(outs[1]));
  dp_dense_layer #(.FMT(FMT_FLOAT)) u_float (.clk, .rst_n, .in_ctl(ctl), .activation(act[2]),
                          .weight(wt[2]), .bias(bs[2]), .out_valid(ov[2]), .out(outs[2]));
  // Second (output) layer of the posit network.
  dp_dense_layer #(.RELU(1'b0)) u_out (.clk, .rst_n, .in_ctl(ctl2), .activation(act2),
                          .weight(wt2), .bias(bs2), .out_valid(ov2), .out(out2));

  always #5 clk = ~clk;

  int checks = 0, failures = 0, cyc = 0;
  int n_bias = 0, n_clip = 0, n_round = 0, n_relu = 0, n_negpass = 0, n_b2b = 0,
      n_subn = 0, n_net = 0, n_full = 0;
  logic [7:0] exp_q[NL][M][$];
  int due_q[$];
  // network: first-layer posit results waiting to enter the output layer
  logic [M-1:0][7:0] l1_q[$];
  logic [7:0] exp2_q[M][$];
  int due2_q[$];

  always @(posedge clk) cyc <= cyc + 1;

  // First-layer monitor.
  always @(negedge clk) begin
    if (rst_n) begin
      checks++;
      if (ov[1] != ov[0] || ov[2] != ov[0]) begin
        failures++;
        $display("FAIL: layers out of step at %0d", cyc);
      end
      if (ov[0]) begin
        int d;
        checks++;
        if (due_q.size() == 0) begin
          failures++;
          $display("FAIL: unexpected out_valid at %0d", cyc);
        end else begin
          d = due_q.pop_front();
          if (d != cyc) begin
            failures++;
            $display("FAIL: layer output at %0d expected %0d", cyc, d);
          end
          for (int f = 0; f < NL; f++)
            for (int j = 0; j < M; j++) begin
              logic [7:0] e;
              e = exp_q[f][j].pop_front();
              checks++;
              if (outs[f][j] !== e) begin
                failures++;
                $display("FAIL: fmt %0d neuron %0d out %h expected %h", f, j, outs[f][j], e);
              end
            end
          l1_q.push_back(outs[0]);
        end
      end
      if (ov2) begin
        int d;
        checks++;
        if (due2_q.size() == 0) begin
          failures++;
          $display("FAIL: unexpected output-layer valid");
        end else begin
          d = due2_q.pop_front();
          if (d != cyc) begin
            failures++;
            $display("FAIL: output layer at %0d expected %0d", cyc, d);
          end
          for (int j = 0; j < M; j++) begin
            logic [7:0] e;
            e = exp2_q[j].pop_front();
            checks++;
            if (out2[j] !== e) begin
              failures++;
              $display("FAIL: output neuron %0d out %h expected %h", j, out2[j], e);
            end
          end
          n_net++;
        end
      end
    end
  end

  function automatic logic [7:0] post(fmt_e f, big_t s, bit relu);
    logic [7:0] r;
    big_t lim;
    r = ref_round(f, s);
    lim = (f == FMT_FIXED) ? (big_t'(127) <<< Q) : ref_value(f, (f == FMT_FLOAT) ? 8'h77 : 8'h7F);
    if (s > lim || s < -lim) n_clip++;
    else if (ref_value(f, r) != s) n_round++;
    if (f == FMT_FLOAT && r[6:3] == 4'h0 && r[2:0] != 3'h0) n_subn++;
    if (r[7]) begin
      if (relu) begin
        n_relu++;
        r = '0;
      end else n_negpass++;
    end
    return r;
  endfunction

  // First-layer driver: one dot product of `len` inputs for all layers.
  // With `tiny`, the float layer gets operands near 2^-3 and 2^-4 and a zero
  // bias, so that its sums fall among the subnormals.
  task automatic dot(int len, int gap, bit tiny = 1'b0);
    big_t sum[NL][M];
    logic [7:0] a_s[NL][$];
    logic [M-1:0][7:0] w_s[NL][$];
    logic [M-1:0][7:0] b_v[NL];
    for (int f = 0; f < NL; f++) begin
      for (int j = 0; j < M; j++) begin
        b_v[f][j] = (tiny && FMTS[f] == FMT_FLOAT) ? 8'h00 : ref_rand(FMTS[f]);
        sum[f][j] = ref_bias(FMTS[f], b_v[f][j]);
      end
      for (int i = 0; i < len; i++) begin
        logic [M-1:0][7:0] wv;
        a_s[f].push_back((tiny && FMTS[f] == FMT_FLOAT) ? {1'b0, 4'd3, 3'($urandom)} : ref_rand(FMTS[f]));
        for (int j = 0; j < M; j++) begin
          wv[j] = (tiny && FMTS[f] == FMT_FLOAT) ? {1'($urandom), 4'd4, 3'($urandom)} : ref_rand(FMTS[f]);
          sum[f][j] += ref_prod(FMTS[f], wv[j], a_s[f][i]);
        end
        w_s[f].push_back(wv);
      end
    end
    for (int i = 0; i < len; i++) begin
      @(negedge clk);
      ctl = '{valid: 1'b1, first: (i == 0), last: (i == len - 1)};
      for (int f = 0; f < NL; f++) begin
        act[f] = a_s[f][i];
        wt[f]  = w_s[f][i];
        bs[f]  = (i == 0) ? b_v[f] : '0;
      end
      if (i == len - 1) due_q.push_back(cyc + 3);
    end
    n_bias++;
    for (int f = 0; f < NL; f++)
      for (int j = 0; j < M; j++) exp_q[f][j].push_back(post(FMTS[f], sum[f][j], 1'b1));
    if (gap == 0) n_b2b++;
    repeat (gap) begin
      @(negedge clk);
      ctl = '0;
    end
  endtask

  // Output-layer driver: streams each first-layer result vector through the
  // second layer, ten inputs per dot product.
  initial begin
    ctl2 = '0;
    act2 = '0;
    wt2  = '0;
    bs2  = '0;
    forever begin
      @(negedge clk);
      ctl2 = '0;
      if (l1_q.size() != 0) begin
        logic [M-1:0][7:0] x, bv;
        logic [M-1:0][7:0] wv[M];
        big_t s2[M];
        x = l1_q.pop_front();
        for (int j = 0; j < M; j++) begin
          bv[j] = ref_rand(FMT_POSIT);
          s2[j] = ref_bias(FMT_POSIT, bv[j]);
        end
        for (int i = 0; i < M; i++)
          for (int j = 0; j < M; j++) begin
            wv[i][j] = ref_rand(FMT_POSIT);
            s2[j] += ref_prod(FMT_POSIT, wv[i][j], x[i]);
          end
        for (int i = 0; i < M; i++) begin
          if (i != 0) @(negedge clk);
          ctl2 = '{valid: 1'b1, first: (i == 0), last: (i == M - 1)};
          act2 = x[i];
          wt2  = wv[i];
          bs2  = bv;
          if (i == M - 1) due2_q.push_back(cyc + 3);
        end
        for (int j = 0; j < M; j++) exp2_q[j].push_back(post(FMT_POSIT, s2[j], 1'b0));
      end
    end
  end

  initial begin
    ctl = '0;
    for (int f = 0; f < NL; f++) begin
      act[f] = '0; wt[f] = '0; bs[f] = '0;
    end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    dot(784, 0);                       // one full-size dot product per neuron
    n_full++;
    for (int t = 0; t < 4; t++) dot(1 + t, 1, 1'b1);
    for (int t = 0; t < 60; t++) dot(10 + int'($urandom_range(0, 10)), int'($urandom_range(0, 2)));
    @(negedge clk);
    ctl = '0;
    repeat (40 * M) @(negedge clk);
    checks++;
    if (due_q.size() != 0 || due2_q.size() != 0 || l1_q.size() != 0) begin
      failures++;
      $display("FAIL: results missing");
    end
    $display("mechanisms: bias=%0d clip=%0d round=%0d relu=%0d negpass=%0d b2b=%0d subnormal=%0d network=%0d full=%0d",
             n_bias, n_clip, n_round, n_relu, n_negpass, n_b2b, n_subn, n_net, n_full);
    checks++;
    if (n_bias == 0 || n_clip == 0 || n_round == 0 || n_relu == 0 || n_negpass == 0 ||
        n_b2b == 0 || n_subn == 0 || n_net == 0 || n_full == 0) begin
      failures++;
      $display("FAIL: a mechanism was never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
