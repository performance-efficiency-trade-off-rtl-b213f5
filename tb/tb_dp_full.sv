// tb_dp_full: the layer top at its default parameters, through full-size
// dot products.
//
// dp_dense_layer is instantiated with no parameter changes: ten 8-bit posit
// (es = 1) hidden neurons with 60-bit quires sized for 784-term dot products.
// Three complete dot products of 784 inputs each (one MNIST-sized input
// vector per neuron) are streamed back to back, then one with operands that
// drive the quire to its largest magnitude.  Each of the ten outputs is
// compared with the exact reference, and each result must appear three
// cycles after its last input.
module tb_dp_full;
  import dp_pkg::*;
  import dp_ref_pkg::*;
  import dp_fmt_ref_pkg::*;

  localparam int M = 10;
  localparam int KLEN = 784;

  logic clk = 1'b0, rst_n = 1'b0;
  emac_ctl_t ctl;
  logic [7:0] act;
  logic [M-1:0][7:0] wt, bs, outs;
  logic ov;

  dp_dense_layer dut (.clk, .rst_n, .in_ctl(ctl), .activation(act), .weight(wt), .bias(bs),
                      .out_valid(ov), .out(outs));

  always #5 clk = ~clk;

  int checks = 0, failures = 0, cyc = 0;
  logic [M-1:0][7:0] exp_q[$];
  int due_q[$];

  always @(posedge clk) cyc <= cyc + 1;

  always @(negedge clk) begin
    if (rst_n && ov) begin
      logic [M-1:0][7:0] e;
      int d;
      checks++;
      if (due_q.size() == 0) begin
        failures++;
        $display("FAIL: unexpected out_valid at %0d", cyc);
      end else begin
        e = exp_q.pop_front();
        d = due_q.pop_front();
        if (d != cyc) begin
          failures++;
          $display("FAIL: output at %0d expected %0d", cyc, d);
        end
        for (int j = 0; j < M; j++) begin
          checks++;
          if (outs[j] !== e[j]) begin
            failures++;
            $display("FAIL: neuron %0d out %h expected %h", j, outs[j], e[j]);
          end
        end
      end
    end
  end

  task automatic dot(bit extreme);
    big_t sum[M];
    logic [M-1:0][7:0] bv, e;
    for (int j = 0; j < M; j++) begin
      bv[j]  = extreme ? 8'h7F : ref_rand(FMT_POSIT);
      sum[j] = ref_bias(FMT_POSIT, bv[j]);
    end
    for (int i = 0; i < KLEN; i++) begin
      logic [M-1:0][7:0] wv;
      logic [7:0] av;
      av = extreme ? 8'h7F : ref_rand(FMT_POSIT);
      for (int j = 0; j < M; j++) begin
        wv[j] = extreme ? ((j % 2 == 0) ? 8'h7F : 8'h81) : ref_rand(FMT_POSIT);
        sum[j] += ref_prod(FMT_POSIT, wv[j], av);
      end
      @(negedge clk);
      ctl = '{valid: 1'b1, first: (i == 0), last: (i == KLEN - 1)};
      act = av;
      wt  = wv;
      bs  = (i == 0) ? bv : '0;
      if (i == KLEN - 1) due_q.push_back(cyc + 3);
    end
    for (int j = 0; j < M; j++) begin
      e[j] = ref_round(FMT_POSIT, sum[j]);
      if (e[j][7]) e[j] = '0;   // ReLU
    end
    exp_q.push_back(e);
  endtask

  initial begin
    ctl = '0; act = '0; wt = '0; bs = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    repeat (3) dot(1'b0);
    dot(1'b1);
    @(negedge clk);
    ctl = '0;
    repeat (8) @(negedge clk);
    checks++;
    if (due_q.size() != 0) begin
      failures++;
      $display("FAIL: %0d results missing", due_q.size());
    end
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
