// tb_dp_neuron: self-checking testbench of dp_neuron.
//
// Four neurons run in lock step on the same control stream: fixed point,
// float and posit hidden neurons (ReLU) and a posit output neuron (no ReLU),
// each with its own random operands in its own format, at the default
// widths.  Each result is checked against the exact reference dot product,
// rounded and passed through ReLU, and must appear exactly three cycles
// after the last input (two EMAC stages plus the ReLU register).  Counts the
// negative results the ReLU cleared and the ones the output neuron passed
// through, and fails if either never happened.
module tb_dp_neuron;
  import dp_pkg::*;
  import dp_ref_pkg::*;
  import dp_fmt_ref_pkg::*;

  localparam int NN = 4;
  localparam fmt_e FMTS [NN] = '{FMT_FIXED, FMT_FLOAT, FMT_POSIT, FMT_POSIT};
  localparam bit   RELUS[NN] = '{1'b1, 1'b1, 1'b1, 1'b0};

  logic clk = 1'b0, rst_n = 1'b0;
  emac_ctl_t ctl;
  logic [7:0] w[NN], a[NN], b[NN], res[NN];
  logic ov[NN];

  for (genvar g = 0; g < NN; g++) begin : g_dut
    dp_neuron #(.FMT(FMTS[g]), .RELU(RELUS[g])) dut (
      .clk, .rst_n, .in_ctl(ctl), .weight(w[g]), .activation(a[g]), .bias(b[g]),
      .out_valid(ov[g]), .out(res[g]));
  end

  always #5 clk = ~clk;

  int checks = 0, failures = 0, cyc = 0;
  int n_relu_clamp = 0, n_neg_pass = 0;
  logic [7:0] exp_q[NN][$];
  int due_q[$];

  always @(posedge clk) cyc <= cyc + 1;

  always @(negedge clk) begin
    if (rst_n) begin
      for (int g = 1; g < NN; g++) begin
        checks++;
        if (ov[g] != ov[0]) begin
          failures++;
          $display("FAIL: out_valid of neurons differ at cycle %0d", cyc);
        end
      end
      if (ov[0]) begin
        int d;
        checks++;
        if (due_q.size() == 0) begin
          failures++;
          $display("FAIL: unexpected out_valid");
        end else begin
          d = due_q.pop_front();
          if (d != cyc) begin
            failures++;
            $display("FAIL: output at cycle %0d expected %0d", cyc, d);
          end
          for (int g = 0; g < NN; g++) begin
            logic [7:0] e;
            e = exp_q[g].pop_front();
            checks++;
            if (res[g] !== e) begin
              failures++;
              $display("FAIL: neuron %0d out %h expected %h", g, res[g], e);
            end
          end
        end
      end
    end
  end

  task automatic dot(int len, int gap);
    big_t sum[NN];
    logic [7:0] ws[NN][$], as[NN][$], bv[NN];
    for (int g = 0; g < NN; g++) begin
      bv[g]  = ref_rand(FMTS[g]);
      sum[g] = ref_bias(FMTS[g], bv[g]);
      for (int i = 0; i < len; i++) begin
        ws[g].push_back(ref_rand(FMTS[g]));
        as[g].push_back(ref_rand(FMTS[g]));
        sum[g] += ref_prod(FMTS[g], ws[g][i], as[g][i]);
      end
    end
    for (int i = 0; i < len; i++) begin
      @(negedge clk);
      ctl = '{valid: 1'b1, first: (i == 0), last: (i == len - 1)};
      for (int g = 0; g < NN; g++) begin
        w[g] = ws[g][i];
        a[g] = as[g][i];
        b[g] = (i == 0) ? bv[g] : 8'($urandom);
      end
      if (i == len - 1) due_q.push_back(cyc + 3);
    end
    for (int g = 0; g < NN; g++) begin
      logic [7:0] r;
      r = ref_round(FMTS[g], sum[g]);
      if (r[7]) begin
        if (RELUS[g]) begin
          n_relu_clamp++;
          r = '0;
        end else n_neg_pass++;
      end
      exp_q[g].push_back(r);
    end
    repeat (gap) begin
      @(negedge clk);
      ctl = '0;
    end
  endtask

  initial begin
    ctl = '0;
    for (int g = 0; g < NN; g++) begin
      w[g] = '0; a[g] = '0; b[g] = '0;
    end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 200; t++) dot(1 + int'($urandom_range(0, 20)), int'($urandom_range(0, 2)));
    repeat (6) @(negedge clk);
    checks++;
    if (due_q.size() != 0 || n_relu_clamp == 0 || n_neg_pass == 0) begin
      failures++;
      $display("FAIL: pending=%0d relu_clamp=%0d neg_pass=%0d", due_q.size(), n_relu_clamp, n_neg_pass);
    end
    $display("mechanisms: relu_clamp=%0d negative_passed=%0d", n_relu_clamp, n_neg_pass);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
