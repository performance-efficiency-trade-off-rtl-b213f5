// tb_posit_emac: self-checking testbench of posit_emac (8-bit posit, es = 1).
//
// Drives random and directed dot products through the EMAC at its default
// parameters, one operand pair per cycle, sometimes back to back and
// sometimes with idle cycles between them.  The expected result of each dot
// product is formed exactly with 128-bit integers (dp_ref_pkg) and rounded by
// a reference that searches the code space; it is compared with `result`
// when out_valid pulses, and out_valid must pulse exactly two cycles after
// the pair marked last (the EMAC's stated latency).  Counts how often the
// clipping, the rounding and an exact zero occurred and fails if any never
// did.  A watchdog ends the run if it hangs.
module tb_posit_emac;
  import dp_pkg::*;
  import dp_ref_pkg::*;

  localparam int N  = 8;
  localparam int ES = 1;
  localparam int L  = (2 ** ES) * 2 * (N - 2);      // quire LSB = 2^-L
  localparam logic [N-1:0] MAXV = 8'h7F, MINV = 8'h01, ONEV = 8'h40,
                           NEG_ONEV = 8'hC0, NEGMAXV = 8'h81;

  logic         clk = 1'b0;
  logic         rst_n = 1'b0;
  emac_ctl_t    ctl;
  logic [N-1:0] w, a, b;
  logic         ov;
  logic [N-1:0] res;

  posit_emac dut (.clk, .rst_n, .in_ctl(ctl), .weight(w), .activation(a), .bias(b),
             .out_valid(ov), .result(res));

  always #5 clk = ~clk;

  int checks = 0, failures = 0, cyc = 0;
  int n_clip = 0, n_round = 0, n_zero = 0, n_b2b = 0;
  logic [N-1:0] exp_q[$];
  int           due_q[$];

  always @(posedge clk) cyc <= cyc + 1;

  // Result monitor.
  always @(negedge clk) begin
    if (rst_n && ov) begin
      checks++;
      if (exp_q.size() == 0) begin
        failures++;
        $display("FAIL: unexpected out_valid at cycle %0d", cyc);
      end else begin
        logic [N-1:0] e;
        int d;
        e = exp_q.pop_front();
        d = due_q.pop_front();
        if (res !== e) begin
          failures++;
          $display("FAIL: result %h expected %h (cycle %0d)", res, e, cyc);
        end
        checks++;
        if (cyc != d) begin
          failures++;
          $display("FAIL: result at cycle %0d expected at %0d", cyc, d);
        end
      end
    end
  end

  function automatic big_t bias_exact(logic [N-1:0] v);
    return posit_val(v, N, ES, L);
  endfunction
  function automatic big_t prod_exact(logic [N-1:0] x, logic [N-1:0] y);
    return posit_val(x, N, ES, L / 2) * posit_val(y, N, ES, L / 2);
  endfunction
  function automatic logic [N-1:0] round_ref(big_t s);
    return N'(posit_round(s <<< 8, N, ES, L + 8));
  endfunction
  function automatic void count_mechanisms(big_t s, logic [N-1:0] e);
    big_t av;
    av = (s < 0) ? -s : s;
    if (s == 0) n_zero++;
    else if (av > posit_val(MAXV, N, ES, L) || av < posit_val(MINV, N, ES, L)) n_clip++;
    else if (posit_val(e, N, ES, L) != s) n_round++;
  endfunction
  // Operand mix: any pattern but Not-a-Real, values near one, extremes, zero.
  function automatic logic [N-1:0] rnd_val();
    logic [N-1:0] v;
    case ($urandom_range(0, 5))
      0, 1: begin
        v = N'($urandom);
        if (v == 8'h80) v = 8'h00;
      end
      2, 3: v = {1'($urandom), 2'b10, 5'($urandom)} ^ {1'b0, 7'($urandom_range(0, 3))};
      4:    v = $urandom_range(0, 1) ? 8'h7F : 8'h01;
      default: v = '0;
    endcase
    return v;
  endfunction

  // Drive one dot product; `gap` idle cycles follow it.
  task automatic dot(input logic [N-1:0] ws[$], input logic [N-1:0] as[$],
                     input logic [N-1:0] bv, input int gap);
    big_t sum;
    logic [N-1:0] e;
    sum = bias_exact(bv);
    foreach (ws[i]) sum += prod_exact(ws[i], as[i]);
    e = round_ref(sum);
    count_mechanisms(sum, e);
    for (int i = 0; i < ws.size(); i++) begin
      @(negedge clk);
      ctl = '{valid: 1'b1, first: (i == 0), last: (i == ws.size() - 1)};
      w = ws[i];
      a = as[i];
      b = (i == 0) ? bv : N'($urandom);
      if (i == ws.size() - 1) begin
        exp_q.push_back(e);
        due_q.push_back(cyc + 2);
      end
    end
    for (int g = 0; g < gap; g++) begin
      @(negedge clk);
      ctl = '0;
      w = N'($urandom);
      a = N'($urandom);
    end
    if (gap == 0) n_b2b++;
  endtask

  initial begin
    logic [N-1:0] ws[$], as[$];
    ctl = '0; w = '0; a = '0; b = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // random dot products
    for (int t = 0; t < 300; t++) begin
      int len;
      ws = {}; as = {};
      len = 1 + int'($urandom_range(0, 24));
      for (int i = 0; i < len; i++) begin
        ws.push_back(rnd_val());
        as.push_back(rnd_val());
      end
      dot(ws, as, rnd_val(), ($urandom_range(0, 2) == 0) ? 0 : int'($urandom_range(0, 3)));
    end
    // directed: the longest dot product (K terms) of max*max clips to max
    ws = {}; as = {};
    for (int i = 0; i < 784; i++) begin
      ws.push_back(MAXV);
      as.push_back(MAXV);
    end
    dot(ws, as, MAXV, 0);
    // directed: exact cancellation to zero
    ws = {MAXV, MAXV}; as = {ONEV, NEG_ONEV};
    dot(ws, as, '0, 0);
    // directed: smallest magnitudes
    ws = {MINV}; as = {MINV};
    dot(ws, as, '0, 2);
    // directed: negative max*max clips to the most negative value
    ws = {}; as = {};
    for (int i = 0; i < 40; i++) begin
      ws.push_back(MAXV);
      as.push_back(NEGMAXV);
    end
    dot(ws, as, NEGMAXV, 1);

    // drain
    repeat (6) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) begin
      failures++;
      $display("FAIL: %0d results never appeared", exp_q.size());
    end
    checks++;
    if (n_clip == 0 || n_round == 0 || n_zero == 0 || n_b2b == 0) begin
      failures++;
      $display("FAIL: mechanism not exercised clip=%0d round=%0d zero=%0d b2b=%0d",
               n_clip, n_round, n_zero, n_b2b);
    end
    $display("mechanisms: clip=%0d round=%0d zero=%0d back_to_back=%0d", n_clip, n_round, n_zero, n_b2b);
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
