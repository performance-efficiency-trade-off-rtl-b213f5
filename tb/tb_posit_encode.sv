// tb_posit_encode: self-checking testbench of posit_encode.
//
// For 8-bit posits with es = 0, 1 and 2, and for every pair of adjacent
// positive posits, the quire is set to exactly the rounding midpoint between
// them (the value of the 9-bit posit that lies between the two), and to one
// quire LSB below and above it, with both signs.  The result must be the
// lower neighbour, the even neighbour at the tie and the upper neighbour;
// the reference is dp_ref_pkg::posit_round.  Exact posit values, zero and
// values beyond maxpos and below minpos are also checked.
module tb_posit_encode;
  import dp_ref_pkg::*;

  localparam int L0 = 12, L1 = 24, L2 = 48;
  localparam int W0 = 2 * L0 + 12, W1 = 2 * L1 + 12, W2 = 2 * L2 + 12;

  logic signed [W0-1:0] q0;
  logic signed [W1-1:0] q1;
  logic signed [W2-1:0] q2;
  logic [7:0] r0, r1, r2;

  posit_encode #(.N(8), .ES(0), .L(L0), .WA(W0)) u_es0 (.acc(q0), .result(r0));
  posit_encode #(.N(8), .ES(1), .L(L1), .WA(W1)) u_es1 (.acc(q1), .result(r1));
  posit_encode #(.N(8), .ES(2), .L(L2), .WA(W2)) u_es2 (.acc(q2), .result(r2));

  int checks = 0, failures = 0, ties = 0;

  task automatic check(int es, big_t v);
    logic [7:0] got, want;
    int l;
    l = (es == 0) ? L0 : (es == 1) ? L1 : L2;
    q0 = W0'(v);
    q1 = W1'(v);
    q2 = W2'(v);
    #1;
    got  = (es == 0) ? r0 : (es == 1) ? r1 : r2;
    want = 8'(posit_round(v, 8, es, l));
    checks++;
    if (got !== want) begin
      failures++;
      $display("FAIL es=%0d quire=%0d: %h expected %h", es, v, got, want);
    end
  endtask

  initial begin
    for (int es = 0; es <= 2; es++) begin
      int l;
      l = (es == 0) ? L0 : (es == 1) ? L1 : L2;
      check(es, '0);
      check(es, big_t'(1));
      check(es, -big_t'(1));
      check(es, posit_val(32'h7F, 8, es, l) + 1);
      check(es, posit_val(32'h7F, 8, es, l) <<< 3);
      check(es, -(posit_val(32'h7F, 8, es, l) <<< 3));
      for (int p = 1; p < 127; p++) begin
        big_t mid;
        mid = posit_val(32'((p << 1) | 1), 9, es, l);
        ties++;
        for (int d = -1; d <= 1; d++) begin
          check(es, mid + d);
          check(es, -(mid + d));
        end
        check(es, posit_val(32'(p), 8, es, l));
        check(es, -posit_val(32'(p), 8, es, l));
      end
    end
    $display("ties tried: %0d", ties);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
