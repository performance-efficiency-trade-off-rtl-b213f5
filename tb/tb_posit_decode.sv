// tb_posit_decode: self-checking testbench of posit_decode.
//
// For every 8-bit pattern except Not-a-Real, and for es = 0, 1 and 2, the
// decoded sign, scale factor and fraction must rebuild the value that an
// independent bit-by-bit decoder (dp_ref_pkg::posit_val) gives:
// (-1)^sign * frac * 2^(sf - FW).  The exponent output must equal the low ES
// bits of the scale factor, and the hidden bit must equal "nonzero".  A
// watchdog ends the run if it hangs.
module tb_posit_decode;
  import dp_ref_pkg::*;

  int checks = 0, failures = 0;
  logic [7:0] p;

  logic       s0, s1, s2, nz0, nz1, nz2;
  logic signed [5:0] sf0;
  logic signed [5:0] sf1;
  logic signed [6:0] sf2;
  logic [0:0] e0, e1;
  logic [1:0] e2;
  logic [5:0] f0;   // N-3-ES = 5 stored bits + hidden
  logic [4:0] f1;
  logic [3:0] f2;

  posit_decode #(.N(8), .ES(0)) u_es0 (.posit(p), .sign(s0), .nzero(nz0), .sf(sf0), .exp(e0), .frac(f0));
  posit_decode                  u_es1 (.posit(p), .sign(s1), .nzero(nz1), .sf(sf1), .exp(e1), .frac(f1));
  posit_decode #(.N(8), .ES(2)) u_es2 (.posit(p), .sign(s2), .nzero(nz2), .sf(sf2), .exp(e2), .frac(f2));

  task automatic check(string tag, int es, logic s, logic nz, int sf, int e, big_t f, int fw);
    big_t got, want;
    want = posit_val(32'(p), 8, es, 64);
    got  = shl(f, sf - fw + 64);
    if (s) got = -got;
    checks++;
    if (got != want || nz != (p != 0)) begin
      failures++;
      $display("FAIL %s: p=%h sign=%0b sf=%0d frac=%0d", tag, p, s, sf, f);
    end
    if (es > 0 && p != 0) begin
      checks++;
      if (e != (sf & ((1 << es) - 1))) begin
        failures++;
        $display("FAIL %s: p=%h exp=%0d sf=%0d", tag, p, e, sf);
      end
    end
  endtask

  initial begin
    for (int i = 0; i < 256; i++) begin
      if (i == 8'h80) continue;
      p = 8'(i);
      #1;
      check("es0", 0, s0, nz0, int'(sf0), 0,        big_t'(f0), 5);
      check("es1", 1, s1, nz1, int'(sf1), int'(e1), big_t'(f1), 4);
      check("es2", 2, s2, nz2, int'(sf2), int'(e2), big_t'(f2), 3);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
