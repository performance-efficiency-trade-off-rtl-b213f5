// tb_lzd: self-checking testbench of lzd.
//
// Checks a 60-bit detector (the width of the default posit quire) against a
// bit-by-bit count for every single-one word, words with random bits below a
// leading one, and zero; and an 8-bit detector exhaustively.  A watchdog
// ends the run if it hangs.
module tb_lzd;
  int checks = 0, failures = 0;

  logic [59:0] in60;
  logic [5:0]  zc60;
  logic        z60;
  logic [7:0]  in8;
  logic [3:0]  zc8;
  logic        z8;

  lzd #(.W(60)) u_w60 (.in(in60), .zc(zc60), .all_zero(z60));
  lzd          u_w8  (.in(in8),  .zc(zc8),  .all_zero(z8));

  function automatic int ref_count(logic [63:0] v, int w);
    for (int i = w - 1; i >= 0; i--) if (v[i]) return w - 1 - i;
    return w;
  endfunction

  task automatic check60(logic [59:0] v);
    in60 = v;
    #1;
    checks++;
    if (int'(zc60) != ref_count(64'(v), 60) || z60 != (v == 0)) begin
      failures++;
      $display("FAIL: lzd60(%h) = %0d/%0b", v, zc60, z60);
    end
  endtask

  initial begin
    check60('0);
    for (int i = 0; i < 60; i++) begin
      check60(60'd1 << i);
      check60((60'd1 << i) | (60'({$urandom, $urandom}) & ((60'd1 << i) - 1)));
    end
    for (int i = 0; i < 256; i++) begin
      in8 = 8'(i);
      #1;
      checks++;
      if (int'(zc8) != ref_count(64'(i), 8) || z8 != (i == 0)) begin
        failures++;
        $display("FAIL: lzd8(%h) = %0d", i, zc8);
      end
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
