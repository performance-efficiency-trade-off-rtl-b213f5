// lzd: leading-zeros detector.
//
// Counts the zeros above the most significant one of `in`.  The EMACs use it
// to find the leading one of the accumulator magnitude when converting back
// to the number format, and the posit decoder uses it to measure the run
// length of the regime field.  It is a purely combinational priority scan
// from the most significant bit; `zc` is W when `in` is zero, which is also
// flagged on `all_zero`.  The paper names the unit; the scan structure is this
// design's choice.
module lzd #(
  parameter int W  = 8,
  parameter int ZW = $clog2(W + 1)
) (
  input  logic [W-1:0]  in,
  output logic [ZW-1:0] zc,
  output logic          all_zero
);

  always_comb begin
    logic found;
    found = 1'b0;
    zc    = ZW'(W);
    for (int i = W - 1; i >= 0; i--) begin
      if (!found && in[i]) begin
        zc    = ZW'(W - 1 - i);
        found = 1'b1;
      end
    end
    all_zero = ~found;
  end

endmodule
