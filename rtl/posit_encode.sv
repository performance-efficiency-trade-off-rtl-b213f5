// posit_encode: quire-to-posit conversion of the posit EMAC (its third stage).
//
// The WA-bit two's complement quire `acc` holds a value in units of
// 2^-L, where 2^-L = minpos^2.  The chain of the paper's posit EMAC figure is
// followed: two's complement to a magnitude, normalise (LZD finds the leading
// one at position p, giving scale factor sf = p - L and the fraction bits
// below the leading one), clip, convergent rounding and encoding.
//
// Encoding: the regime k = floor(sf / 2^ES) and exponent e = sf mod 2^ES are
// laid out as the unbounded bit string regime|exponent|fraction by starting
// from "10" (k >= 0) or "01" (k < 0) and shifting right by k (filling with
// ones) or by -k-1 (filling with zeros).  The top N-1 bits are the posit
// body; the next bit is the guard and all lower bits the sticky; the body is
// rounded to nearest, ties to even.  This is rounding on the bit string, as
// the posit format defines it.  Clipping: magnitudes above maxpos give maxpos
// and nonzero magnitudes below minpos give minpos (posits neither overflow to
// Not-a-Real nor underflow to zero).  A negative result is the two's
// complement of the positive encoding.  Purely combinational.
//
// The paper's algorithm reaches the same encoding through its tmp1/tmp2
// shift-and-round steps; this module's shift-by-regime formulation is this
// design's choice.
module posit_encode #(
  parameter int N  = 8,
  parameter int ES = 1,
  parameter int L  = (2 ** ES) * 2 * (N - 2),
  parameter int WA = L + 12
) (
  input  logic signed [WA-1:0] acc,
  output logic [N-1:0]         result
);
  localparam int ZW    = $clog2(WA + 1);
  localparam int SFMAX = (2 ** ES) * (N - 2);
  localparam int VW    = 2 + ES + WA + N;   // regime start, exponent, fraction, room to shift

  logic          sgn, zero;
  logic [WA-1:0] mag, frac;
  logic [ZW-1:0] zc;
  int            sf, k, e;
  logic [VW-1:0] v;
  logic [N-2:0]  body;
  logic          guard, sticky, rnd;

  lzd #(.W(WA), .ZW(ZW)) u_lzd (.in(mag), .zc(zc), .all_zero(zero));

  always_comb begin
    sgn  = acc[WA-1];
    mag  = sgn ? WA'(-acc) : WA'(acc);
    sf   = WA - 1 - int'(zc) - L;
    frac = mag << (int'(zc) + 1);             // bits below the leading one
    k    = sf >>> ES;
    e    = sf - k * (2 ** ES);
    v    = (VW'(k >= 0 ? 2 : 1) << (VW - 2))
         | (VW'(e) << (WA + N))
         | (VW'(frac) << N);
    if (k >= 0) v = VW'($signed(v) >>> k);
    else        v = v >> (-k - 1);
    body   = v[VW-1 -: N-1];
    guard  = v[VW-N];
    sticky = |v[VW-N-1:0];
    rnd    = guard & (body[0] | sticky);
    if (sf > SFMAX)       body = '1;               // clip to maxpos
    else if (sf < -SFMAX) body = (N-1)'(1);        // clip to minpos
    else                  body = body + (N-1)'(rnd);
    if (zero)     result = '0;
    else if (sgn) result = -{1'b0, body};
    else          result = {1'b0, body};
  end

endmodule
