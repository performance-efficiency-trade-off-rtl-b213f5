// posit_decode: data extraction of an N-bit posit with ES exponent bits.
//
// A posit is sign | regime (run of equal bits ended by the opposite bit) |
// up to ES exponent bits | fraction.  Its value is
//     (-1)^sign * 2^(2^ES * k) * 2^e * 1.f .
// Following the paper's decode algorithm: a negative input is two's
// complemented first; the first regime bit `rc` tells the regime sign; the
// word is inverted when rc=1 so that the regime run becomes leading zeros,
// whose count zc comes from an LZD; the regime and its terminator are then
// shifted out, leaving exponent then fraction.  k = rc ? zc-1 : -zc.
//
// Outputs: `sf` is the combined scale factor k*2^ES + e (two's complement),
// `frac` is the fraction with the hidden bit on top (hidden bit = input is
// nonzero), so the magnitude is frac * 2^(sf - FW).  Not-a-Real (100..0) is
// not treated specially, as in the paper (it decodes with a zero fraction).
// Purely combinational.
module posit_decode #(
  parameter int N  = 8,
  parameter int ES = 1,
  parameter int FW = N - 3 - ES,                 // stored fraction bits
  parameter int SW = $clog2(N) + 2 + ES,         // scale factor width
  parameter int EW = (ES > 0) ? ES : 1
) (
  input  logic [N-1:0]         posit,
  output logic                 sign,
  output logic                 nzero,
  output logic signed [SW-1:0] sf,
  output logic [EW-1:0]        exp,    // exponent field (0 when ES = 0)
  output logic [FW:0]          frac
);
  localparam int ZW = $clog2(N);

  logic [N-2:0] twos, inv;
  logic         rc;
  logic [ZW-1:0] zc;
  logic         zall;
  logic [N-2:0] tmp;
  logic signed [SW-1:0] k;

  lzd #(.W(N - 1), .ZW(ZW)) u_lzd (.in(inv), .zc(zc), .all_zero(zall));

  always_comb begin
    nzero = |posit;
    sign  = posit[N-1];
    twos  = ({(N-1){sign}} ^ posit[N-2:0]) + (N-1)'(sign);
    rc    = twos[N-2];
    inv   = {(N-1){rc}} ^ twos;
    // Shift the regime run and its terminator out: bits after the first two
    // regime bits are moved up by zc-1 (zc >= 1 always, inv[N-2] is 0).
    tmp   = (N-1)'({1'b0, twos[N-4:0]} << (zc - 1'b1));
    exp   = '0;
    if (ES > 0) exp = EW'(tmp[N-3-ES +: EW]);
    frac  = {nzero, tmp[N-4-ES:0]};
    k     = rc ? (SW'(zc) - SW'(1)) : -SW'(zc);
    sf    = nzero ? SW'(k * (2 ** ES)) + SW'(exp) : '0;
  end
endmodule
