// dp_ref_pkg: reference arithmetic for the EMAC testbenches.
//
// Values are exact integers in a 128-bit signed type, scaled by a power of
// two chosen by the caller, so dot products can be formed without any
// rounding and compared against the hardware.  The decoders here scan the
// bit patterns bit by bit and the rounding references search the whole code
// space for the neighbours of a value, so they share no structure with the
// RTL.
package dp_ref_pkg;

  typedef logic signed [127:0] big_t;

  function automatic big_t shl(big_t v, int s);
    return (s >= 0) ? (v <<< s) : (v >>> (-s));
  endfunction

  // ---------------------------------------------------------------- posit --
  // Value of an n-bit posit p (es exponent bits) times 2^sc.
  function automatic big_t posit_val(logic [31:0] p, int n, int es, int sc);
    logic [31:0] mask, x;
    bit   s, r;
    int   i, run, k, e, fb;
    big_t mant, v;
    mask = (32'd1 << n) - 1;
    p    = p & mask;
    if (p == 0) return '0;
    s = p[n-1];
    x = s ? ((~p + 1) & mask) : p;
    i = n - 2;
    r = x[i];
    run = 0;
    while (i >= 0 && x[i] == r) begin
      run++;
      i--;
    end
    i--;                                   // terminator
    k = r ? run - 1 : -run;
    e = 0;
    for (int j = 0; j < es; j++) begin
      e = e * 2;
      if (i >= 0) begin
        e = e + int'(x[i]);
        i--;
      end
    end
    fb   = (i >= 0) ? i + 1 : 0;
    mant = (big_t'(1) <<< fb) + big_t'(x & ((32'd1 << fb) - 1));
    v    = shl(mant, k * (1 << es) + e - fb + sc);
    return s ? -v : v;
  endfunction

  // Round x (scaled by 2^sc) to an n-bit posit: nearest by the midpoints
  // that the (n+1)-bit posits define, ties to even; clip to [minpos, maxpos].
  function automatic logic [31:0] posit_round(big_t x, int n, int es, int sc);
    bit   s;
    big_t a, lo, hi, mid;
    logic [31:0] b, body, mask;
    mask = (32'd1 << n) - 1;
    if (x == 0) return 0;
    s = (x < 0);
    a = s ? -x : x;
    if (a >= posit_val((32'd1 << (n - 1)) - 1, n, es, sc)) body = (32'd1 << (n - 1)) - 1;
    else if (a <= posit_val(1, n, es, sc)) body = 1;
    else begin
      body = 0;
      for (b = 1; b < (32'd1 << (n - 1)) - 1; b++) begin
        lo = posit_val(b, n, es, sc);
        hi = posit_val(b + 1, n, es, sc);
        if (a >= lo && a < hi) begin
          mid = posit_val({b[30:0], 1'b1}, n + 1, es, sc);
          if (a < mid)      body = b;
          else if (a > mid) body = b + 1;
          else              body = b[0] ? b + 1 : b;
          break;
        end
      end
    end
    return s ? ((~body + 1) & mask) : body;
  endfunction

  // ---------------------------------------------------------------- float --
  // Value of a float (we, wf; subnormals; no inf/NaN) in units of its min.
  function automatic big_t float_val(logic [31:0] f, int we, int wf);
    int   e;
    big_t m, v;
    e = int'((f >> wf) & ((32'd1 << we) - 1));
    m = big_t'(f & ((32'd1 << wf) - 1));
    v = (e == 0) ? m : shl(m + (big_t'(1) <<< wf), e - 1);
    return f[we + wf] ? -v : v;
  endfunction

  // Round x (in units of min^2) to the float format: nearest, ties to even
  // code, clipped at max (exponent field 2^we-2, fraction all ones).
  function automatic logic [31:0] float_round(big_t x, int we, int wf);
    int   bias, sh;
    bit   s;
    big_t a, lo, hi;
    logic [31:0] c, maxcode;
    bias    = (1 << (we - 1)) - 1;
    sh      = bias + wf - 1;               // min^2 units per min unit
    maxcode = (((32'd1 << we) - 2) << wf) | ((32'd1 << wf) - 1);
    s = (x < 0);
    a = s ? -x : x;
    if (a == 0) return 0;
    if (a >= shl(float_val(maxcode, we, wf), sh)) c = maxcode;
    else begin
      c = 0;
      for (logic [31:0] i = 0; i < maxcode; i++) begin
        lo = shl(float_val(i, we, wf), sh);
        hi = shl(float_val(i + 1, we, wf), sh);
        if (a >= lo && a < hi) begin
          if (2 * a < lo + hi)      c = i;
          else if (2 * a > lo + hi) c = i + 1;
          else                      c = i[0] ? i + 1 : i;
          break;
        end
      end
    end
    return (32'(s) << (we + wf)) | c;
  endfunction

endpackage
