// float_emac: floating point exact multiply-and-accumulate (Deep Positron EMAC).
//
// Operands are N = 1+WE+WF bit floats (sign, WE-bit biased exponent, WF-bit
// fraction) with subnormals and without infinities or NaNs: every pattern is
// a finite real.  Exponent bias BIAS = 2^(WE-1)-1, largest magnitude
// max = 2^(EXPMAX-BIAS)*(2-2^-WF) with EXPMAX = 2^WE-2, smallest
// min = 2^(1-BIAS-WF).  Products are summed exactly in a WA-bit fixed-point
// accumulator whose LSB weighs min^2.
//
// Pipeline (three stages):
//   1. multiply   : subnormal detection (a zero exponent field means no hidden
//                   bit and an effective exponent of 1), mantissa product
//                   mp = ms_w*ms_a (2WF+2 bits), exponent sum
//                   ep = e_w + e_a + sub_w + sub_a + 1 (WE+1 bits, at least
//                   3), sign xor; {sign, ep, mp} (2WF+WE+4 bits) is
//                   registered with the bias and control bits.
//   2. accumulate : the product is two's complemented (2WF+3 bits) and
//                   shifted left by ep-3 into the accumulator.  The first
//                   product of a dot product adds to the bias instead of the
//                   accumulator: the bias mantissa, padded with WF zero bits,
//                   is shifted left by S-3 with S = e_b + sub_b + BIAS + 1.
//   3. convert    : combinational.  The accumulator is made a magnitude, its
//                   leading one found with an LZD, the WF bits below it kept
//                   and rounded to nearest, ties to even (guard and sticky
//                   bits).  Results below the smallest normal leave the
//                   exponent field at 0 (subnormal); results beyond max are
//                   clipped to +-max.  Rounding carries into the exponent.
//
// Interface and timing are those of fixed_emac: one operand pair per cycle,
// in_ctl.first samples the bias, out_valid pulses two cycles after the pair
// marked in_ctl.last, `result` holds until the next product is accumulated.
//
// From the paper: the decode, multiply and fixed-point conversion equations,
// the accumulator width and the normalise/round/clip chain of its floating
// point EMAC figure.  Choices of this design: the handshake and reset; the
// paper's conversion back (its footnote says it omits overflow handling and
// its e_r = EXPMAX - zc assumes a particular accumulator width) is rewritten
// to place the leading one at any position, to produce subnormals and to clip
// at max.  The bias shift includes WF extra fraction bits so that the bias
// lands on the accumulator's LSB weight of min^2.  An exponent field of all
// ones is decoded as an ordinary finite number.
module float_emac
  import dp_pkg::*;
#(
  parameter int WE = 4,
  parameter int WF = 3,
  parameter int N  = 1 + WE + WF,
  parameter int K  = 784,
  parameter int WA = kulisch_width(K, float_ratio_log2(WE, WF))
) (
  input  logic          clk,
  input  logic          rst_n,
  input  emac_ctl_t     in_ctl,
  input  logic [N-1:0]  weight,
  input  logic [N-1:0]  activation,
  input  logic [N-1:0]  bias,
  output logic          out_valid,
  output logic [N-1:0]  result
);

  localparam int BIASC  = (2 ** (WE - 1)) - 1;
  localparam int EXPMAX = (2 ** WE) - 2;
  localparam int PMIN   = BIASC + 2 * WF - 1;  // LSB index of the smallest normal's hidden bit
  localparam logic [WE+WF-1:0] MAXCODE = {WE'(EXPMAX), {WF{1'b1}}};
  localparam int ZW     = $clog2(WA + 1);

  // ---- stage 1: subnormal detection and multiply --------------------------
  logic [WE-1:0] e_w, e_a;
  logic [WF-1:0] m_w, m_a;
  logic          sub_w, sub_a;
  logic [WF:0]   ms_w, ms_a;

  always_comb begin
    e_w   = weight[WE+WF-1:WF];
    e_a   = activation[WE+WF-1:WF];
    m_w   = weight[WF-1:0];
    m_a   = activation[WF-1:0];
    sub_w = ~|e_w;
    sub_a = ~|e_a;
    ms_w  = {~sub_w, m_w};   // hidden bit
    ms_a  = {~sub_a, m_a};
  end

  emac_ctl_t       ctl_q;
  logic            sp_q;
  logic [WE:0]     ep_q;
  logic [2*WF+1:0] mp_q;
  logic [N-1:0]    bias_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ctl_q  <= '0;
      sp_q   <= 1'b0;
      ep_q   <= '0;
      mp_q   <= '0;
      bias_q <= '0;
    end else begin
      ctl_q <= in_ctl;
      if (in_ctl.valid) begin
        sp_q <= weight[N-1] ^ activation[N-1];
        mp_q <= ms_w * ms_a;
        ep_q <= (WE+1)'(e_w) + (WE+1)'(e_a) + (WE+1)'(sub_w) + (WE+1)'(sub_a) + (WE+1)'(1);
        if (in_ctl.first) bias_q <= bias;
      end
    end
  end

  // ---- stage 2: conversion to fixed point and accumulation ----------------
  logic signed [2*WF+2:0] mfx;
  logic signed [WA-1:0]   prod_fx, bias_fx, acc_base, acc;
  logic [WE-1:0]          e_b;
  logic                   sub_b;
  logic signed [2*WF+2:0] mb;
  logic [WE+1:0]          s_b;

  always_comb begin
    mfx     = sp_q ? -$signed({1'b0, mp_q}) : $signed({1'b0, mp_q});
    prod_fx = WA'(mfx) <<< (ep_q - (WE+1)'(3));
    e_b     = bias_q[WE+WF-1:WF];
    sub_b   = ~|e_b;
    mb      = (2*WF+3)'($signed({1'b0, ~sub_b, bias_q[WF-1:0], {WF{1'b0}}}));
    mb      = bias_q[N-1] ? -mb : mb;
    s_b     = (WE+2)'(e_b) + (WE+2)'(sub_b) + (WE+2)'(BIASC + 1);
    bias_fx = WA'(mb) <<< (s_b - (WE+2)'(3));
    acc_base = ctl_q.first ? bias_fx : acc;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc       <= '0;
      out_valid <= 1'b0;
    end else begin
      if (ctl_q.valid) acc <= acc_base + prod_fx;
      out_valid <= ctl_q.valid & ctl_q.last;
    end
  end

  // ---- stage 3: convert back to floating point -----------------------------
  logic          s_r;
  logic [WA-1:0] mag, shifted, sticky_mask;
  logic [ZW-1:0] zc;
  logic          mag_zero;
  int            p, h, e_field, em;
  logic          guard, sticky, rc;
  logic [WF-1:0] m_r;

  lzd #(.W(WA), .ZW(ZW)) u_lzd (.in(mag), .zc(zc), .all_zero(mag_zero));

  always_comb begin
    s_r         = acc[WA-1];
    mag         = s_r ? WA'(-acc) : WA'(acc);
    p           = WA - 1 - int'(zc);              // leading one position
    h           = (p > PMIN) ? p : PMIN;          // hidden bit position
    e_field     = (p >= PMIN) ? (p - PMIN + 1) : 0;
    shifted     = mag >> (h - WF - 1);
    m_r         = shifted[WF:1];
    guard       = shifted[0];
    sticky_mask = (WA'(1) << (h - WF - 1)) - WA'(1);
    sticky      = |(mag & sticky_mask);
    rc          = guard & (m_r[0] | sticky);      // round check
    em          = e_field * (2 ** WF) + int'(m_r) + int'(rc);
    if (em > int'(MAXCODE)) em = int'(MAXCODE);   // clip at max
    result      = mag_zero ? '0 : {s_r, em[WE+WF-1:0]};
  end

endmodule
