// posit_emac: posit exact multiply-and-accumulate (Deep Positron EMAC).
//
// Operands are N-bit posits with ES exponent bits.  Every posit is an exact
// multiple of minpos = 2^-(2^ES*(N-2)), so every product is a multiple of
// minpos^2 = 2^-L, L = 2^ES*2*(N-2); the WA-bit quire holds the dot product
// as an integer count of 2^-L, exactly.  WA follows Eq. 2:
// clog2(K) + 2*L + 2.
//
// Pipeline (three stages):
//   1. multiply   : both operands are decoded (posit_decode); the fractions
//                   with hidden bit (FW+1 bits each) are multiplied, the
//                   product two's complemented by the xor of the signs
//                   (2(FW+1)+1 bits) and registered with the scale-factor sum
//                   sf_w + sf_a (clog2(N)+2+ES bits), the bias and control.
//   2. accumulate : the signed product is shifted left by sf + L - 2*FW, i.e.
//                   onto the quire's 2^-L grid, and added.  On the first
//                   product the addend is the decoded bias, shifted likewise,
//                   instead of the quire contents.
//   3. round      : combinational posit_encode (normalise, clip, round to
//                   nearest even on the bit string, encode).
//
// Interface and timing are those of fixed_emac: one operand pair per cycle,
// in_ctl.first samples the bias, out_valid pulses two cycles after the pair
// marked in_ctl.last, `result` holds until the next product is accumulated.
//
// From the paper: decoding, fraction multiply, scale-factor addition, shift
// into the quire, accumulation and the normalise/round/clip/encode chain of
// its posit EMAC figure and algorithms.  Not-a-Real is not handled, as in the
// paper.  Choice of this design: the paper normalises the product by shifting
// it right by its top bit and adding that bit to the scale factor; that
// shift can drop a product bit, so here the product keeps both integer bits
// and the shift into the quire accounts for them instead.  The product is
// shifted on a grid 2*FW bits finer than the quire and its low 2*FW bits are
// then dropped; they are always zero because products of posits are
// multiples of 2^-L.
module posit_emac
  import dp_pkg::*;
#(
  parameter int N  = 8,
  parameter int ES = 1,
  parameter int K  = 784,
  parameter int WA = kulisch_width(K, posit_ratio_log2(N, ES))
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

  localparam int FW = N - 3 - ES;              // stored fraction bits
  localparam int MW = FW + 1;                  // fraction with hidden bit
  localparam int SW = $clog2(N) + 2 + ES;      // scale factor width
  localparam int EW = (ES > 0) ? ES : 1;
  localparam int L  = posit_ratio_log2(N, ES); // quire LSB = 2^-L
  localparam int XW = WA + 2 * FW;             // shift grid, 2*FW finer

  // ---- stage 1: decode and multiply ----------------------------------------
  logic                 sign_w, sign_a, nz_w, nz_a;
  logic signed [SW-1:0] sf_w, sf_a;
  logic [EW-1:0]        exp_w, exp_a;
  logic [MW-1:0]        frac_w, frac_a;

  posit_decode #(.N(N), .ES(ES), .FW(FW), .SW(SW), .EW(EW)) u_dec_w (
    .posit(weight), .sign(sign_w), .nzero(nz_w), .sf(sf_w), .exp(exp_w), .frac(frac_w));
  posit_decode #(.N(N), .ES(ES), .FW(FW), .SW(SW), .EW(EW)) u_dec_a (
    .posit(activation), .sign(sign_a), .nzero(nz_a), .sf(sf_a), .exp(exp_a), .frac(frac_a));

  logic [2*MW-1:0]       frac_mult;
  logic signed [2*MW:0]  fracs_mult;

  always_comb begin
    frac_mult  = frac_w * frac_a;
    fracs_mult = (sign_w ^ sign_a) ? -$signed({1'b0, frac_mult}) : $signed({1'b0, frac_mult});
  end

  emac_ctl_t            ctl_q;
  logic signed [2*MW:0] fracs_q;
  logic signed [SW-1:0] sf_q;
  logic [N-1:0]         bias_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ctl_q   <= '0;
      fracs_q <= '0;
      sf_q    <= '0;
      bias_q  <= '0;
    end else begin
      ctl_q <= in_ctl;
      if (in_ctl.valid) begin
        fracs_q <= fracs_mult;
        sf_q    <= sf_w + sf_a;
        if (in_ctl.first) bias_q <= bias;
      end
    end
  end

  // ---- stage 2: shift into the quire and accumulate -------------------------
  logic                 sign_b, nz_b;
  logic signed [SW-1:0] sf_b;
  logic [EW-1:0]        exp_b;
  logic [MW-1:0]        frac_b;

  posit_decode #(.N(N), .ES(ES), .FW(FW), .SW(SW), .EW(EW)) u_dec_b (
    .posit(bias_q), .sign(sign_b), .nzero(nz_b), .sf(sf_b), .exp(exp_b), .frac(frac_b));

  logic signed [XW-1:0] prod_x, bias_x;
  logic signed [WA-1:0] prod_fx, bias_fx, acc_base, acc;
  logic signed [MW:0]   fracs_b;

  always_comb begin
    // product value = fracs_q * 2^(sf_q - 2FW); on the fine grid 2^-(L+2FW)
    prod_x   = XW'(fracs_q) <<< (int'(sf_q) + L);
    prod_fx  = prod_x[XW-1 -: WA];
    // bias value = frac_b * 2^(sf_b - FW)
    fracs_b  = sign_b ? -$signed({1'b0, frac_b}) : $signed({1'b0, frac_b});
    bias_x   = XW'(fracs_b) <<< (int'(sf_b) + L + FW);
    bias_fx  = bias_x[XW-1 -: WA];
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

  // ---- stage 3: convergent rounding and encoding ---------------------------
  posit_encode #(.N(N), .ES(ES), .L(L), .WA(WA)) u_enc (.acc(acc), .result(result));

endmodule
