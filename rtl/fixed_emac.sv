// fixed_emac: fixed-point exact multiply-and-accumulate (Deep Positron EMAC).
//
// Operands are N-bit two's complement numbers with Q fraction bits.  Products
// are summed exactly in a WA-bit accumulator (Eq. 2 of the Kulisch width
// rule: WA = clog2(K) + 2*(N-1) + 2) and rounded only once, when the dot
// product is complete.
//
// Pipeline (three stages, as in the paper):
//   1. multiply   : weight*activation -> 2N-bit product register; the bias and
//                   the control bits travel alongside.
//   2. accumulate : the product is sign-padded to WA bits and added to the
//                   accumulator.  On the first product of a dot product the
//                   accumulator is instead loaded with bias<<Q + product, so
//                   the bias (an N-bit, Q-fraction number) is aligned with the
//                   2Q-fraction products.
//   3. round/clip : combinational from the accumulator: round to nearest,
//                   ties to even, at bit Q, then clip to the N-bit range
//                   [-2^(N-1), 2^(N-1)-1] and drop the extra Q fraction bits.
//
// Interface: present weight/activation with in_ctl.valid; mark the first pair
// with in_ctl.first (bias is sampled then) and the last with in_ctl.last.
// One pair per cycle may be accepted, back to back, with no gaps needed
// between dot products.  out_valid pulses two cycles after the last pair is
// presented; `result` holds the rounded value from then until the next
// product enters the accumulator.  Reset (rst_n low, asynchronous) clears the
// pipeline and accumulator.
//
// From the paper: the datapath of its fixed-point EMAC figure (multiply,
// register, pad, add, register, clip; bias padded and shifted by Q into the
// accumulator) and its rounding-and-clipping algorithm.  Choices of this
// design: the handshake, reset, when the bias is sampled, and round-to-
// nearest-even as the rounding mode.  The paper's positive-overflow test looks
// at sum[MSB-1:N+Q]; this design also counts bit N+Q-1 (the sign bit of the
// N-bit result) and applies the clip after rounding, so that no in-range
// pattern wraps.
module fixed_emac
  import dp_pkg::*;
#(
  parameter int N  = 8,
  parameter int Q  = 5,
  parameter int K  = 784,
  parameter int WA = kulisch_width(K, fixed_ratio_log2(N))
) (
  input  logic                clk,
  input  logic                rst_n,
  input  emac_ctl_t           in_ctl,
  input  logic signed [N-1:0] weight,
  input  logic signed [N-1:0] activation,
  input  logic signed [N-1:0] bias,
  output logic                out_valid,
  output logic signed [N-1:0] result
);

  // ---- stage 1: multiply -------------------------------------------------
  emac_ctl_t             ctl_q;
  logic signed [2*N-1:0] prod_q;
  logic signed [N-1:0]   bias_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ctl_q  <= '0;
      prod_q <= '0;
      bias_q <= '0;
    end else begin
      ctl_q <= in_ctl;
      if (in_ctl.valid) begin
        prod_q <= weight * activation;
        if (in_ctl.first) bias_q <= bias;
      end
    end
  end

  // ---- stage 2: accumulate -----------------------------------------------
  logic signed [WA-1:0] acc;
  logic signed [WA-1:0] prod_pad, bias_pad, acc_base;

  always_comb begin
    prod_pad = WA'(prod_q);
    bias_pad = WA'(bias_q) <<< Q;
    acc_base = ctl_q.first ? bias_pad : acc;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc       <= '0;
      out_valid <= 1'b0;
    end else begin
      if (ctl_q.valid) acc <= acc_base + prod_pad;
      out_valid <= ctl_q.valid & ctl_q.last;
    end
  end

  // ---- stage 3: round to nearest even, clip, normalise ----------------------
  localparam logic signed [WA-1:0] MAXV = WA'((2 ** (N - 1)) - 1);
  localparam logic signed [WA-1:0] MINV = -WA'(2 ** (N - 1));
  localparam logic [WA-1:0] STICKY_MASK = WA'((2 ** (Q - 1)) - 1);

  logic signed [WA-1:0] quo, rounded;
  logic guard, sticky, rnd;

  always_comb begin
    quo     = acc >>> Q;
    guard   = acc[Q-1];
    sticky  = |(acc & STICKY_MASK);
    rnd     = guard & (quo[0] | sticky);
    rounded = quo + WA'(rnd);
    if (rounded > MAXV)      result = MAXV[N-1:0];   // set to max positive
    else if (rounded < MINV) result = MINV[N-1:0];   // set to min negative
    else                     result = rounded[N-1:0];
  end

endmodule
