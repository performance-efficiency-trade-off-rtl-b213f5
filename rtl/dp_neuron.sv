// dp_neuron: one Deep Positron neuron, an EMAC followed by a ReLU stage.
//
// FMT selects the numerical format, and with it which EMAC is built:
// FMT_POSIT (N bits, ES exponent bits; the default, 8-bit posit with es=1),
// FMT_FLOAT (1 sign, WE exponent, N-1-WE fraction bits) or FMT_FIXED (N bits,
// Q fraction bits).  The EMAC's three stages (multiply, accumulate,
// round) are followed by a fourth, registered stage: ReLU(x) = max(x, 0)
// when RELU=1 (hidden-layer neurons), a plain register otherwise (output
// neurons).  In all three formats the sign is the top bit and zero is the
// all-zeros pattern, so the ReLU clears any pattern with the top bit set;
// with RELU=1 the top bit of `out` is therefore always 0.
//
// Interface: the EMAC's (in_ctl valid/first/last, weight, activation, bias).
// out_valid pulses three cycles after the pair marked in_ctl.last, together
// with the registered `out`, which holds until the next result.
//
// From the paper: the three formats and the fourth ReLU stage for hidden
// neurons.  Choices of this design: format selection by parameter, the
// register after the ReLU, and reset.
module dp_neuron
  import dp_pkg::*;
#(
  parameter fmt_e FMT  = FMT_POSIT,
  parameter int   N    = 8,
  parameter int   ES   = 1,
  parameter int   WE   = 4,
  parameter int   Q    = 5,
  parameter int   K    = 784,
  parameter bit   RELU = 1'b1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  emac_ctl_t     in_ctl,
  input  logic [N-1:0]  weight,
  input  logic [N-1:0]  activation,
  input  logic [N-1:0]  bias,
  output logic          out_valid,
  output logic [N-1:0]  out
);

  logic         emac_valid;
  logic [N-1:0] emac_result;

  if (FMT == FMT_FIXED) begin : g_fixed
    fixed_emac #(.N(N), .Q(Q), .K(K)) u_emac (
      .clk, .rst_n, .in_ctl, .weight, .activation, .bias,
      .out_valid(emac_valid), .result(emac_result));
  end else if (FMT == FMT_FLOAT) begin : g_float
    float_emac #(.WE(WE), .WF(N - 1 - WE), .N(N), .K(K)) u_emac (
      .clk, .rst_n, .in_ctl, .weight, .activation, .bias,
      .out_valid(emac_valid), .result(emac_result));
  end else begin : g_posit
    posit_emac #(.N(N), .ES(ES), .K(K)) u_emac (
      .clk, .rst_n, .in_ctl, .weight, .activation, .bias,
      .out_valid(emac_valid), .result(emac_result));
  end

  // ---- stage 4: ReLU ---------------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out       <= '0;
    end else begin
      out_valid <= emac_valid;
      if (emac_valid) out <= (RELU && emac_result[N-1]) ? '0 : emac_result;
    end
  end

endmodule
