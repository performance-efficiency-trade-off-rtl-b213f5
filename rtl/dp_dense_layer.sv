// dp_dense_layer: a dense (fully-connected) Deep Positron layer, the top.
//
// M neurons work in parallel on one dot product each.  The layer's input
// activations are streamed in one per cycle and broadcast to every neuron;
// each neuron receives its own weight for that input on weight[j] and its
// own bias on bias[j] (sampled with the first input).  After the last input
// the layer's M outputs appear together.  A network is built by feeding one
// layer's outputs, one per cycle, to the next layer as its activations.
//
// Parameters: FMT, N, ES, WE, Q choose the number format (defaults: 8-bit
// posit, es = 1); K is the longest dot product the accumulators are sized
// for (default 784, one MNIST image); M the number of neurons; RELU whether
// the layer is a hidden layer (ReLU applied) or an output layer.
//
// Interface: in_ctl (valid, first, last) qualifies `activation`, `weight` and
// `bias`.  One input per cycle; the next dot product may start right after
// the last input of the previous one.  out_valid pulses three cycles after
// the input marked last, with out[0..M-1]; the outputs hold until the next
// result.  Asynchronous active-low reset.
//
// From the paper: neurons made of EMACs with a ReLU stage, dense layers, the
// formats and their parameters.  Choices of this design: the input streaming,
// the broadcast of activations, M and K defaults; the storage of weights and
// the sequencing of layers are outside this module and come in on its ports.
module dp_dense_layer
  import dp_pkg::*;
#(
  parameter fmt_e FMT  = FMT_POSIT,
  parameter int   N    = 8,
  parameter int   ES   = 1,
  parameter int   WE   = 4,
  parameter int   Q    = 5,
  parameter int   K    = 784,
  parameter int   M    = 10,
  parameter bit   RELU = 1'b1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  emac_ctl_t           in_ctl,
  input  logic [N-1:0]        activation,
  input  logic [M-1:0][N-1:0] weight,
  input  logic [M-1:0][N-1:0] bias,
  output logic                out_valid,
  output logic [M-1:0][N-1:0] out
);

  logic [M-1:0] nvalid;

  for (genvar j = 0; j < M; j++) begin : g_neuron
    dp_neuron #(.FMT(FMT), .N(N), .ES(ES), .WE(WE), .Q(Q), .K(K), .RELU(RELU)) u_neuron (
      .clk, .rst_n, .in_ctl,
      .weight(weight[j]), .activation, .bias(bias[j]),
      .out_valid(nvalid[j]), .out(out[j]));
  end

  // All neurons run in lock step.
  assign out_valid = nvalid[0];

  a_lockstep: assert property (@(posedge clk) disable iff (!rst_n) (nvalid == '0) || (nvalid == '1));

endmodule
