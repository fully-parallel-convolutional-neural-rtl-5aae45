// sc_fc_layer: fully parallel, fully connected layer of stochastic neurons.
//
// N_OUT sc_neurons, each reading all N_IN input streams and its own N_IN
// weight streams; every neuron shares R_x(t) and 0*, so all outputs are
// mutually correlated and directly usable by a following layer whose weights
// come from the other random source. The layer is the paper's; the weight
// ordering is this design's choice.
//
// Interface: x[N_IN] input streams; w[N_OUT*N_IN] weight streams, neuron o
// using w[o*N_IN +: N_IN]; y[N_OUT] output streams.
// Timing: one register stage, y at cycle t reflects x, w at cycle t-1.
module sc_fc_layer #(
  parameter int unsigned N_IN       = 256,
  parameter int unsigned N_OUT      = 120,
  parameter int unsigned GAIN_SHIFT = 0
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic [N_IN-1:0]                x,
  input  logic [N_OUT*N_IN-1:0]          w,
  input  logic signed [sc_pkg::SC_W-1:0] rx,
  input  logic                           zero_bit,
  output logic [N_OUT-1:0]               y
);

  for (genvar o = 0; o < N_OUT; o++) begin : g_n
    sc_neuron #(.N(N_IN), .GAIN_SHIFT(GAIN_SHIFT)) u_neuron (
      .clk(clk), .rst_n(rst_n),
      .x(x), .w(w[o*N_IN +: N_IN]),
      .rx(rx), .zero_bit(zero_bit),
      .y(y[o])
    );
  end

endmodule
