// sc_maxpool: stochastic max-pooling over a window of K neuron outputs.
//
// All neuron outputs in the network are made by comparing with the same
// random number R_x(t), so they are fully correlated: at every cycle the
// stream of the largest value is 1 whenever any smaller one is. Under that
// condition a single OR gate gives the maximum of its inputs, cycle by
// cycle, with no counting and no latency. This is the paper's circuit
// (a 2x2 window, K = 4, in its LeNet-5). Combinational.
module sc_maxpool #(
  parameter int unsigned K = 4
) (
  input  logic [K-1:0] y_in,
  output logic         y_max
);

  assign y_max = |y_in;

endmodule
