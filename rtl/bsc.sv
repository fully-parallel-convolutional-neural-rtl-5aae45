// bsc: binary-to-stochastic converter, x(t) = {X > R(t)}.
//
// A single comparator. Both operands are two's complement: a value X in
// -2^(IN_W-1)..2^(IN_W-1)-1 compared with a uniformly distributed R gives a
// stream whose fraction of ones is about (X + 2^(REF_W-1)) / 2^REF_W, i.e.
// the bipolar number X / 2^(REF_W-1). With X = 0 the output is the bipolar
// zero 0* used by the ReLU. IN_W may exceed REF_W (a neuron sum); the
// reference is then sign-extended and sums beyond its range saturate the
// stream to all ones or all zeros.
//
// The comparator is the paper's; reading both sides as signed is this
// design's choice (it is what makes a grounded input give 0*).
// Interface: purely combinational, no clock.
module bsc #(
  parameter int unsigned IN_W  = 8,
  parameter int unsigned REF_W = 8
) (
  input  logic signed [IN_W-1:0]  in_val,
  input  logic signed [REF_W-1:0] ref_val,
  output logic                    bit_out
);

  localparam int unsigned CW = (IN_W > REF_W) ? IN_W : REF_W;

  logic signed [CW-1:0] a, b;
  assign a = CW'(in_val);
  assign b = CW'(ref_val);
  assign bit_out = (a > b);

endmodule
