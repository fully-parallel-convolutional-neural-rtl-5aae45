// sc_neuron: stochastic neuron with correlated-stream ReLU.
//
// Datapath, as in the paper: an array of N XNOR gates multiplies the bipolar
// input streams x* by the weight streams w* (which come from a different
// random source, so the product is a true multiplication); the APC adds the
// N product bits into a two's complement sum; a BSC turns the sum back into
// a stream by comparing it with R_x(t); an OR gate with the bipolar zero 0*
// (also made from R_x(t), hence fully correlated with the BSC output) gives
// y* = max(0*, sum), the ReLU, without clipping.
//
// This design's choices: the APC sum is registered before the BSC, so each
// layer is one pipeline stage and the output at cycle t reflects the inputs
// of cycle t-1; GAIN_SHIFT shifts the sum left before the comparison
// (default 0 = plain comparison) to give weight normalisation a gain knob.
// With GAIN_SHIFT = 0 the output's bipolar value is about sum/128.
//
// Interface: x, w are N stream bits; rx is R_x(t), zero_bit is 0*; y is
// the output stream. rst_n clears the sum register asynchronously.
module sc_neuron #(
  parameter int unsigned N          = 25,
  parameter int unsigned GAIN_SHIFT = 0
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic [N-1:0]                 x,
  input  logic [N-1:0]                 w,
  input  logic signed [sc_pkg::SC_W-1:0] rx,
  input  logic                         zero_bit,
  output logic                         y
);

  localparam int unsigned SW = $clog2(N + 1) + 1;
  localparam int unsigned GW = SW + GAIN_SHIFT;

  logic [N-1:0]          prod;
  logic signed [SW-1:0]  sum_d, sum_q;
  logic signed [GW-1:0]  sum_g;
  logic                  act;

  // Bipolar multiplication: one XNOR per input.
  assign prod = ~(x ^ w);

  apc #(.N(N)) u_apc (.bits(prod), .sum(sum_d));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) sum_q <= '0;
    else        sum_q <= sum_d;
  end

  assign sum_g = GW'(sum_q) <<< GAIN_SHIFT;

  bsc #(.IN_W(GW), .REF_W(sc_pkg::SC_W)) u_bsc (
    .in_val(sum_g), .ref_val(rx), .bit_out(act)
  );

  // ReLU: OR with the correlated bipolar zero.
  assign y = act | zero_bit;

endmodule
