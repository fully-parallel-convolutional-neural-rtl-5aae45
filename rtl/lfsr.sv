// lfsr: W-bit Fibonacci linear-feedback shift register, the pseudo-random
// number source R(t) of the stochastic network.
//
// Each clock the register shifts left and the parity of (state & TAPS)
// enters at bit 0. With a primitive polynomial the state visits all 2^W-1
// non-zero values once per period, so a comparator fed from it sees every
// reference value exactly once per 255 cycles. The paper uses exactly two
// such generators (R_x for data and neurons, R_w for weights); it does not
// give their polynomials, seeds or reset, which are this design's choice.
//
// Interface: r is the current state, read by users as two's complement.
// rst_n (asynchronous) and load (synchronous) both set the state to SEED.
// Timing: r changes one cycle after every clock edge; no latency beyond that.
module lfsr #(
  parameter int unsigned     W    = 8,
  parameter logic [W-1:0]    TAPS = 8'hB8,
  parameter logic [W-1:0]    SEED = 8'h01
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         load,
  output logic [W-1:0] r
);

  logic fb;
  assign fb = ^(r & TAPS);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    r <= SEED;
    else if (load) r <= SEED;
    else           r <= {r[W-2:0], fb};
  end

  initial assert (SEED != '0) else $error("lfsr: SEED must be non-zero");

endmodule
