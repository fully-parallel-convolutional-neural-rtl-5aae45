// sc_counter: stochastic-to-binary converter for a network output.
//
// Counts the ones of a bit-stream while en is high. Run over one full LFSR
// period (255 cycles) the count c encodes the bipolar value (2c - 255)/255.
// The paper recovers binary values this way ("a digital counter is
// incremented every high pulse ... during a fixed period of time"); the
// width and the clear input are this design's.
// Interface: clr (synchronous) zeroes the count and wins over en.
// Timing: count is updated one cycle after the sampled bit.
module sc_counter #(
  parameter int unsigned CNT_W = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clr,
  input  logic             en,
  input  logic             bit_in,
  output logic [CNT_W-1:0] count
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)               count <= '0;
    else if (clr)             count <= '0;
    else if (en && bit_in)    count <= count + 1'b1;
  end

endmodule
