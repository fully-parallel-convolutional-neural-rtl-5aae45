// apc: accumulative parallel counter, the adder of the stochastic neuron.
//
// Counts the ones among the N product bits of the current clock cycle and
// returns the bipolar sum 2*ones - N as a two's complement number, so that
// the sum's average over a bit-stream equals the sum of the bipolar values
// carried by the inputs. The count is a plain adder tree; the paper gives the
// APC's function, not its insides. Accumulation over a whole stream period
// is done where the network's results are read out (sc_counter), because all
// layers of the network run at the same time on every cycle.
// Interface: combinational; sum has $clog2(N+1)+1 bits.
module apc #(
  parameter int unsigned N = 25
) (
  input  logic [N-1:0]                   bits,
  output logic signed [$clog2(N+1):0]    sum
);

  localparam int unsigned CW = $clog2(N + 1);

  logic [CW-1:0] ones;

  always_comb begin
    ones = '0;
    for (int unsigned i = 0; i < N; i++) ones = ones + CW'(bits[i]);
  end

  assign sum = $signed({1'b0, ones} <<< 1) - $signed((CW+1)'(N));

endmodule
