// sc_pkg: constants and types shared by the stochastic-computing LeNet-5.
//
// Every value in the network is a bipolar stochastic bit-stream: a stream
// whose fraction p of ones encodes the number 2p-1 in [-1, 1]. Binary values
// (image pixels, weights, neuron sums) are 8-bit two's complement and are
// turned into streams by comparing them with an 8-bit pseudo-random number.
// The 8-bit resolution and the layer sizes (28x28 input, 6 and 16 5x5
// kernels, 2x2 pooling, 120-84-10 fully connected) follow the LeNet-5 the
// paper evaluates; the LFSR polynomials and seeds are this design's choice.
package sc_pkg;

  // Resolution of every binary-to-stochastic conversion.
  localparam int unsigned SC_W = 8;
  // One full period of an 8-bit maximal-length LFSR.
  localparam int unsigned SC_PERIOD = (1 << SC_W) - 1;

  typedef logic signed [SC_W-1:0] sc_word_t;

  // Maximal-length feedback masks (Fibonacci, shift left, bit 7 = x^8 term).
  // LFSR1 (R_x): x^8+x^6+x^5+x^4+1.  LFSR2 (R_w): x^8+x^4+x^3+x^2+1.
  localparam logic [SC_W-1:0] LFSR1_TAPS = 8'hB8;
  localparam logic [SC_W-1:0] LFSR2_TAPS = 8'h8E;
  localparam logic [SC_W-1:0] LFSR1_SEED = 8'h01;
  localparam logic [SC_W-1:0] LFSR2_SEED = 8'h5A;

  // Width of a bipolar APC sum of n bits: values -n..n.
  function automatic int unsigned apc_width(int unsigned n);
    return $clog2(n + 1) + 1;
  endfunction

endpackage
