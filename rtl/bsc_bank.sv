// bsc_bank: N binary-to-stochastic converters sharing one reference.
//
// Converts a whole array of 8-bit two's complement values (the image pixels
// or all the weights) into stream bits in the same cycle, one bsc comparator
// per value, all compared with the same random number. Sharing the reference
// is what the paper prescribes: the image uses R_x(t) and the weights R_w(t).
// The converters are generated in blocks of 256 only to keep each generate
// loop short. Combinational.
module bsc_bank #(
  parameter int unsigned N = 784
) (
  input  sc_pkg::sc_word_t               vals [N],
  input  logic signed [sc_pkg::SC_W-1:0] ref_val,
  output logic [N-1:0]                   bits
);

  localparam int unsigned BLK = 256;
  localparam int unsigned NB  = (N + BLK - 1) / BLK;

  for (genvar b = 0; b < NB; b++) begin : g_blk
    for (genvar j = 0; j < BLK; j++) begin : g_cmp
      if (b * BLK + j < N) begin : g_on
        bsc #(.IN_W(sc_pkg::SC_W), .REF_W(sc_pkg::SC_W)) u_bsc (
          .in_val(vals[b*BLK + j]), .ref_val(ref_val), .bit_out(bits[b*BLK + j])
        );
      end
    end
  end

endmodule
