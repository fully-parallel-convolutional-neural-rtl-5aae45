// sc_lenet5: fully parallel stochastic-computing LeNet-5.
//
// The whole network is laid out in logic: one neuron per output value of
// every layer, all computing at once, one bit of every stream per clock.
// Only two random sources exist. LFSR1 gives R_x(t); it converts the image,
// produces the bipolar zero 0*, and is the reference of every neuron's
// output converter, so every activation stream in the chip is correlated
// with every other one (which is what lets OR gates compute ReLU and
// max-pooling). LFSR2 gives R_w(t), used only to convert the weights, so
// each weight stream is independent of every activation stream and the
// XNOR products in the next layer are true multiplications.
//
// Structure (defaults = the paper's LeNet-5 on 28x28 MNIST digits):
//   image 28x28x8b --BSC(R_x)--> conv 6@5x5 + 2x2 OR pool  -> 12x12x6
//                               conv 16@5x5 + 2x2 OR pool -> 4x4x16 = 256
//                               fc 256->120 -> fc 120->84 -> fc 84->10
//   weights 44,190 x 8b --BSC(R_w)--> weight streams of all five layers
//   10 output streams --> 8-bit ones counters over one 255-cycle period.
//
// The image and the weights are plain input arrays, held constant during an
// inference (in the paper the weights are fixed in the design; here any
// trained set can be tied on). Weight order: conv1, conv2, fc1, fc2, fc3,
// each as documented in sc_conv_pool_layer / sc_fc_layer. Values are
// two's complement; 127 stands for about +1 and -128 for -1.
//
// Handshake: pulse start while idle or done; busy rises, and done rises
// 261 cycles after the start cycle (1 load + 5 pipeline fill + 255 counting)
// with class_count[k] valid; a class's bipolar output is (2c-255)/255.
// Per-layer GAIN_SHIFT parameters (default 0) are this design's addition.
module sc_lenet5
  import sc_pkg::*;
#(
  parameter int unsigned IMG_H  = 28,
  parameter int unsigned IMG_W  = 28,
  parameter int unsigned K1     = 5,
  parameter int unsigned C1     = 6,
  parameter int unsigned K2     = 5,
  parameter int unsigned C2     = 16,
  parameter int unsigned POOL   = 2,
  parameter int unsigned F1     = 120,
  parameter int unsigned F2     = 84,
  parameter int unsigned F3     = 10,
  parameter int unsigned SHIFT1 = 0,
  parameter int unsigned SHIFT2 = 0,
  parameter int unsigned SHIFT3 = 0,
  parameter int unsigned SHIFT4 = 0,
  parameter int unsigned SHIFT5 = 0,
  localparam int unsigned NPIX = IMG_H * IMG_W,
  localparam int unsigned P1H  = (IMG_H - K1 + 1) / POOL,
  localparam int unsigned P1W  = (IMG_W - K1 + 1) / POOL,
  localparam int unsigned P2H  = (P1H - K2 + 1) / POOL,
  localparam int unsigned P2W  = (P1W - K2 + 1) / POOL,
  localparam int unsigned FCIN = C2 * P2H * P2W,
  localparam int unsigned NW1  = C1 * K1 * K1,
  localparam int unsigned NW2  = C2 * C1 * K2 * K2,
  localparam int unsigned NW3  = F1 * FCIN,
  localparam int unsigned NW4  = F2 * F1,
  localparam int unsigned NW5  = F3 * F2,
  localparam int unsigned NW   = NW1 + NW2 + NW3 + NW4 + NW5,
  localparam int unsigned CNT_W = $clog2(SC_PERIOD + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  sc_word_t          image   [NPIX],
  input  sc_word_t          weights [NW],
  output logic              busy,
  output logic              done,
  output logic [CNT_W-1:0]  class_count [F3],
  output logic [F3-1:0]     class_stream
);

  localparam int unsigned O2 = NW1;
  localparam int unsigned O3 = O2 + NW2;
  localparam int unsigned O4 = O3 + NW3;
  localparam int unsigned O5 = O4 + NW4;

  logic     lfsr_load, cnt_clr, cnt_en;
  sc_word_t rx, rw;
  logic     zero_bit;

  // ---- control and random sources -----------------------------------------
  inference_ctrl #(.FILL(5), .PERIOD(SC_PERIOD)) u_ctrl (
    .clk(clk), .rst_n(rst_n), .start(start),
    .lfsr_load(lfsr_load), .cnt_clr(cnt_clr), .cnt_en(cnt_en),
    .busy(busy), .done(done)
  );

  lfsr #(.W(SC_W), .TAPS(LFSR1_TAPS), .SEED(LFSR1_SEED)) u_lfsr1 (
    .clk(clk), .rst_n(rst_n), .load(lfsr_load), .r(rx)
  );

  lfsr #(.W(SC_W), .TAPS(LFSR2_TAPS), .SEED(LFSR2_SEED)) u_lfsr2 (
    .clk(clk), .rst_n(rst_n), .load(lfsr_load), .r(rw)
  );

  // ---- binary-to-stochastic conversion ------------------------------------
  bsc #(.IN_W(SC_W), .REF_W(SC_W)) u_bsc_zero (
    .in_val('0), .ref_val(rx), .bit_out(zero_bit)
  );

  logic [NPIX-1:0] img_bits;
  logic [NW-1:0]   w_bits;

  bsc_bank #(.N(NPIX)) u_img_bsc (.vals(image),   .ref_val(rx), .bits(img_bits));
  bsc_bank #(.N(NW))   u_w_bsc   (.vals(weights), .ref_val(rw), .bits(w_bits));

  // ---- layers --------------------------------------------------------------
  logic [C1*P1H*P1W-1:0] l1;
  logic [FCIN-1:0]       l2;
  logic [F1-1:0]         l3;
  logic [F2-1:0]         l4;
  logic [F3-1:0]         l5;

  sc_conv_pool_layer #(
    .IN_H(IMG_H), .IN_W(IMG_W), .IN_C(1), .K(K1), .OUT_C(C1),
    .POOL(POOL), .GAIN_SHIFT(SHIFT1)
  ) u_conv1 (
    .clk(clk), .rst_n(rst_n), .x(img_bits), .w(w_bits[0 +: NW1]),
    .rx(rx), .zero_bit(zero_bit), .y(l1)
  );

  sc_conv_pool_layer #(
    .IN_H(P1H), .IN_W(P1W), .IN_C(C1), .K(K2), .OUT_C(C2),
    .POOL(POOL), .GAIN_SHIFT(SHIFT2)
  ) u_conv2 (
    .clk(clk), .rst_n(rst_n), .x(l1), .w(w_bits[O2 +: NW2]),
    .rx(rx), .zero_bit(zero_bit), .y(l2)
  );

  sc_fc_layer #(.N_IN(FCIN), .N_OUT(F1), .GAIN_SHIFT(SHIFT3)) u_fc1 (
    .clk(clk), .rst_n(rst_n), .x(l2), .w(w_bits[O3 +: NW3]),
    .rx(rx), .zero_bit(zero_bit), .y(l3)
  );

  sc_fc_layer #(.N_IN(F1), .N_OUT(F2), .GAIN_SHIFT(SHIFT4)) u_fc2 (
    .clk(clk), .rst_n(rst_n), .x(l3), .w(w_bits[O4 +: NW4]),
    .rx(rx), .zero_bit(zero_bit), .y(l4)
  );

  sc_fc_layer #(.N_IN(F2), .N_OUT(F3), .GAIN_SHIFT(SHIFT5)) u_fc3 (
    .clk(clk), .rst_n(rst_n), .x(l4), .w(w_bits[O5 +: NW5]),
    .rx(rx), .zero_bit(zero_bit), .y(l5)
  );

  assign class_stream = l5;

  // ---- read-out -------------------------------------------------------------
  for (genvar k = 0; k < F3; k++) begin : g_out
    sc_counter #(.CNT_W(CNT_W)) u_cnt (
      .clk(clk), .rst_n(rst_n), .clr(cnt_clr), .en(cnt_en),
      .bit_in(l5[k]), .count(class_count[k])
    );
  end

endmodule
