// sc_conv_pool_layer: fully parallel stochastic convolution + max-pooling.
//
// One sc_neuron exists for every output pixel of every output channel, so the
// whole feature map is computed on every clock cycle; there is no loop
// tiling and no intermediate memory. Each neuron sees the K x K x IN_C input
// window under its pixel and the K*K*IN_C weight streams of its output
// channel (weight streams are shared by all pixels of a channel, as in any
// convolution). Each POOL x POOL group of neighbouring neurons of a channel
// feeds one sc_maxpool OR gate; valid (no padding) convolution and stride 1
// are used, which with a 28x28 input gives the 44k-weight LeNet-5 the paper
// reports. The flattening orders below are this design's choice.
//
// Interface (all streams are one bit per cycle):
//   x : IN_C*IN_H*IN_W inputs,  index (c*IN_H + row)*IN_W + col
//   w : OUT_C*IN_C*K*K weights, index ((oc*IN_C + c)*K + ky)*K + kx
//   y : OUT_C*PH*PW outputs,    index (oc*PH + py)*PW + px
// Timing: y at cycle t reflects x and w at cycle t-1 (one register stage,
// inside the neurons). Neurons outside the last full pooling window, if any,
// are not built.
module sc_conv_pool_layer #(
  parameter int unsigned IN_H       = 28,
  parameter int unsigned IN_W       = 28,
  parameter int unsigned IN_C       = 1,
  parameter int unsigned K          = 5,
  parameter int unsigned OUT_C      = 6,
  parameter int unsigned POOL       = 2,
  parameter int unsigned GAIN_SHIFT = 0,
  localparam int unsigned N   = IN_C * K * K,
  localparam int unsigned PH  = (IN_H - K + 1) / POOL,
  localparam int unsigned PW  = (IN_W - K + 1) / POOL,
  localparam int unsigned NX  = IN_C * IN_H * IN_W,
  localparam int unsigned NWT = OUT_C * N,
  localparam int unsigned NY  = OUT_C * PH * PW
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic [NX-1:0]                  x,
  input  logic [NWT-1:0]                 w,
  input  logic signed [sc_pkg::SC_W-1:0] rx,
  input  logic                           zero_bit,
  output logic [NY-1:0]                  y
);

  for (genvar oc = 0; oc < OUT_C; oc++) begin : g_ch
    for (genvar py = 0; py < PH; py++) begin : g_py
      for (genvar px = 0; px < PW; px++) begin : g_px
        logic [POOL*POOL-1:0] win;
        for (genvar dy = 0; dy < POOL; dy++) begin : g_dy
          for (genvar dx = 0; dx < POOL; dx++) begin : g_dx
            localparam int unsigned OY = py * POOL + dy;
            localparam int unsigned OX = px * POOL + dx;
            logic [N-1:0] xv;
            // Input window under output pixel (OY, OX).
            always_comb begin
              for (int unsigned c = 0; c < IN_C; c++)
                for (int unsigned ky = 0; ky < K; ky++)
                  for (int unsigned kx = 0; kx < K; kx++)
                    xv[(c*K + ky)*K + kx] = x[(c*IN_H + OY + ky)*IN_W + OX + kx];
            end
            sc_neuron #(.N(N), .GAIN_SHIFT(GAIN_SHIFT)) u_neuron (
              .clk(clk), .rst_n(rst_n),
              .x(xv), .w(w[oc*N +: N]),
              .rx(rx), .zero_bit(zero_bit),
              .y(win[dy*POOL + dx])
            );
          end
        end
        sc_maxpool #(.K(POOL*POOL)) u_pool (
          .y_in(win), .y_max(y[(oc*PH + py)*PW + px])
        );
      end
    end
  end

endmodule
