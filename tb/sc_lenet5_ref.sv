// sc_lenet5_ref: cycle-accurate reference model of the stochastic LeNet-5,
// written as plain loops over flat arrays, independent of the RTL structure.
//
// It keeps its own two LFSR states (feedback written out as XOR terms), its
// own neuron sum registers per layer and its own sequencing (load on start,
// count the class streams during cycles 6..260 after the start cycle), and
// gives the expected class counts. It also counts how often the mechanisms
// of the design occur: ReLU outputs replaced by 0*, pooling windows whose
// inputs differ, neuron sums beyond the converter's range, and starts.
module sc_lenet5_ref #(
  parameter int IMG_H = 28, parameter int IMG_W = 28,
  parameter int K1 = 5, parameter int C1 = 6,
  parameter int K2 = 5, parameter int C2 = 16,
  parameter int POOL = 2,
  parameter int F1 = 120, parameter int F2 = 84, parameter int F3 = 10,
  parameter int SH1 = 0, parameter int SH2 = 0, parameter int SH3 = 0,
  parameter int SH4 = 0, parameter int SH5 = 0,
  localparam int NPIX = IMG_H * IMG_W,
  localparam int CH1 = IMG_H - K1 + 1, CW1 = IMG_W - K1 + 1,
  localparam int P1H = CH1 / POOL, P1W = CW1 / POOL,
  localparam int CH2 = P1H - K2 + 1, CW2 = P1W - K2 + 1,
  localparam int P2H = CH2 / POOL, P2W = CW2 / POOL,
  localparam int FCIN = C2 * P2H * P2W,
  localparam int NW1 = C1 * K1 * K1, NW2 = C2 * C1 * K2 * K2,
  localparam int NW3 = F1 * FCIN, NW4 = F2 * F1, NW5 = F3 * F2,
  localparam int NW = NW1 + NW2 + NW3 + NW4 + NW5
) (
  input  logic            clk,
  input  logic            start,
  input  logic signed [7:0] image   [NPIX],
  input  logic signed [7:0] weights [NW],
  output int              exp_count [F3],
  output int              cyc,
  output longint          n_relu, n_pool_mixed, n_sat, n_starts
);

  localparam int O2 = NW1, O3 = O2 + NW2, O4 = O3 + NW3, O5 = O4 + NW4;

  logic [7:0] m_rx = 8'h01, m_rw = 8'h5A;
  bit running = 0;
  int s1 [C1*P1H*POOL*P1W*POOL];
  int s2 [C2*P2H*POOL*P2W*POOL];
  int s3 [F1];
  int s4 [F2];
  int s5 [F3];
  bit xb [NPIX];
  bit wb [NW];
  bit p1 [C1*P1H*P1W];
  bit p2 [FCIN];
  bit y3 [F1];
  bit y4 [F2];
  bit y5 [F3];

  initial begin
    foreach (s1[i]) s1[i] = 0;
    foreach (s2[i]) s2[i] = 0;
    foreach (s3[i]) s3[i] = 0;
    foreach (s4[i]) s4[i] = 0;
    foreach (s5[i]) s5[i] = 0;
    foreach (exp_count[i]) exp_count[i] = 0;
    cyc = 0; n_relu = 0; n_pool_mixed = 0; n_sat = 0; n_starts = 0;
  end

  function automatic bit act(int s, int sh, int r);
    int g = s * (1 << sh);
    bit a = (g > r);
    bit z = (r < 0);
    if (g > 127 || g < -128) n_sat++;
    if (!a && z) n_relu++;
    return a | z;
  endfunction

  always @(posedge clk) begin
    int r, rw, k, o, n, ones;
    bit m, b;
    r = int'(signed'(m_rx));
    rw = int'(signed'(m_rw));
    // Current combinational values from current registers.
    for (int i = 0; i < NPIX; i++) xb[i] = (int'(image[i]) > r);
    for (int i = 0; i < NW; i++) wb[i] = (int'(weights[i]) > rw);
    // Layer 1 outputs (conv neurons in pooling windows, then OR).
    for (int c = 0; c < C1; c++)
      for (int py = 0; py < P1H; py++)
        for (int px = 0; px < P1W; px++) begin
          m = 0; ones = 0;
          for (int dy = 0; dy < POOL; dy++)
            for (int dx = 0; dx < POOL; dx++) begin
              b = act(s1[(c*P1H*POOL + py*POOL + dy)*P1W*POOL + px*POOL + dx], SH1, r);
              m |= b; ones += b;
            end
          if (ones != 0 && ones != POOL * POOL) n_pool_mixed++;
          p1[(c*P1H + py)*P1W + px] = m;
        end
    for (int c = 0; c < C2; c++)
      for (int py = 0; py < P2H; py++)
        for (int px = 0; px < P2W; px++) begin
          m = 0; ones = 0;
          for (int dy = 0; dy < POOL; dy++)
            for (int dx = 0; dx < POOL; dx++) begin
              b = act(s2[(c*P2H*POOL + py*POOL + dy)*P2W*POOL + px*POOL + dx], SH2, r);
              m |= b; ones += b;
            end
          if (ones != 0 && ones != POOL * POOL) n_pool_mixed++;
          p2[(c*P2H + py)*P2W + px] = m;
        end
    for (int i = 0; i < F1; i++) y3[i] = act(s3[i], SH3, r);
    for (int i = 0; i < F2; i++) y4[i] = act(s4[i], SH4, r);
    for (int i = 0; i < F3; i++) y5[i] = act(s5[i], SH5, r);
    // Read-out.
    if (running && cyc >= 6 && cyc <= 260)
      for (int i = 0; i < F3; i++) exp_count[i] += y5[i];
    // Next neuron sums: conv1 over the whole pooled area.
    for (int c = 0; c < C1; c++)
      for (int oy = 0; oy < P1H * POOL; oy++)
        for (int ox = 0; ox < P1W * POOL; ox++) begin
          n = 0;
          for (int ky = 0; ky < K1; ky++)
            for (int kx = 0; kx < K1; kx++)
              n += (xb[(oy + ky)*IMG_W + ox + kx] == wb[(c*K1 + ky)*K1 + kx]) ? 1 : -1;
          s1[(c*P1H*POOL + oy)*P1W*POOL + ox] = n;
        end
    for (int c = 0; c < C2; c++)
      for (int oy = 0; oy < P2H * POOL; oy++)
        for (int ox = 0; ox < P2W * POOL; ox++) begin
          n = 0;
          for (int ci = 0; ci < C1; ci++)
            for (int ky = 0; ky < K2; ky++)
              for (int kx = 0; kx < K2; kx++)
                n += (p1[(ci*P1H + oy + ky)*P1W + ox + kx] ==
                      wb[O2 + ((c*C1 + ci)*K2 + ky)*K2 + kx]) ? 1 : -1;
          s2[(c*P2H*POOL + oy)*P2W*POOL + ox] = n;
        end
    for (o = 0; o < F1; o++) begin
      n = 0;
      for (k = 0; k < FCIN; k++) n += (p2[k] == wb[O3 + o*FCIN + k]) ? 1 : -1;
      s3[o] = n;
    end
    for (o = 0; o < F2; o++) begin
      n = 0;
      for (k = 0; k < F1; k++) n += (y3[k] == wb[O4 + o*F1 + k]) ? 1 : -1;
      s4[o] = n;
    end
    for (o = 0; o < F3; o++) begin
      n = 0;
      for (k = 0; k < F2; k++) n += (y4[k] == wb[O5 + o*F2 + k]) ? 1 : -1;
      s5[o] = n;
    end
    // Sequencing and random sources.
    if (start && (!running || cyc >= 261)) begin
      running <= 1;
      cyc <= 1;
      n_starts++;
      for (int i = 0; i < F3; i++) exp_count[i] = 0;
      m_rx <= 8'h01;
      m_rw <= 8'h5A;
    end else begin
      if (running && cyc < 261) cyc <= cyc + 1;
      m_rx <= {m_rx[6:0], m_rx[7] ^ m_rx[5] ^ m_rx[4] ^ m_rx[3]};
      m_rw <= {m_rw[6:0], m_rw[7] ^ m_rw[3] ^ m_rw[2] ^ m_rw[1]};
    end
  end

endmodule
