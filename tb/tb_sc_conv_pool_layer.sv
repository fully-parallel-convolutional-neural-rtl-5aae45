// tb_sc_conv_pool_layer: a 2-channel 7x6 input, 3x3 kernels, 3 output
// channels, 2x2 pooling (conv 5x4, so the last conv row is not built),
// checked cycle by cycle against a direct convolution + ReLU + max model.
module tb_sc_conv_pool_layer;
  localparam int IH = 7, IW = 6, IC = 2, K = 3, OC = 3, P = 2;
  localparam int CH = IH - K + 1, CW = IW - K + 1, PH = CH / P, PW = CW / P;
  localparam int NX = IC * IH * IW, NW = OC * IC * K * K, NY = OC * PH * PW;
  logic clk = 0, rst_n = 0;
  logic [NX-1:0] x;
  logic [NW-1:0] w;
  logic signed [7:0] rx;
  logic zero_bit;
  logic [NY-1:0] y;
  int checks = 0, failures = 0, pool_mixed = 0;

  assign zero_bit = (rx < 0);

  sc_conv_pool_layer #(.IN_H(IH), .IN_W(IW), .IN_C(IC), .K(K), .OUT_C(OC), .POOL(P), .GAIN_SHIFT(2))
    dut (.clk, .rst_n, .x, .w, .rx, .zero_bit, .y);

  always #5 clk = ~clk;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int s [OC][CH][CW];
    bit n, m;
    int ones;
    // x = 0, w = 0 before the first stimulus: every XNOR gives +1.
    foreach (s[a, b, c]) s[a][b][c] = IC * K * K;
    x = '0; w = '0; rx = 0;
    #12 rst_n = 1;
    for (int t = 0; t < 1500; t++) begin
      @(negedge clk);
      for (int i = 0; i < NX; i++) x[i] = $urandom_range(0, 1);
      for (int i = 0; i < NW; i++) w[i] = $urandom_range(0, 1);
      rx = 8'($urandom);
      #1;
      for (int oc = 0; oc < OC; oc++)
        for (int py = 0; py < PH; py++)
          for (int px = 0; px < PW; px++) begin
            m = 0; ones = 0;
            for (int dy = 0; dy < P; dy++)
              for (int dx = 0; dx < P; dx++) begin
                n = (s[oc][py*P+dy][px*P+dx] * 4 > int'(rx)) || (rx < 0);
                m |= n; ones += n;
              end
            if (ones != 0 && ones != P * P) pool_mixed++;
            check(y[(oc*PH + py)*PW + px] == m, $sformatf("t=%0d oc=%0d py=%0d px=%0d", t, oc, py, px));
          end
      for (int oc = 0; oc < OC; oc++)
        for (int oy = 0; oy < CH; oy++)
          for (int ox = 0; ox < CW; ox++) begin
            s[oc][oy][ox] = 0;
            for (int c = 0; c < IC; c++)
              for (int ky = 0; ky < K; ky++)
                for (int kx = 0; kx < K; kx++)
                  s[oc][oy][ox] += (x[(c*IH + oy + ky)*IW + ox + kx] ==
                                    w[((oc*IC + c)*K + ky)*K + kx]) ? 1 : -1;
          end
    end
    check(pool_mixed > 0, "pooling windows with differing inputs seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
