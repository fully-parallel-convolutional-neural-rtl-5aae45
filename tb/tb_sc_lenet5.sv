// tb_sc_lenet5: end-to-end test of the whole network at a reduced size
// (12x12 image, 2 and 3 kernels of 3x3 and 2x2, 12-8-6-4 fully connected),
// with non-zero gains so that saturation occurs. Three inferences with
// different random images and weights; each time the four class
// counts are compared with the cycle-accurate reference model, and done must
// rise 261 cycles after start. Every mechanism of the design must occur:
// ReLU clamping to 0*, max-pooling over differing inputs, sums beyond the
// converter's range, restart of a finished inference, and a start ignored
// while busy.
module tb_sc_lenet5;
  localparam int IMG_H = 12, IMG_W = 12, K1 = 3, C1 = 2, K2 = 2, C2 = 3, POOL = 2;
  localparam int F1 = 8, F2 = 6, F3 = 4;
  localparam int SH1 = 3, SH2 = 3, SH3 = 4, SH4 = 4, SH5 = 4;
  localparam int NPIX = IMG_H * IMG_W;
  localparam int P1H = (IMG_H - K1 + 1) / POOL, P1W = (IMG_W - K1 + 1) / POOL;
  localparam int P2H = (P1H - K2 + 1) / POOL, P2W = (P1W - K2 + 1) / POOL;
  localparam int FCIN = C2 * P2H * P2W;
  localparam int NW = C1*K1*K1 + C2*C1*K2*K2 + F1*FCIN + F2*F1 + F3*F2;

  logic clk = 0, rst_n = 0, start = 0;
  logic signed [7:0] image [NPIX];
  logic signed [7:0] weights [NW];
  logic busy, done;
  logic [7:0] class_count [F3];
  logic [F3-1:0] class_stream;
  int exp_count [F3];
  int mcyc;
  longint n_relu, n_pool_mixed, n_sat, n_starts;
  int checks = 0, failures = 0, n_ignored = 0;

  sc_lenet5 #(
    .IMG_H(IMG_H), .IMG_W(IMG_W), .K1(K1), .C1(C1), .K2(K2), .C2(C2), .POOL(POOL),
    .F1(F1), .F2(F2), .F3(F3),
    .SHIFT1(SH1), .SHIFT2(SH2), .SHIFT3(SH3), .SHIFT4(SH4), .SHIFT5(SH5)
  ) dut (.clk, .rst_n, .start, .image, .weights, .busy, .done, .class_count, .class_stream);

  sc_lenet5_ref #(
    .IMG_H(IMG_H), .IMG_W(IMG_W), .K1(K1), .C1(C1), .K2(K2), .C2(C2), .POOL(POOL),
    .F1(F1), .F2(F2), .F3(F3), .SH1(SH1), .SH2(SH2), .SH3(SH3), .SH4(SH4), .SH5(SH5)
  ) ref_model (.clk, .start(start && !busy), .image, .weights, .exp_count, .cyc(mcyc),
               .n_relu, .n_pool_mixed, .n_sat, .n_starts);

  always #5 clk = ~clk;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc;
    foreach (image[i]) image[i] = 0;
    foreach (weights[i]) weights[i] = 0;
    #12 rst_n = 1;
    for (int run = 0; run < 3; run++) begin
      @(negedge clk);
      foreach (image[i]) image[i] = 8'($urandom_range(0, 255));
      foreach (weights[i]) weights[i] = 8'($urandom_range(0, 255));
      start = 1;
      @(negedge clk); start = 0;
      cyc = 1;
      while (!done && cyc < 400) begin
        if (cyc == 100 && run == 1) begin
          start = 1; n_ignored++;        // must be ignored: busy
          @(negedge clk); start = 0; cyc++;
          continue;
        end
        @(negedge clk); cyc++;
      end
      check(cyc == 261, $sformatf("run %0d: done after %0d cycles", run, cyc));
      for (int k = 0; k < F3; k++)
        check(int'(class_count[k]) == exp_count[k],
              $sformatf("run %0d class %0d: %0d vs model %0d", run, k, class_count[k], exp_count[k]));
      $display("run %0d counts: %0d %0d %0d %0d", run, class_count[0], class_count[1], class_count[2], class_count[3]);
      repeat (3) @(negedge clk);
    end
    $display("events: relu=%0d pool_mixed=%0d saturation=%0d starts=%0d ignored_start=%0d",
             n_relu, n_pool_mixed, n_sat, n_starts, n_ignored);
    check(n_relu > 0, "ReLU clamp occurred");
    check(n_pool_mixed > 0, "max-pool over differing inputs occurred");
    check(n_sat > 0, "sum beyond converter range occurred");
    check(n_starts == 3, "three inferences started (restart from done)");
    check(n_ignored > 0, "start while busy issued");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
