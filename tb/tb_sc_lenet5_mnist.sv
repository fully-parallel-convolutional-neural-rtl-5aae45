// tb_sc_lenet5_mnist: the network at the LeNet-5 geometry (28x28 image, 5x5
// kernels, 2x2 pooling, 10 classes) with fewer channels and neurons
// (2 and 4 kernels, 30-20-10 fully connected) so that it builds quickly.
// Two inferences on a synthetic digit-like image (a bright stroke on a dark
// background, pixel -128 or up to +127) with random weights; the ten class
// counts are compared with the cycle-accurate reference model and done must
// rise 261 cycles after start. The mechanisms of the design are counted and
// each must occur at least once.
module tb_sc_lenet5_mnist;
  localparam int IMG_H = 28, IMG_W = 28, K1 = 5, C1 = 2, K2 = 5, C2 = 4, POOL = 2;
  localparam int F1 = 30, F2 = 20, F3 = 10;
  localparam int SH1 = 2, SH2 = 1, SH3 = 1, SH4 = 2, SH5 = 2;
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
    for (int run = 0; run < 2; run++) begin
      @(negedge clk);
      foreach (image[i]) image[i] = ((i / IMG_W + i % IMG_W + run) % 9 < 3) ? 8'($urandom_range(60, 127)) : -8'sd128;
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
      for (int k = 0; k < F3; k++) $write("%0d ", class_count[k]);
      $display("");
      repeat (3) @(negedge clk);
    end
    $display("events: relu=%0d pool_mixed=%0d saturation=%0d starts=%0d ignored_start=%0d",
             n_relu, n_pool_mixed, n_sat, n_starts, n_ignored);
    check(n_relu > 0, "ReLU clamp occurred");
    check(n_pool_mixed > 0, "max-pool over differing inputs occurred");
    check(n_sat > 0, "sum beyond converter range occurred");
    check(n_starts == 2, "two inferences started (restart from done)");
    check(n_ignored > 0, "start while busy issued");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
