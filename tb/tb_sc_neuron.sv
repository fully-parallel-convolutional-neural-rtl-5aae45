// tb_sc_neuron: cycle-exact check of two neurons (N = 25 with plain
// comparison, N = 40 with GAIN_SHIFT = 2) against a model written from the
// neuron's equations: y(t) = ((sum(t-1) << shift) > R_x(t)) | (0 > R_x(t)),
// sum = sum of XNOR(x, w) as +-1. Then a stream-level check that the output
// is the ReLU of the input: with a negative sum the output count equals that
// of 0*, with a positive one it equals the converter's count for the sum.
module tb_sc_neuron;
  logic clk = 0, rst_n = 0;
  logic [24:0] xa, wa;
  logic [39:0] xb, wb;
  logic signed [7:0] rx;
  logic zero_bit, ya, yb;
  int checks = 0, failures = 0;
  int relu_neg = 0, relu_pos = 0;

  assign zero_bit = (rx < 0);

  sc_neuron #(.N(25), .GAIN_SHIFT(0)) dut_a (.clk, .rst_n, .x(xa), .w(wa), .rx, .zero_bit, .y(ya));
  sc_neuron #(.N(40), .GAIN_SHIFT(2)) dut_b (.clk, .rst_n, .x(xb), .w(wb), .rx, .zero_bit, .y(yb));

  always #5 clk = ~clk;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  function automatic int bip_sum(logic [39:0] x, logic [39:0] w, int n);
    int s = 0;
    for (int i = 0; i < n; i++) s += (x[i] == w[i]) ? 1 : -1;
    return s;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int sa, sb;
    int cnt_y, cnt_z, cnt_exp;
    xa = '0; wa = '0; xb = '0; wb = '0; rx = 0;
    #12 rst_n = 1;
    sa = 25; sb = 40;  // x = 0, w = 0 registered before the first stimulus
    // Random streams, cycle by cycle.
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      xa = 25'($urandom); wa = 25'($urandom);
      xb = {8'($urandom), 32'($urandom)}; wb = {8'($urandom), 32'($urandom)};
      // Bias some cycles towards agreement or disagreement for large sums.
      if (t % 7 == 0) wa = xa;
      if (t % 11 == 0) wb = ~xb;
      rx = 8'($urandom);
      #1;
      check(ya == ((sa > int'(rx)) || (rx < 0)), $sformatf("a t=%0d s=%0d r=%0d", t, sa, rx));
      check(yb == ((sb * 4 > int'(rx)) || (rx < 0)), $sformatf("b t=%0d s=%0d r=%0d", t, sb, rx));
      sa = bip_sum(40'(xa), 40'(wa), 25);
      sb = bip_sum(xb, wb, 40);
    end
    // Constant sums over a full sweep of references: ReLU at stream level.
    for (int k = -25; k <= 25; k += 5) begin
      @(negedge clk);
      xa = '0; wa = '0;
      for (int i = 0; i < (k + 25) / 2; i++) wa[i] = 0;
      for (int i = (k + 25) / 2; i < 25; i++) wa[i] = 1;
      // ones = (k+25)/2 agreements -> sum = 2*ones-25
      cnt_y = 0; cnt_z = 0;
      for (int r = -128; r < 128; r++) begin
        if (r == 0) continue;
        @(negedge clk); rx = 8'(r); #1;
        cnt_y += ya; cnt_z += zero_bit;
      end
      sa = 2 * ((k + 25) / 2) - 25;
      cnt_exp = (sa > 0) ? sa + 127 : 128;
      if (sa < 0) relu_neg++; else relu_pos++;
      check(cnt_y == cnt_exp, $sformatf("relu sum %0d: %0d ones, expected %0d", sa, cnt_y, cnt_exp));
      if (sa <= 0) check(cnt_y == cnt_z, "negative sum gives 0*");
    end
    check(relu_neg > 0 && relu_pos > 0, "both ReLU regions exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
