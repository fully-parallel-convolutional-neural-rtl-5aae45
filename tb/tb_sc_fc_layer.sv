// tb_sc_fc_layer: a 10-input, 4-neuron layer driven by random streams and
// checked cycle by cycle against a model of the layer's equations, with the
// weight slice of each neuron taken from the documented ordering.
module tb_sc_fc_layer;
  localparam int NI = 10, NO = 4;
  logic clk = 0, rst_n = 0;
  logic [NI-1:0] x;
  logic [NO*NI-1:0] w;
  logic signed [7:0] rx;
  logic zero_bit;
  logic [NO-1:0] y;
  int checks = 0, failures = 0;

  assign zero_bit = (rx < 0);

  sc_fc_layer #(.N_IN(NI), .N_OUT(NO), .GAIN_SHIFT(3)) dut (.clk, .rst_n, .x, .w, .rx, .zero_bit, .y);

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
    int s [NO];
    foreach (s[o]) s[o] = NI;  // x = 0, w = 0 registered before the first stimulus
    x = '0; w = '0; rx = 0;
    #12 rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      x = NI'($urandom); w = (NO*NI)'({$urandom, $urandom});
      rx = 8'($urandom);
      #1;
      for (int o = 0; o < NO; o++)
        check(y[o] == ((s[o] * 8 > int'(rx)) || (rx < 0)), $sformatf("t=%0d o=%0d", t, o));
      for (int o = 0; o < NO; o++) begin
        s[o] = 0;
        for (int i = 0; i < NI; i++) s[o] += (x[i] == w[o*NI + i]) ? 1 : -1;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
