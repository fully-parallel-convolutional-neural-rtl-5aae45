// tb_sc_maxpool: exhaustive truth table, then the property the pooling relies
// on: four streams made from one shared reference, counted over a full
// 255-value period, give an OR stream whose count equals the largest count.
module tb_sc_maxpool;
  logic [3:0] yin;
  logic ymax;
  int checks = 0, failures = 0;

  sc_maxpool #(.K(4)) dut (.y_in(yin), .y_max(ymax));

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int v [4];
    int cnt [4];
    int cmax, mx;
    for (int i = 0; i < 16; i++) begin
      yin = 4'(i); #1;
      check(ymax == (i != 0), $sformatf("truth %0d", i));
    end
    for (int trial = 0; trial < 50; trial++) begin
      foreach (v[k]) begin v[k] = $urandom_range(0, 255) - 128; cnt[k] = 0; end
      cmax = 0;
      for (int r = -128; r < 128; r++) begin
        if (r == 0) continue;
        foreach (v[k]) yin[k] = (v[k] > r);
        #1;
        foreach (v[k]) cnt[k] += yin[k];
        cmax += ymax;
      end
      mx = cnt[0];
      foreach (cnt[k]) if (cnt[k] > mx) mx = cnt[k];
      check(cmax == mx, $sformatf("correlated max %0d vs %0d", cmax, mx));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
