// tb_sc_counter: random bits, enables and clears against a counting model.
module tb_sc_counter;
  logic clk = 0, rst_n = 0, clr = 0, en = 0, bit_in = 0;
  logic [7:0] count;
  int checks = 0, failures = 0;

  sc_counter #(.CNT_W(8)) dut (.clk, .rst_n, .clr, .en, .bit_in, .count);

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
    int m = 0;
    #12 rst_n = 1;
    check(count == 0, "reset");
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      clr = ($urandom_range(0, 99) < 3);
      en = ($urandom_range(0, 99) < 80);
      bit_in = $urandom_range(0, 1);
      @(posedge clk); #1;
      if (clr) m = 0; else if (en && bit_in) m = (m + 1) % 256;
      check(count == 8'(m), $sformatf("t=%0d count %0d vs %0d", t, count, m));
    end
    // One full period of ones counts to 255.
    @(negedge clk); clr = 1; @(negedge clk); clr = 0; en = 1; bit_in = 1;
    repeat (255) @(negedge clk);
    en = 0;
    check(count == 255, "255 ones");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
