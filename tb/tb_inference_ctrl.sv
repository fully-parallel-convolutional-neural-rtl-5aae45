// tb_inference_ctrl: two back-to-back inferences. Checks the one-cycle
// load/clear pulse, that done rises exactly 1 + FILL + PERIOD cycles after
// the start cycle, that counting lasts exactly PERIOD cycles and starts after
// FILL cycles, and that a start while busy is ignored.
module tb_inference_ctrl;
  logic clk = 0, rst_n = 0, start = 0;
  logic lfsr_load, cnt_clr, cnt_en, busy, done;
  int checks = 0, failures = 0;

  inference_ctrl #(.FILL(5), .PERIOD(255)) dut (.clk, .rst_n, .start, .lfsr_load, .cnt_clr, .cnt_en, .busy, .done);

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
    int cyc, en_cycles, first_en, loads;
    #12 rst_n = 1;
    @(negedge clk);
    check(!busy && !done && !cnt_en, "idle after reset");
    for (int run = 0; run < 2; run++) begin
      @(negedge clk);
      start = 1; #1;
      check(lfsr_load && cnt_clr, "load and clear in start cycle");
      @(negedge clk); start = 0;
      cyc = 1; en_cycles = 0; first_en = -1; loads = 0;
      while (!done && cyc < 400) begin
        #1;
        check(busy, "busy while running");
        if (cnt_en) begin en_cycles++; if (first_en < 0) first_en = cyc; end
        if (lfsr_load) loads++;
        @(negedge clk); cyc++;
      end
      check(cyc == 261, $sformatf("done after %0d cycles", cyc));
      check(en_cycles == 255, $sformatf("counted %0d cycles", en_cycles));
      check(first_en == 6, $sformatf("counting began at %0d", first_en));
      check(loads == 0, "no reload while busy");
      check(!busy && !cnt_en, "stopped");
      repeat (3) @(negedge clk);
      check(done, "done held");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
