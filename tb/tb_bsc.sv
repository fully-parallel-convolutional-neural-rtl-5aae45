// tb_bsc: exhaustive check of the 8-bit comparator against signed integer
// comparison, of the bipolar zero (input tied to 0 gives 128 ones in the 255
// non-zero references), and of a 10-bit input that saturates.
module tb_bsc;
  logic signed [7:0] a8, r8;
  logic signed [9:0] a10;
  logic b8, b10;
  int checks = 0, failures = 0;

  bsc #(.IN_W(8),  .REF_W(8)) dut8  (.in_val(a8),  .ref_val(r8), .bit_out(b8));
  bsc #(.IN_W(10), .REF_W(8)) dut10 (.in_val(a10), .ref_val(r8), .bit_out(b10));

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
    int ones;
    for (int a = -128; a < 128; a++) begin
      ones = 0;
      for (int r = -128; r < 128; r++) begin
        a8 = 8'(a); r8 = 8'(r); a10 = 10'(a); #1;
        check(b8 == (a > r), $sformatf("8b %0d > %0d", a, r));
        check(b10 == (a > r), $sformatf("10b %0d > %0d", a, r));
        if (r != 0 && b8) ones++;
      end
      // Over the 255 non-zero references of an LFSR period.
      check(ones == ((a > 0) ? a + 127 : a + 128), $sformatf("ones for %0d = %0d", a, ones));
      if (a == 0) check(ones == 128, "bipolar zero");
    end
    a10 = 10'sd300; r8 = 8'sd127; #1; check(b10 == 1, "saturate high");
    a10 = -10'sd300; r8 = -8'sd128; #1; check(b10 == 0, "saturate low");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
