// tb_lfsr: checks both LFSR configurations of the network against an
// independently written feedback equation, checks that each visits all 255
// non-zero states in one period, and that load and reset restore the seed.
module tb_lfsr;
  logic clk = 0, rst_n = 0, load = 0;
  logic [7:0] r1, r2;
  int checks = 0, failures = 0;

  lfsr #(.W(8), .TAPS(8'hB8), .SEED(8'h01)) dut1 (.clk, .rst_n, .load, .r(r1));
  lfsr #(.W(8), .TAPS(8'h8E), .SEED(8'h5A)) dut2 (.clk, .rst_n, .load, .r(r2));

  always #5 clk = ~clk;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // x^8+x^6+x^5+x^4+1 and x^8+x^4+x^3+x^2+1, written out term by term.
  function automatic logic [7:0] nxt1(logic [7:0] s);
    return {s[6:0], s[7] ^ s[5] ^ s[4] ^ s[3]};
  endfunction
  function automatic logic [7:0] nxt2(logic [7:0] s);
    return {s[6:0], s[7] ^ s[3] ^ s[2] ^ s[1]};
  endfunction

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [7:0] m1, m2;
    bit seen1 [256];
    bit seen2 [256];
    int n1, n2;
    #12 rst_n = 1;
    check(r1 == 8'h01 && r2 == 8'h5A, "reset value");
    m1 = r1; m2 = r2;
    n1 = 0; n2 = 0;
    for (int i = 0; i < 255; i++) begin
      if (!seen1[r1]) n1++;
      if (!seen2[r2]) n2++;
      seen1[r1] = 1; seen2[r2] = 1;
      check(r1 != 0 && r2 != 0, "state zero");
      @(posedge clk); #1;
      m1 = nxt1(m1); m2 = nxt2(m2);
      check(r1 == m1, $sformatf("lfsr1 step %0d: %h vs %h", i, r1, m1));
      check(r2 == m2, $sformatf("lfsr2 step %0d: %h vs %h", i, r2, m2));
    end
    check(n1 == 255, $sformatf("lfsr1 distinct states %0d", n1));
    check(n2 == 255, $sformatf("lfsr2 distinct states %0d", n2));
    check(r1 == 8'h01 && r2 == 8'h5A, "period 255");
    repeat (17) @(posedge clk);
    load = 1; @(posedge clk); #1; load = 0;
    check(r1 == 8'h01 && r2 == 8'h5A, "load restores seed");
    @(posedge clk); #1;
    check(r1 == nxt1(8'h01), "runs after load");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
