// tb_apc: random and corner vectors for APCs of 25 and 150 inputs; the
// expected bipolar sum 2*ones-N is computed by counting bits in a loop.
module tb_apc;
  logic [24:0]  b25;
  logic [149:0] b150;
  logic signed [5:0] s25;
  logic signed [8:0] s150;
  int checks = 0, failures = 0;

  apc #(.N(25))  dut25  (.bits(b25),  .sum(s25));
  apc #(.N(150)) dut150 (.bits(b150), .sum(s150));

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  function automatic int expect_sum(logic [149:0] v, int n);
    int ones = 0;
    for (int i = 0; i < n; i++) if (v[i]) ones++;
    return 2 * ones - n;
  endfunction

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    b25 = '0; b150 = '0; #1;
    check(s25 == -25 && s150 == -150, "all zero");
    b25 = '1; b150 = '1; #1;
    check(s25 == 25 && s150 == 150, "all one");
    for (int t = 0; t < 2000; t++) begin
      for (int i = 0; i < 150; i++) b150[i] = ($urandom_range(0, 99) < (t % 100));
      b25 = b150[24:0] ^ 25'($urandom);
      #1;
      check(int'(s25) == expect_sum(150'(b25), 25), $sformatf("n25 %0d", s25));
      check(int'(s150) == expect_sum(b150, 150), $sformatf("n150 %0d", s150));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
