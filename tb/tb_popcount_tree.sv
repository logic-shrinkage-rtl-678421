// tb_popcount_tree -- self-checking test of popcount_tree for N = 138 (one
// channel of the main configuration), N = 5 and N = 1: all-zero, all-one,
// one-hot and random vectors, each compared with a bit-by-bit count.
module tb_popcount_tree;
  int checks = 0, failures = 0;

  logic [137:0] b138;
  logic [7:0]   c138;
  logic [4:0]   b5;
  logic [2:0]   c5;
  logic [0:0]   b1;
  logic [0:0]   c1;

  popcount_tree #(.N(138)) dut138 (.bits(b138), .count(c138));
  popcount_tree #(.N(5))   dut5   (.bits(b5),   .count(c5));
  popcount_tree #(.N(1))   dut1   (.bits(b1),   .count(c1));

  function automatic int ones(input logic [137:0] v, input int n);
    int s = 0;
    for (int i = 0; i < n; i++) s += int'(v[i]);
    return s;
  endfunction

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin : watchdog
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic apply(input logic [137:0] v);
    b138 = v;
    b5   = v[4:0];
    b1   = v[0:0];
    #1;
    check(int'(c138) == ones(v, 138), $sformatf("N=138 count %0d exp %0d", c138, ones(v, 138)));
    check(int'(c5) == ones(v, 5), $sformatf("N=5 count %0d exp %0d", c5, ones(v, 5)));
    check(int'(c1) == ones(v, 1), "N=1 count");
  endtask

  initial begin : main
    logic [137:0] v;
    apply('0);
    apply('1);
    for (int i = 0; i < 138; i++) apply(138'(1) << i);
    for (int t = 0; t < 2000; t++) begin
      for (int w = 0; w < 138; w++) v[w] = 1'($urandom);
      apply(v);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
