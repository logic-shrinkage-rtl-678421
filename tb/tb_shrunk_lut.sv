// tb_shrunk_lut -- self-checking test of shrunk_lut (K = 4 and K = 2).
//
// 1. The 2-LUT of the worked AND-gate example (entries x100: -90, -1, -85, 5
//    for (x1,x2) = (-1,-1), (+1,-1), (-1,+1), (+1,+1)): the saliences must be
//    179 and 11, severing x2 must leave a LUT computing y = x1.
// 2. Random 4-LUTs: random real-valued entries and a random severed set; the
//    expected output for every input is the sign of the mean of the entries
//    agreeing on the connected inputs, computed here, never from the RTL.
module tb_shrunk_lut;
  import ls_pkg::*;

  int checks = 0, failures = 0;

  logic [3:0]  x4, p4;
  logic [15:0] m4;
  logic        y4;
  logic [1:0]  x2, p2;
  logic [3:0]  m2;
  logic        y2;

  shrunk_lut #(.K(4)) dut4 (.x(x4), .mask(m4), .prune(p4), .y(y4));
  shrunk_lut #(.K(2)) dut2 (.x(x2), .mask(m2), .prune(p2), .y(y2));

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

  initial begin : main
    int c[EMAX];
    lut_cfg_t cfg;
    int sum;
    bit exp_y;
    x4 = '0; p4 = '0; m4 = '0; x2 = '0; p2 = '0; m2 = '0;
    #1;
    // worked example
    for (int e = 0; e < EMAX; e++) c[e] = 0;
    c[0] = -90; c[1] = -1; c[2] = -85; c[3] = 5;
    check(salience(c, 2, 0) == 179, "salience of x1");
    check(salience(c, 2, 1) == 11, "salience of x2");
    cfg = shrink_lut(c, 2, 100);
    check(cfg.prune[1:0] == 2'b10, "only x2 severed");
    m2 = cfg.mask[3:0];
    p2 = cfg.prune[1:0];
    for (int x = 0; x < 4; x++) begin
      x2 = 2'(x);
      #1;
      check(y2 == x2[0], $sformatf("AND example becomes wire y=x1, x=%0d", x));
    end
    // unshrunk: the AND gate itself
    cfg = shrink_lut(c, 2, 0);
    m2 = cfg.mask[3:0];
    p2 = cfg.prune[1:0];
    for (int x = 0; x < 4; x++) begin
      x2 = 2'(x);
      #1;
      check(y2 == (x == 3), $sformatf("unshrunk AND gate, x=%0d", x));
    end
    // random 4-LUTs
    for (int t = 0; t < 400; t++) begin
      int rc[16];
      logic [3:0] pr;
      for (int e = 0; e < 16; e++) rc[e] = int'($urandom_range(255)) - 128;
      pr = 4'($urandom);
      // shrunk mask by direct averaging
      for (int e = 0; e < 16; e++) begin
        sum = 0;
        for (int f = 0; f < 16; f++)
          if (((e ^ f) & ~int'(pr) & 15) == 0) sum += rc[f];
        m4[e] = (sum >= 0);
      end
      p4 = pr;
      for (int x = 0; x < 16; x++) begin
        x4 = 4'(x);
        #1;
        sum = 0;
        for (int f = 0; f < 16; f++)
          if (((x ^ f) & ~int'(pr) & 15) == 0) sum += rc[f];
        exp_y = (sum >= 0);
        check(y4 == exp_y, $sformatf("random LUT %0d prune=%b x=%0d", t, pr, x));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
