// tb_lut_channel -- self-checking test of lut_channel (K = 4, 20 LUTs).
//
// Each trial draws a fresh channel: random real-valued mask entries and a
// random severed-input set per LUT (some LUTs fully severed, some intact),
// binarized by direct averaging here, and a random threshold. For random
// activation vectors the expected count is the number of LUTs whose
// averaged entry at that input is >= 0, and y = (count >= threshold).
module tb_lut_channel;
  localparam int K = 4;
  localparam int N = 20;
  localparam int CW = $clog2(N + 1);

  int checks = 0, failures = 0;
  int n_plus = 0, n_minus = 0, n_removed = 0, n_full = 0;

  logic [N-1:0][K-1:0]      lut_x;
  logic [N-1:0][(1<<K)-1:0] lut_mask;
  logic [N-1:0][K-1:0]      lut_prune;
  logic [CW-1:0]            thresh, count;
  logic                     y;

  lut_channel #(.K(K), .N_LUT(N)) dut (
    .lut_x(lut_x), .lut_mask(lut_mask), .lut_prune(lut_prune),
    .thresh(thresh), .count(count), .y(y)
  );

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin : watchdog
    #1000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : main
    int rc[N][16];
    int sum, exp_count;
    bit exp_y;
    lut_x = '0; lut_mask = '0; lut_prune = '0; thresh = '0;
    for (int trial = 0; trial < 100; trial++) begin
      for (int n = 0; n < N; n++) begin
        for (int e = 0; e < 16; e++) rc[n][e] = int'($urandom_range(255)) - 128;
        lut_prune[n] = 4'($urandom);
        if (n == 0) lut_prune[n] = 4'hf;
        if (n == 1) lut_prune[n] = 4'h0;
        if (lut_prune[n] == 4'hf) n_removed++;
        if (lut_prune[n] == 4'h0) n_full++;
        for (int e = 0; e < 16; e++) begin
          sum = 0;
          for (int f = 0; f < 16; f++)
            if (((e ^ f) & ~int'(lut_prune[n]) & 15) == 0) sum += rc[n][f];
          lut_mask[n][e] = (sum >= 0);
        end
      end
      thresh = CW'($urandom_range(N / 2 + 4, N / 2 - 4));
      for (int v = 0; v < 50; v++) begin
        for (int n = 0; n < N; n++) lut_x[n] = 4'($urandom);
        #1;
        exp_count = 0;
        for (int n = 0; n < N; n++) begin
          sum = 0;
          for (int f = 0; f < 16; f++)
            if (((int'(lut_x[n]) ^ f) & ~int'(lut_prune[n]) & 15) == 0) sum += rc[n][f];
          if (sum >= 0) exp_count++;
        end
        exp_y = (exp_count >= int'(thresh));
        check(int'(count) == exp_count, $sformatf("count %0d exp %0d", count, exp_count));
        check(y == exp_y, $sformatf("y %0d exp %0d (count %0d thresh %0d)", y, exp_y, exp_count, thresh));
        if (exp_y) n_plus++; else n_minus++;
      end
    end
    $display("activations +1: %0d, -1: %0d; fully severed LUTs: %0d, intact LUTs: %0d",
             n_plus, n_minus, n_removed, n_full);
    check(n_plus > 0 && n_minus > 0, "both activation values seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
