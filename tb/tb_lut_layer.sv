// tb_lut_layer -- end-to-end test of lut_layer at a reduced size (240 inputs, 24 channels of 14 LUTs).
//
// A reference model (tb_ref_pkg) recomputes every LUT of the layer from the
// trained mask parameters: salience of each input, severed inputs, and the
// LUT's output as the sign of the mean of the entries agreeing on the
// connected inputs. For every activation vector streamed in, the expected
// output of each channel is (number of LUTs giving +1) >= threshold.
// The stream has random gaps and back-to-back vectors; each output must
// appear exactly two cycles after its input. Counted and required at least
// once: severed inputs, fully severed (removed) LUTs, partially shrunk LUTs,
// intact K-LUTs, both activation values, back-to-back inputs, idle cycles,
// and a reset that discards a vector in flight.
module tb_lut_layer;
  import ls_pkg::*;
  import tb_ref_pkg::*;

  localparam int unsigned K          = 4;
  localparam int unsigned N_IN       = 240;
  localparam int unsigned N_OUT      = 24;
  localparam int unsigned N_LUT      = luts_per_channel(N_IN, 940);
  localparam int unsigned SAL_THRESH = SAL_THRESH_DEF;
  localparam int unsigned SEED       = SEED_DEF;
  localparam int unsigned N_VEC      = 300;

  int checks = 0, failures = 0;

  logic             clk = 1'b0;
  logic             rst_n;
  logic             in_valid;
  logic [N_IN-1:0]  in_act;
  logic             out_valid;
  logic [N_OUT-1:0] out_act;

  lut_layer #(.N_IN(N_IN), .N_OUT(N_OUT)) dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_act(in_act),
    .out_valid(out_valid), .out_act(out_act)
  );

  always #5 clk = ~clk;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Reference tables: per LUT, its severed inputs, its 2^K-entry shrunk
  // output table and its wiring.
  logic [15:0] ref_tab [N_OUT][N_LUT];
  int unsigned ref_src [N_OUT][N_LUT][K];
  int unsigned n_thr   [N_OUT];
  int unsigned kp_hist [K+1];
  int unsigned n_severed = 0;

  function automatic logic [N_OUT-1:0] expect_out(input logic [N_IN-1:0] v);
    logic [N_OUT-1:0] r;
    for (int unsigned c = 0; c < N_OUT; c++) begin
      int unsigned cnt = 0;
      for (int unsigned n = 0; n < N_LUT; n++) begin
        int unsigned x = 0;
        for (int unsigned i = 0; i < K; i++) if (v[ref_src[c][n][i]]) x |= (1 << i);
        cnt += ref_tab[c][n][x];
      end
      r[c] = (cnt >= n_thr[c]);
    end
    return r;
  endfunction

  // scoreboard
  logic [N_OUT-1:0] exp_q[$];
  longint           exp_t[$];
  longint           cyc = 0;
  int               n_out_seen = 0, n_plus = 0, n_minus = 0;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && out_valid) begin
      n_out_seen++;
      if (exp_q.size() == 0) begin
        check(1'b0, "output with no input pending");
      end else begin
        logic [N_OUT-1:0] e;
        longint t;
        e = exp_q.pop_front();
        t = exp_t.pop_front();
        check(out_act == e, $sformatf("vector at cycle %0d: got %h exp %h", t, out_act, e));
        check(cyc - t == 2, $sformatf("latency %0d cycles, expected 2", cyc - t));
        n_plus  += $countones(out_act);
        n_minus += N_OUT - $countones(out_act);
      end
    end
  end

  initial begin : main
    int unsigned n_b2b, n_idle, n_sent, n_reset_drop, p, kp;
    bit prev_valid;
    n_b2b = 0;
    n_idle = 0;
    n_sent = 0;
    n_reset_drop = 0;
    prev_valid = 0;
    rst_n = 1'b0;
    in_valid = 1'b0;
    in_act = '0;
    for (int unsigned i = 0; i <= K; i++) kp_hist[i] = 0;
    for (int unsigned c = 0; c < N_OUT; c++) begin
      n_thr[c] = act_thresh(SEED, c, N_LUT);
      for (int unsigned n = 0; n < N_LUT; n++) begin
        p = ref_prune(SEED, c, n, K, SAL_THRESH);
        kp = K - $countones(p);
        kp_hist[kp]++;
        n_severed += K - kp;
        for (int unsigned x = 0; x < (1 << K); x++)
          ref_tab[c][n][x] = ref_lut(SEED, c, n, K, SAL_THRESH, x);
        for (int unsigned i = 0; i < K; i++) ref_src[c][n][i] = conn(SEED, c, n, i, N_IN);
      end
    end
    $display("layer: %0d inputs, %0d channels x %0d LUTs, K=%0d", N_IN, N_OUT, N_LUT, K);
    for (int unsigned i = 0; i <= K; i++)
      $display("  %0d-LUTs after shrinkage: %0d", i, kp_hist[i]);
    $display("  input sparsity: %0d of %0d inputs severed (%0d.%0d %%)", n_severed, N_OUT * N_LUT * K,
             n_severed * 100 / (N_OUT * N_LUT * K), (n_severed * 1000 / (N_OUT * N_LUT * K)) % 10);
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;

    // stream with random gaps
    while (n_sent < N_VEC) begin
      @(negedge clk);
      if ($urandom_range(3) != 0) begin
        for (int unsigned j = 0; j < N_IN; j++) in_act[j] = 1'($urandom);
        in_valid = 1'b1;
        exp_q.push_back(expect_out(in_act));
        exp_t.push_back(cyc);
        if (prev_valid) n_b2b++;
        prev_valid = 1;
        n_sent++;
      end else begin
        in_valid = 1'b0;
        prev_valid = 0;
        n_idle++;
      end
    end
    @(negedge clk);
    in_valid = 1'b0;
    repeat (4) @(negedge clk);
    check(exp_q.size() == 0, "all vectors answered");

    // reset with a vector in flight: it must be dropped
    in_valid = 1'b1;
    for (int unsigned j = 0; j < N_IN; j++) in_act[j] = 1'($urandom);
    @(negedge clk);
    in_valid = 1'b0;
    rst_n = 1'b0;
    @(negedge clk);
    check(out_valid == 1'b0, "reset clears the output stage");
    rst_n = 1'b1;
    repeat (3) begin
      @(negedge clk);
      check(out_valid == 1'b0, "no output after reset");
    end
    n_reset_drop++;

    $display("vectors %0d, back-to-back %0d, idle cycles %0d, outputs +1 %0d / -1 %0d",
             n_sent, n_b2b, n_idle, n_plus, n_minus);
    check(n_out_seen == int'(N_VEC), "one output per input vector");
    check(n_severed > 0, "mechanism: severed LUT inputs");
    check(kp_hist[0] > 0, "mechanism: LUTs removed entirely (K'=0)");
    check(kp_hist[K] > 0, "mechanism: intact K-LUTs");
    check(kp_hist[1] + kp_hist[K-1] > 0, "mechanism: partially shrunk LUTs");
    check(n_plus > 0 && n_minus > 0, "mechanism: both activation values");
    check(n_b2b > 0, "mechanism: back-to-back vectors");
    check(n_idle > 0, "mechanism: idle cycles in the stream");
    check(n_reset_drop > 0, "mechanism: reset with a vector in flight");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
