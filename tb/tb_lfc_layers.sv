// tb_lfc_layers -- workload test: the logic-expanded part of the LFC network
// for MNIST, four lut_layer instances in a chain, at the sizes of that
// workload: 256 -> 256 -> 256 -> 256 -> 10 binary activations, K = 4, node
// sparsity 90 % (25 LUTs per channel), about 75 % of LUT inputs severed.
// Masks are the synthetic stand-ins of ls_pkg (a different seed per layer),
// so the test checks the datapath, not MNIST accuracy.
//
// Random 256-bit vectors stream in back to back; each final 10-bit result
// must match a chained reference model (tb_ref_pkg) and arrive 4 x 2 = 8
// cycles after its input.
module tb_lfc_layers;
  import ls_pkg::*;
  import tb_ref_pkg::*;

  localparam int unsigned K      = 4;
  localparam int unsigned THETA  = 900;
  localparam int unsigned NL     = 4;
  localparam int unsigned W      = 256;
  localparam int unsigned N_LAST = 10;
  localparam int unsigned NLUT   = luts_per_channel(W, THETA);
  localparam int unsigned N_VEC  = 200;

  int checks = 0, failures = 0;

  logic             clk = 1'b0;
  logic             rst_n;
  logic             v [NL+1];
  logic [W-1:0]     a [NL+1];
  logic [N_LAST-1:0] y_last;
  logic             v0;
  logic [W-1:0]     a0;

  assign v[0] = v0;
  assign a[0] = a0;

  always #5 clk = ~clk;

  for (genvar l = 0; l < NL; l++) begin : g_layer
    localparam int unsigned NO = (l == NL - 1) ? N_LAST : W;
    logic [NO-1:0] o;
    lut_layer #(.K(K), .N_IN(W), .N_OUT(NO), .THETA_PERMILLE(THETA), .SEED(l + 11)) u_layer (
      .clk(clk), .rst_n(rst_n), .in_valid(v[l]), .in_act(a[l]),
      .out_valid(v[l+1]), .out_act(o)
    );
    if (l == NL - 1) begin : g_last
      assign y_last = o;
      assign a[l+1] = '0;
    end else begin : g_mid
      assign a[l+1] = o;
    end
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference: per layer, per channel, per LUT output table and wiring
  logic [15:0] tab [NL][W][NLUT];
  int unsigned src [NL][W][NLUT][K];
  int unsigned thr [NL][W];

  function automatic logic [W-1:0] ref_layer(input int unsigned l, input logic [W-1:0] x);
    logic [W-1:0] r;
    int unsigned no;
    r = '0;
    no = (l == NL - 1) ? N_LAST : W;
    for (int unsigned c = 0; c < no; c++) begin
      int unsigned cnt = 0;
      for (int unsigned n = 0; n < NLUT; n++) begin
        int unsigned idx = 0;
        for (int unsigned i = 0; i < K; i++) if (x[src[l][c][n][i]]) idx |= (1 << i);
        cnt += tab[l][c][n][idx];
      end
      r[c] = (cnt >= thr[l][c]);
    end
    return r;
  endfunction

  logic [N_LAST-1:0] exp_q[$];
  longint            exp_t[$];
  longint            cyc = 0;
  int                n_seen = 0;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && v[NL]) begin
      n_seen++;
      if (exp_q.size() == 0) check(1'b0, "unexpected output");
      else begin
        logic [N_LAST-1:0] e;
        longint t;
        e = exp_q.pop_front();
        t = exp_t.pop_front();
        check(y_last == e, $sformatf("result %b expected %b", y_last, e));
        check(cyc - t == 2 * NL, $sformatf("latency %0d", cyc - t));
      end
    end
  end

  initial begin : main
    logic [W-1:0] x;
    int unsigned severed, total;
    severed = 0;
    total = 0;
    rst_n = 1'b0;
    v0 = 1'b0;
    a0 = '0;
    for (int unsigned l = 0; l < NL; l++) begin
      for (int unsigned c = 0; c < ((l == NL - 1) ? N_LAST : W); c++) begin
        thr[l][c] = act_thresh(l + 11, c, NLUT);
        for (int unsigned n = 0; n < NLUT; n++) begin
          severed += $countones(ref_prune(l + 11, c, n, K, SAL_THRESH_DEF));
          total += K;
          for (int unsigned e = 0; e < 16; e++) tab[l][c][n][e] = ref_lut(l + 11, c, n, K, SAL_THRESH_DEF, e);
          for (int unsigned i = 0; i < K; i++) src[l][c][n][i] = conn(l + 11, c, n, i, W);
        end
      end
    end
    $display("LFC expanded layers: %0d LUTs per channel, %0d of %0d LUT inputs severed",
             NLUT, severed, total);
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int unsigned k = 0; k < N_VEC; k++) begin
      @(negedge clk);
      for (int unsigned j = 0; j < W; j++) x[j] = 1'($urandom);
      a0 = x;
      v0 = 1'b1;
      for (int unsigned l = 0; l < NL; l++) x = ref_layer(l, x);
      exp_q.push_back(x[N_LAST-1:0]);
      exp_t.push_back(cyc);
    end
    @(negedge clk);
    v0 = 1'b0;
    repeat (2 * NL + 2) @(negedge clk);
    check(n_seen == int'(N_VEC), "one result per input");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
