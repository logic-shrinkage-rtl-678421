// lut_layer -- fully unrolled, logic-shrunk LUT layer (top level).
//
// The layer maps N_IN binary activations to N_OUT binary activations, all
// channels in parallel, one input vector per clock. Every channel holds N_LUT
// LUTs, the number of XNORs left after node pruning (N_LUT = (1 - theta) *
// N_IN), each logic-expanded to a K-input LUT and then logic-shrunk: inputs
// whose salience is below SAL_THRESH are severed and the mask is averaged
// over them before binarization (see ls_pkg). All of this is decided at
// elaboration: the truth tables, the severed inputs, the wiring of LUT inputs
// to layer inputs and the activation thresholds are constants, as the weights
// are hardened into the netlist. The defaults are the bold layer of CNV for
// CIFAR-10: Conv(256, 3x3) on a 3x3x256 feature map (one output pixel, so
// 2304 inputs), K = 4, node sparsity 94 %, input sparsity about 75 %.
//
// Interface: a valid-qualified stream without back-pressure. in_act[j] = 1
// means activation +1. Timing: the input vector is registered on the clock
// edge where in_valid is high; the LUTs, adder trees and thresholds are
// combinational; the result is registered on the next edge, so out_valid and
// out_act follow in_valid by two cycles, at a throughput of one vector per
// cycle. rst_n is an active-low synchronous reset clearing both stages.
//
// Follows the paper: hardened LUT masks, K'-LUTs from salience-based input
// removal with merge-and-fork means, adder tree and binary activation per
// channel, fully parallel (fixed-throughput) layer. This design's own
// choices: the two register stages, the valid handshake, the reset, the
// synthetic hash-based masks, wiring and thresholds standing in for trained
// values, and a salience threshold in place of the global rank cut.
module lut_layer import ls_pkg::*; #(
  parameter int unsigned K              = K_DEF,
  parameter int unsigned N_IN           = N_IN_DEF,
  parameter int unsigned N_OUT          = N_OUT_DEF,
  parameter int unsigned THETA_PERMILLE = THETA_PERMILLE_DEF,
  parameter int unsigned N_LUT          = luts_per_channel(N_IN, THETA_PERMILLE),
  parameter int unsigned SAL_THRESH     = SAL_THRESH_DEF,
  parameter int unsigned SEED           = SEED_DEF
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [N_IN-1:0]  in_act,
  output logic             out_valid,
  output logic [N_OUT-1:0] out_act
);

  localparam int unsigned CW = $clog2(N_LUT + 1);

  initial begin
    assert (K >= 1 && K <= KMAX) else $fatal(1, "lut_layer: K must be 1..%0d", KMAX);
  end

  logic            x_valid;
  logic [N_IN-1:0] x_q;
  logic [N_OUT-1:0] y;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      x_valid <= 1'b0;
      x_q     <= '0;
    end else begin
      x_valid <= in_valid;
      if (in_valid) x_q <= in_act;
    end
  end

  for (genvar c = 0; c < N_OUT; c++) begin : g_ch
    logic [N_LUT-1:0][K-1:0]      lut_x;
    logic [N_LUT-1:0][(1<<K)-1:0] lut_mask;
    logic [N_LUT-1:0][K-1:0]      lut_prune;

    for (genvar n = 0; n < N_LUT; n++) begin : g_lut
      localparam lut_cfg_t CFG = lut_config(SEED, c, n, K, SAL_THRESH);
      localparam lut_src_t SRC = lut_sources(SEED, c, n, K, N_IN);
      logic [K-1:0] xs;
      always_comb begin
        for (int i = 0; i < K; i++) xs[i] = x_q[SRC[i]];
      end
      assign lut_x[n]     = xs;
      assign lut_mask[n]  = CFG.mask[(1<<K)-1:0];
      assign lut_prune[n] = CFG.prune[K-1:0];
    end

    lut_channel #(.K(K), .N_LUT(N_LUT), .CW(CW)) u_ch (
      .lut_x    (lut_x),
      .lut_mask (lut_mask),
      .lut_prune(lut_prune),
      .thresh   (CW'(act_thresh(SEED, c, N_LUT))),
      .count    (),
      .y        (y[c])
    );
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_act   <= '0;
    end else begin
      out_valid <= x_valid;
      if (x_valid) out_act <= y;
    end
  end

endmodule
