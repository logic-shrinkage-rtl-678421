// lut_channel -- one output channel of a logic-shrunk binary layer.
//
// y = phi(sum_n LUT_n(x~(n))): N_LUT shrunk LUTs (each a K'_n-LUT, K'_n <= K)
// read their own selection of the layer's binary activations, an adder tree
// counts how many of them output +1, and the activation phi compares that
// count with a threshold (batch normalization folded into an integer
// threshold): y = 1 (+1) when count >= thresh, else 0 (-1).
//
// Interface: lut_x[n] are the K activations wired to LUT n, lut_mask[n] and
// lut_prune[n] its hardened truth table and severed-input mask, thresh the
// folded threshold; all but lut_x are meant to be constants. count is the
// adder-tree sum, exposed for observation. Purely combinational.
//
// Follows the paper: LUTs replacing XNORs, adder tree, binary activation.
// Design choice: the threshold form of phi (standard for binary networks with
// batch normalization; the paper gives phi only as a map to {-1,+1}).
module lut_channel #(
  parameter int unsigned K     = 4,
  parameter int unsigned N_LUT = 138,
  parameter int unsigned CW    = $clog2(N_LUT + 1)
) (
  input  logic [N_LUT-1:0][K-1:0]      lut_x,
  input  logic [N_LUT-1:0][(1<<K)-1:0] lut_mask,
  input  logic [N_LUT-1:0][K-1:0]      lut_prune,
  input  logic [CW-1:0]                thresh,
  output logic [CW-1:0]                count,
  output logic                         y
);

  logic [N_LUT-1:0] lut_y;

  for (genvar n = 0; n < N_LUT; n++) begin : g_lut
    shrunk_lut #(.K(K)) u_lut (
      .x    (lut_x[n]),
      .mask (lut_mask[n]),
      .prune(lut_prune[n]),
      .y    (lut_y[n])
    );
  end

  popcount_tree #(.N(N_LUT), .CW(CW)) u_tree (.bits(lut_y), .count(count));

  assign y = (count >= thresh);

endmodule
