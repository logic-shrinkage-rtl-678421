// shrunk_lut -- one logic-shrunk lookup table (a K'-LUT held in a K-LUT frame).
//
// The LUT computes y = mask[x], with its truth table hardened at elaboration
// (the trained, binarized mask). Logic shrinkage keeps the dense 2^K-entry
// mask but makes it independent of the severed inputs; this module does not
// connect those inputs at all: a severed input forces its index bit to 0, so
// the LUT only looks at its K' = K - popcount(prune) live inputs. With every
// input severed (K' = 0) the output is a constant and the LUT disappears in
// synthesis; with one live input it is a wire or an inverter.
//
// Interface: x[i] is LUT input i+1 (1 = activation +1), mask[e] the output
// (1 = +1) for index e, prune[i] = 1 when input i+1 is severed. mask and prune
// are meant to be tied to constants. Purely combinational.
//
// Follows the paper: dense-mask representation, K'-LUT semantics. Design
// choice: forcing severed index bits to 0 (any fixed value is equivalent
// because the mask does not depend on them, which the assertion checks).
module shrunk_lut #(
  parameter int unsigned K = 4
) (
  input  logic [K-1:0]      x,
  input  logic [(1<<K)-1:0] mask,
  input  logic [K-1:0]      prune,
  output logic              y
);

  logic [K-1:0] idx;

  always_comb begin
    idx = x & ~prune;
    y   = mask[idx];
  end

  // A shrunk mask must not depend on a severed input.
  always_comb begin
    for (int unsigned e = 0; e < (1 << K); e++) begin
      assert (mask[e] == mask[K'(e) & ~prune])
        else $error("shrunk_lut: mask depends on a severed input (entry %0d)", e);
    end
  end

endmodule
