// popcount_tree -- balanced adder tree counting the ones in a bit vector.
//
// In a LUT-based binary layer each channel sums the +1 outputs of its LUTs
// before the activation; this is that adder tree. It is written as an
// in-place pairwise reduction: in the pass of stride w (1, 2, 4, ...) the
// partial sum at position j (a multiple of 2w) absorbs the one at j + w, so
// after ceil(log2 N) passes position 0 holds the count. The loops unroll into
// a balanced tree of ceil(log2 N) adder levels. Combinational; N >= 1.
//
// Interface: bits[N-1:0] in, count (ceil(log2(N+1)) bits) out.
// Follows the paper's "adder tree"; the balanced pairing, the absence of
// pipeline registers and the procedural (rather than generate) description
// are this design's choices. All partial sums are declared CW bits wide;
// bits that can only be zero are removed by synthesis.
module popcount_tree #(
  parameter int unsigned N  = 8,
  parameter int unsigned CW = $clog2(N + 1)
) (
  input  logic [N-1:0]  bits,
  output logic [CW-1:0] count
);

  logic [CW-1:0] part [N];

  always_comb begin
    for (int j = 0; j < int'(N); j++) part[j] = CW'(bits[j]);
    for (int w = 1; w < int'(N); w = w * 2) begin
      for (int j = 0; j + w < int'(N); j = j + 2 * w) begin
        part[j] = part[j] + part[j+w];
      end
    end
    count = part[0];
  end

endmodule
