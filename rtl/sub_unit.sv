// sub_unit: element-wise subtraction at the end of aggregation.
//
// d[i] = a[i] - b[i] for N words in parallel, where a is the reduced maximum of
// a centroid's neighbour features and b is the centroid's own feature vector.
// This is the subtraction of the centroid that delayed aggregation moves after
// the maximum, since max(x - c, y - c) = max(x, y) - c. Combinational,
// two's-complement wrap-around. N = 256 subtractors follows the paper.
module sub_unit #(
  parameter int N      = 256,
  parameter int WORD_W = 32
) (
  input  logic [WORD_W-1:0] a [N],
  input  logic [WORD_W-1:0] b [N],
  output logic [WORD_W-1:0] d [N]
);
  always_comb
    for (int i = 0; i < N; i++) d[i] = a[i] - b[i];
endmodule
