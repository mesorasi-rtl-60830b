// bn_relu_unit: post-processing of one output column of the systolic array.
//
// For each of LANES accumulator values of the same output channel:
//   t = (acc >>> shift)                      fixed-point rescale, kept to DATA_W bits
//   u = (t * scale) >>> SCALE_FRAC + bias    batch norm folded to scale and bias
//   y = relu_en ? max(u, 0) : u
// and, for max pooling, y_max = max over the LANES values of y. The lanes are
// LANES consecutive points, so y_max is the pooled value of those points for
// this channel; mlp_engine combines y_max over row blocks into a pooling group.
// Purely combinational. The unit is the NPU's "BN/ReLU/Maxpooling" block; the
// paper only names that block, so the arithmetic, the fixed-point format and
// pooling over whole row blocks are this design's choice.
module bn_relu_unit #(
  parameter int LANES      = 16,
  parameter int ACC_W      = 64,
  parameter int DATA_W     = 32,
  parameter int SCALE_FRAC = 8
) (
  input  logic signed [ACC_W-1:0]  acc [LANES],
  input  logic        [5:0]        shift,
  input  logic signed [DATA_W-1:0] scale,
  input  logic signed [DATA_W-1:0] bias,
  input  logic                     relu_en,
  output logic signed [DATA_W-1:0] y   [LANES],
  output logic signed [DATA_W-1:0] y_max
);
  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      logic signed [ACC_W-1:0]    sh;
      logic signed [DATA_W-1:0]   t;
      logic signed [2*DATA_W-1:0] p;
      logic signed [DATA_W-1:0]   u;
      sh = acc[l] >>> shift;
      t  = DATA_W'(sh);
      p  = t * scale;
      u  = DATA_W'(p >>> SCALE_FRAC) + bias;
      y[l] = (relu_en && u < 0) ? '0 : u;
    end
  end

  // max over the lanes (a chain of LANES-1 comparisons)
  always_comb begin
    y_max = y[0];
    for (int l = 1; l < LANES; l++) if (y[l] > y_max) y_max = y[l];
  end
endmodule
