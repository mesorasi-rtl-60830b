// systolic_array: DIM x DIM output-stationary array of mac_pe.
//
// Computes a DIM x DIM tile of C = A * B. Each cycle the caller presents one
// reduction step k: a_left[i] = A[i][k] for the DIM rows and b_top[j] = B[k][j]
// for the DIM columns, both aligned. Edge skew registers delay row i by i
// cycles and column j by j cycles, so A[i][k] and B[k][j] meet in PE(i,j).
// Activations move right, weights move down, partial sums stay in the PEs.
// Idle cycles are fed with zeros, which leave the accumulators unchanged.
// Timing: the result of the last presented step is in every accumulator
// 2*DIM cycles after it was presented. clr clears all accumulators at once and
// may only be used when no operands are in flight.
// The array size and the PE follow the paper; the dataflow directions and the
// skew registers are this design's choice.
module systolic_array #(
  parameter int DIM    = 16,
  parameter int DATA_W = 32,
  parameter int ACC_W  = 64
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     clr,
  input  logic signed [DATA_W-1:0] a_left [DIM],
  input  logic signed [DATA_W-1:0] b_top  [DIM],
  output logic signed [ACC_W-1:0]  acc    [DIM][DIM]
);
  // skew lines: a_skew[i][d] is row i delayed d+1 cycles
  logic signed [DATA_W-1:0] a_skew [DIM][DIM];
  logic signed [DATA_W-1:0] b_skew [DIM][DIM];
  logic signed [DATA_W-1:0] a_edge [DIM];
  logic signed [DATA_W-1:0] b_edge [DIM];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < DIM; i++)
        for (int d = 0; d < DIM; d++) begin
          a_skew[i][d] <= '0;
          b_skew[i][d] <= '0;
        end
    end else begin
      for (int i = 0; i < DIM; i++) begin
        a_skew[i][0] <= a_left[i];
        b_skew[i][0] <= b_top[i];
        for (int d = 1; d < DIM; d++) begin
          a_skew[i][d] <= a_skew[i][d-1];
          b_skew[i][d] <= b_skew[i][d-1];
        end
      end
    end
  end

  always_comb begin
    a_edge[0] = a_left[0];
    b_edge[0] = b_top[0];
    for (int i = 1; i < DIM; i++) begin
      a_edge[i] = a_skew[i][i-1];
      b_edge[i] = b_skew[i][i-1];
    end
  end

  logic signed [DATA_W-1:0] a_h [DIM][DIM+1];  // a_h[i][j] enters PE(i,j)
  logic signed [DATA_W-1:0] b_v [DIM+1][DIM];  // b_v[i][j] enters PE(i,j)

  for (genvar i = 0; i < DIM; i++) begin : g_row
    assign a_h[i][0] = a_edge[i];
    assign b_v[0][i] = b_edge[i];
    for (genvar j = 0; j < DIM; j++) begin : g_col
      mac_pe #(.DATA_W(DATA_W), .ACC_W(ACC_W)) u_pe (
        .clk, .rst_n, .clr,
        .a_in (a_h[i][j]),   .b_in (b_v[i][j]),
        .a_out(a_h[i][j+1]), .b_out(b_v[i+1][j]),
        .acc  (acc[i][j])
      );
    end
  end
endmodule
