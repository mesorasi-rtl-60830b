// shift_register: DEPTH-word shift register with a tap at a chosen length.
//
// On shift, din enters q[0] and every word moves one place (q[i] <= q[i-1]).
// tap is q[len-1], the word that entered len shifts ago. The aggregation unit
// uses two of these: the top one holds the running per-column maximum of a
// centroid's neighbours and its tap feeds the maximum back, so that with
// len = columns of the partition column j meets its own partial result from
// the previous round; the bottom one holds the centroid's feature vector.
// After len shifts of columns 0..len-1, column j sits in q[len-1-j].
// 256 words of 4 bytes follow the paper; the selectable tap is this design's
// way of using the register for partitions narrower than 256 columns.
module shift_register #(
  parameter int DEPTH  = 256,
  parameter int WORD_W = 32,
  localparam int LW    = $clog2(DEPTH + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              shift,
  input  logic [WORD_W-1:0] din,
  input  logic [LW-1:0]     len,
  output logic [WORD_W-1:0] tap,
  output logic [WORD_W-1:0] q [DEPTH]
);
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < DEPTH; i++) q[i] <= '0;
    end else if (shift) begin
      q[0] <= din;
      for (int i = 1; i < DEPTH; i++) q[i] <= q[i-1];
    end
  end

  always_comb begin
    tap = q[0];
    for (int i = 0; i < DEPTH; i++)
      if (int'(len) == i + 1) tap = q[i];
  end
endmodule
