// mac_pe: one processing element of the output-stationary systolic array.
//
// Two operand registers capture the activation arriving from the left and the
// weight arriving from above; they also drive the neighbours, so operands
// advance one PE per cycle. The multiply-accumulate adds the product of the
// registered operands to the accumulator every cycle, so a PE whose inputs are
// zero holds its value. clr empties the accumulator (it takes priority).
// Timing: an operand pair presented at a_in/b_in in cycle t is in the
// accumulator at the end of cycle t+1.
// The PE structure (two input registers, MAC, accumulator) follows the paper;
// the widths and two's-complement integer arithmetic are this design's choice.
module mac_pe #(
  parameter int DATA_W = 32,
  parameter int ACC_W  = 64
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     clr,
  input  logic signed [DATA_W-1:0] a_in,
  input  logic signed [DATA_W-1:0] b_in,
  output logic signed [DATA_W-1:0] a_out,
  output logic signed [DATA_W-1:0] b_out,
  output logic signed [ACC_W-1:0]  acc
);
  logic signed [2*DATA_W-1:0] prod;

  always_comb prod = a_out * b_out;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      a_out <= '0;
      b_out <= '0;
      acc   <= '0;
    end else begin
      a_out <= a_in;
      b_out <= b_in;
      if (clr) acc <= '0;
      else     acc <= acc + ACC_W'(prod);
    end
  end
endmodule
