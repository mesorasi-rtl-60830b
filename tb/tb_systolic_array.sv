// tb_systolic_array: multiplies random DIM x K and K x DIM matrices on the
// array, with idle (zero) cycles mixed in, and checks every accumulator
// against a product computed here. Also checks the latency: the last step
// must not yet be in PE(DIM-1,DIM-1) at 2*DIM-1 cycles and must be there at
// 2*DIM cycles after it was presented.
module tb_systolic_array;
  localparam int DIM = 16;
  logic clk = 0, rst_n = 0, clr = 0;
  logic signed [31:0] a_left [DIM];
  logic signed [31:0] b_top  [DIM];
  logic signed [63:0] acc    [DIM][DIM];
  int checks = 0, failures = 0;

  systolic_array #(.DIM(DIM)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic signed [31:0] A [DIM][64];
  logic signed [31:0] B [64][DIM];
  logic signed [63:0] C [DIM][DIM];

  task automatic run(input int K, input bit bubbles);
    for (int i = 0; i < DIM; i++)
      for (int k = 0; k < K; k++) A[i][k] = $signed(32'($urandom_range(0, 4000)) - 2000);
    for (int k = 0; k < K; k++)
      for (int j = 0; j < DIM; j++) B[k][j] = $signed(32'($urandom_range(0, 4000)) - 2000);
    for (int i = 0; i < DIM; i++)
      for (int j = 0; j < DIM; j++) begin
        C[i][j] = 0;
        for (int k = 0; k < K; k++) C[i][j] += 64'(A[i][k]) * 64'(B[k][j]);
      end
    @(negedge clk); clr = 1;
    @(negedge clk); clr = 0;
    for (int k = 0; k < K; k++) begin
      for (int i = 0; i < DIM; i++) begin a_left[i] = A[i][k]; b_top[i] = B[k][i]; end
      @(negedge clk);
      for (int i = 0; i < DIM; i++) begin a_left[i] = 0; b_top[i] = 0; end
      if (bubbles && k < K - 1 && $urandom_range(0, 2) == 0) @(negedge clk);
    end
    // the last step was presented during the previous cycle: wait 2*DIM-1 more edges
    repeat (2 * DIM - 2) @(negedge clk);
    checks++;
    if (acc[DIM-1][DIM-1] === C[DIM-1][DIM-1] && K > 0 && A[DIM-1][K-1] != 0 && B[K-1][DIM-1] != 0) begin
      failures++; $display("result early");
    end
    @(negedge clk);
    for (int i = 0; i < DIM; i++)
      for (int j = 0; j < DIM; j++) begin
        checks++;
        if (acc[i][j] !== C[i][j]) begin
          failures++;
          if (failures < 10) $display("acc[%0d][%0d]=%0d exp %0d", i, j, acc[i][j], C[i][j]);
        end
      end
  endtask

  initial begin
    for (int i = 0; i < DIM; i++) begin a_left[i] = 0; b_top[i] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    run(3, 0);
    run(16, 1);
    run(64, 0);
    run(1, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
