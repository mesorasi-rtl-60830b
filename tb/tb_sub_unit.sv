// tb_sub_unit: random vectors, each element checked against a - b computed here.
module tb_sub_unit;
  localparam int N = 256;
  logic [31:0] a [N];
  logic [31:0] b [N];
  logic [31:0] d [N];
  int checks = 0, failures = 0;

  sub_unit #(.N(N)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 40; t++) begin
      for (int i = 0; i < N; i++) begin a[i] = $urandom(); b[i] = $urandom(); end
      #1;
      for (int i = 0; i < N; i++) begin
        checks++;
        if (d[i] !== 32'(longint'(a[i]) - longint'(b[i]))) begin
          failures++;
          if (failures < 10) $display("i=%0d", i);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
