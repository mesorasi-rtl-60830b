// tb_bn_relu_unit: random accumulators, shifts, scales and biases; the
// expected value is computed here step by step in 64-bit integers, and the
// maximum over the lanes is checked against the largest expected value.
module tb_bn_relu_unit;
  localparam int LANES = 16;
  logic signed [63:0] acc [LANES];
  logic [5:0] shift;
  logic signed [31:0] scale, bias;
  logic relu_en;
  logic signed [31:0] y [LANES];
  logic signed [31:0] y_max;
  int checks = 0, failures = 0;

  bn_relu_unit #(.LANES(LANES)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 500; t++) begin
      longint e, tt, emax;
      shift   = 6'($urandom_range(0, 20));
      scale   = $signed(32'($urandom_range(0, 1024)) - 512);
      bias    = $signed(32'($urandom_range(0, 20000)) - 10000);
      relu_en = 1'($urandom_range(0, 1));
      for (int l = 0; l < LANES; l++)
        acc[l] = $signed({32'($urandom_range(0, 3)) - 2, $urandom()}) >>> $urandom_range(0, 8);
      #1;
      emax = -(longint'(1) << 40);
      for (int l = 0; l < LANES; l++) begin
        tt = acc[l] >>> shift;
        tt = longint'(int'(tt));           // keep 32 bits
        e  = (tt * longint'(scale)) >>> 8;
        e  = longint'(int'(e)) + longint'(bias);
        e  = longint'(int'(e));
        if (relu_en && e < 0) e = 0;
        checks++;
        if (y[l] !== int'(e)) begin
          failures++;
          if (failures < 10) $display("lane %0d y=%0d exp %0d", l, y[l], e);
        end
        if (e > emax) emax = e;
      end
      checks++;
      if (y_max !== int'(emax)) begin
        failures++;
        if (failures < 10) $display("y_max=%0d exp %0d", y_max, emax);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
