// tb_shift_register: shifts random words with random idle cycles and checks
// every stored word and the tap at random lengths against a queue model.
module tb_shift_register;
  localparam int DEPTH = 256;
  logic clk = 0, rst_n = 0, shift = 0;
  logic [31:0] din = 0, tap;
  logic [8:0] len = 1;
  logic [31:0] q [DEPTH];
  int checks = 0, failures = 0;

  shift_register #(.DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [31:0] model [DEPTH];
  initial begin
    for (int i = 0; i < DEPTH; i++) model[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      checks++;
      if (tap !== model[int'(len) - 1]) begin
        failures++;
        if (failures < 10) $display("t=%0d tap %h exp %h len %0d", t, tap, model[int'(len)-1], len);
      end
      if (t % 50 == 0)
        for (int i = 0; i < DEPTH; i++) begin
          checks++;
          if (q[i] !== model[i]) failures++;
        end
      shift = 1'($urandom_range(0, 3) != 0);
      din   = $urandom();
      len   = 9'($urandom_range(1, DEPTH));
      if (shift) begin
        for (int i = DEPTH - 1; i > 0; i--) model[i] = model[i-1];
        model[0] = din;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
