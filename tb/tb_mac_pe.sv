// tb_mac_pe: drives random operands into one PE and checks the forwarded
// operands (one-cycle delay) and the accumulator (sum of products of the
// registered operands, cleared by clr) against a reference kept here.
module tb_mac_pe;
  logic clk = 0, rst_n = 0, clr = 0;
  logic signed [31:0] a_in = 0, b_in = 0, a_out, b_out;
  logic signed [63:0] acc;
  int checks = 0, failures = 0;

  mac_pe #(.DATA_W(32), .ACC_W(64)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic signed [31:0] pa, pb;
  logic signed [63:0] ref_acc;
  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    ref_acc = 0; pa = 0; pb = 0;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      // check state after previous edge
      if (a_out !== pa || b_out !== pb) begin failures++; $display("fwd mismatch t=%0d", t); end
      if (acc !== ref_acc) begin failures++; $display("acc mismatch t=%0d %0d %0d", t, acc, ref_acc); end
      checks += 2;
      // new inputs
      clr  = ($urandom_range(0, 40) == 0);
      a_in = (t % 3 == 0) ? $signed($urandom()) : $signed(32'($urandom_range(0, 2000)) - 1000);
      b_in = $signed(32'($urandom_range(0, 2000)) - 1000);
      // reference: acc uses operands registered at previous edge
      ref_acc = clr ? 64'sd0 : ref_acc + 64'(pa) * 64'(pb);
      pa = a_in; pb = b_in;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
