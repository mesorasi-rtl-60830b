// tb_reduction_max: random words and enable masks, including all-disabled
// and corner values, checked against a maximum computed here.
module tb_reduction_max;
  localparam int NB = 32;
  logic [31:0] din [NB];
  logic [NB-1:0] din_en;
  logic [31:0] fb, max_out;
  logic fb_en;
  int checks = 0, failures = 0;

  reduction_max #(.NB(NB)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 3000; t++) begin
      int e;
      bit any;
      for (int i = 0; i < NB; i++)
        din[i] = (t % 4 == 0) ? $urandom() : 32'($urandom_range(0, 200)) - 100;
      din_en = (t % 7 == 0) ? '0 : NB'({$urandom(), $urandom()});
      fb     = (t % 4 == 1) ? $urandom() : 32'($urandom_range(0, 200)) - 100;
      fb_en  = 1'($urandom_range(0, 1));
      if (t == 5) begin din_en = '1; for (int i = 0; i < NB; i++) din[i] = 32'h8000_0000; fb_en = 0; end
      #1;
      any = 0; e = 0;
      for (int i = 0; i < NB; i++)
        if (din_en[i] && (!any || $signed(din[i]) > e)) begin e = $signed(din[i]); any = 1; end
      if (fb_en && (!any || $signed(fb) > e)) begin e = $signed(fb); any = 1; end
      if (!any) e = 32'h8000_0000;
      checks++;
      if (max_out !== 32'(e)) begin
        failures++;
        if (failures < 10) $display("t=%0d got %0d exp %0d", t, $signed(max_out), e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
