// tb_pft_buffer: fills all banks with random words (each bank its own
// address), then reads random addresses in all banks at once, with some
// banks idle, and checks the words one cycle later against a model. Idle
// banks must keep their last output.
module tb_pft_buffer;
  localparam int NB = 32, BW = 512;
  logic clk = 0, rst_n = 0;
  logic [NB-1:0] rd_en = 0, wr_en = 0;
  logic [8:0] rd_addr [NB];
  logic [8:0] wr_addr [NB];
  logic [31:0] rd_data [NB];
  logic [31:0] wr_data [NB];
  int checks = 0, failures = 0;

  pft_buffer #(.NB(NB), .BANK_WORDS(BW)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [31:0] model [NB][BW];
  logic [31:0] last  [NB];
  initial begin
    for (int b = 0; b < NB; b++) begin rd_addr[b] = 0; wr_addr[b] = 0; wr_data[b] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int a = 0; a < BW; a++) begin
      @(negedge clk);
      wr_en = '1;
      for (int b = 0; b < NB; b++) begin
        wr_addr[b] = 9'((a * 7 + b) % BW);       // a different address in every bank
        wr_data[b] = $urandom();
        model[b][wr_addr[b]] = wr_data[b];
      end
    end
    @(negedge clk);
    wr_en = 0;
    rd_en = '1;
    for (int b = 0; b < NB; b++) rd_addr[b] = 0;
    @(negedge clk);
    for (int b = 0; b < NB; b++) last[b] = model[b][0];
    for (int t = 0; t < 500; t++) begin
      logic [NB-1:0] en;
      logic [8:0] ad [NB];
      en = NB'($urandom());
      for (int b = 0; b < NB; b++) ad[b] = 9'($urandom_range(0, BW - 1));
      rd_en = en;
      for (int b = 0; b < NB; b++) rd_addr[b] = ad[b];
      @(negedge clk);
      rd_en = 0;
      for (int b = 0; b < NB; b++) begin
        if (en[b]) last[b] = model[b][ad[b]];
        checks++;
        if (rd_data[b] !== last[b]) begin
          failures++;
          if (failures < 10) $display("bank %0d got %h exp %h", b, rd_data[b], last[b]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
