// tb_global_buffer: random masked writes and reads over all banks, checked
// against an associative-array model; reads return data one cycle later.
module tb_global_buffer;
  localparam int BANKS = 12, LINES = 2048, LW = 16;
  logic clk = 0, rst_n = 0, en = 0, we = 0;
  logic [LW-1:0] wmask = 0;
  logic [14:0] addr = 0;
  logic [31:0] wdata [LW];
  logic [31:0] rdata [LW];
  int checks = 0, failures = 0;

  global_buffer #(.BANKS(BANKS), .BANK_LINES(LINES), .LINE_WORDS(LW)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [31:0] model [int][LW];
  int used [$];

  initial begin
    for (int w = 0; w < LW; w++) wdata[w] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // write full lines at addresses spread over every bank
    for (int n = 0; n < 300; n++) begin
      int a;
      a = (n % BANKS) * LINES + $urandom_range(0, LINES - 1);
      if (model.exists(a)) continue;
      @(negedge clk);
      en = 1; we = 1; wmask = '1; addr = 15'(a);
      for (int w = 0; w < LW; w++) begin wdata[w] = $urandom(); model[a][w] = wdata[w]; end
      used.push_back(a);
    end
    // partial writes
    for (int n = 0; n < 300; n++) begin
      int a;
      a = used[$urandom_range(0, used.size() - 1)];
      @(negedge clk);
      en = 1; we = 1; wmask = LW'($urandom()); addr = 15'(a);
      for (int w = 0; w < LW; w++) begin
        wdata[w] = $urandom();
        if (wmask[w]) model[a][w] = wdata[w];
      end
    end
    // reads, back to back
    for (int n = 0; n < used.size(); n++) begin
      @(negedge clk);
      en = 1; we = 0; addr = 15'(used[n]);
      @(negedge clk);
      en = 0;
      for (int w = 0; w < LW; w++) begin
        checks++;
        if (rdata[w] !== model[used[n]][w]) begin
          failures++;
          if (failures < 10) $display("addr %0d word %0d got %h exp %h", used[n], w, rdata[w], model[used[n]][w]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
