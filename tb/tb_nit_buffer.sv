// tb_nit_buffer: with 4-entry halves, streams entries in (some halves closed
// early by wr_last) while the reader is stalled or active, and checks:
// entries come out in order and intact; the writer is stopped when both
// halves are full; an open half is not readable; back-to-back reads give one
// entry per cycle.
module tb_nit_buffer;
  localparam int E = 4, K = 64, W = 12;
  logic clk = 0, rst_n = 0;
  logic wr_valid = 0, wr_ready, wr_last = 0;
  logic [W-1:0] wr_centroid = 0;
  logic [W-1:0] wr_nbr [K];
  logic rd_avail, rd_req = 0, rd_valid;
  logic [W-1:0] rd_centroid;
  logic [W-1:0] rd_nbr [K];
  int checks = 0, failures = 0;

  nit_buffer #(.ENTRIES(E), .MAX_K(K), .IDX_W(W)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [W-1:0] nb(int e, int n);
    return W'(e * 131 + n * 17 + 5);
  endfunction

  int n_wr = 0, n_rd = 0, n_exp = 0;
  bit reader_on = 0;
  int  last_at [int];
  int  stalls = 0;

  // reader: consumes whatever is available when enabled
  always @(negedge clk) begin
    if (rst_n) begin
      if (rd_valid) begin
        checks++;
        if (rd_centroid !== W'(n_exp) || rd_nbr[0] !== nb(n_exp, 0) || rd_nbr[K-1] !== nb(n_exp, K-1)) begin
          failures++;
          $display("entry %0d wrong: c=%0d", n_exp, rd_centroid);
        end
        n_exp++;
      end
      rd_req = reader_on && rd_avail;
      if (rd_req) n_rd++;
    end
  end

  task automatic put(input int e, input bit last);
    @(negedge clk);
    wr_valid = 1; wr_last = last; wr_centroid = W'(e);
    for (int n = 0; n < K; n++) wr_nbr[n] = nb(e, n);
    @(posedge clk);
    while (!wr_ready) begin stalls++; @(posedge clk); end
    #1 wr_valid = 0; wr_last = 0;
  endtask

  initial begin
    for (int n = 0; n < K; n++) wr_nbr[n] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // reader off: first half fills (4), then a half of 3 closed by last
    for (int e = 0; e < 4; e++) put(e, 0);
    for (int e = 4; e < 6; e++) put(e, 0);
    // second half still open: only the first half is readable
    @(negedge clk);
    checks++;
    if (!rd_avail) begin failures++; $display("closed half not readable"); end
    put(6, 1);
    // both halves closed: writer must be stopped
    @(negedge clk);
    wr_valid = 1; wr_centroid = 7; wr_last = 0;
    for (int n = 0; n < K; n++) wr_nbr[n] = nb(7, n);
    @(negedge clk);
    checks++;
    if (wr_ready) begin failures++; $display("writer not stopped when both halves full"); end
    // start reading: writer proceeds once a half is released
    reader_on = 1;
    @(posedge clk);
    while (!wr_ready) @(posedge clk);
    #1 wr_valid = 0;
    // the 4 reads of the first half were back to back
    checks++;
    if (n_exp < 3) begin failures++; $display("reads not one per cycle (%0d)", n_exp); end
    for (int e = 8; e < 14; e++) put(e, e == 13);
    repeat (40) @(negedge clk);
    checks++;
    if (n_exp != 14) begin failures++; $display("read %0d of 14 entries", n_exp); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
