// tb_agu: feeds NIT entries with chosen and random neighbour sets and checks
// the issued PFT addresses cycle by cycle:
//  - within a round every enabled bank reads row*cols + column, columns
//    0..cols-1 in consecutive cycles, at most one word per bank;
//  - over all rounds every neighbour (bank = index mod 32, row = index div 32)
//    is read exactly once; first_round marks only the first round;
//  - the centroid's row is read last, one column per cycle, with last on the
//    final read;
//  - the number of rounds equals, per window of 32 neighbours, the largest
//    number of neighbours sharing a bank, so an entry takes (rounds+1)*cols
//    cycles; with 32 conflict-free neighbours that is one round, i.e. the
//    neighbour maximum is complete after cols cycles.
module tb_agu;
  localparam int NB = 32, K = 64, W = 12;
  logic clk = 0, rst_n = 0, start = 0;
  logic [W-1:0] centroid = 0;
  logic [W-1:0] nbr [K];
  logic [6:0] k = 1;
  logic [8:0] cols = 4;
  logic busy, nbr_issue, first_round, cen_issue, last, round_start;
  logic [NB-1:0] rd_en;
  logic [8:0] rd_addr [NB];
  logic [4:0] cen_bank;
  int checks = 0, failures = 0;

  agu #(.NB(NB), .MAX_K(K), .IDX_W(W)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fail(input string s);
    failures++;
    if (failures < 15) $display("FAIL: %s", s);
  endtask

  task automatic run_entry(input int kk, input int cc, input int cen, input int idx[K]);
    int exp_rounds, rounds, cycles, col, cen_cycles;
    int seen [int];          // key bank*4096+row -> count
    int want [int];
    int round_rows [NB];
    bit in_first;
    exp_rounds = 0;
    for (int w = 0; w * NB < kk; w++) begin
      int mult [NB];
      int mx;
      mx = 0;
      for (int b = 0; b < NB; b++) mult[b] = 0;
      for (int s = 0; s < NB && w * NB + s < kk; s++) mult[idx[w*NB+s] % NB]++;
      for (int b = 0; b < NB; b++) if (mult[b] > mx) mx = mult[b];
      exp_rounds += mx;
    end
    for (int n = 0; n < kk; n++) begin
      int key;
      key = (idx[n] % NB) * 4096 + idx[n] / NB;
      want[key] = want.exists(key) ? want[key] + 1 : 1;
    end
    @(negedge clk);
    k = 7'(kk); cols = 9'(cc); centroid = W'(cen);
    for (int n = 0; n < K; n++) nbr[n] = W'(idx[n]);
    start = 1;
    rounds = 0; cycles = 0; col = 0; cen_cycles = 0; in_first = 0;
    forever begin
      @(posedge clk);
      #1 start = 0;
      cycles++;
      // the values sampled at this edge are the ones before #1; re-evaluate now
      if (!busy && cycles > 1) break;
      if (nbr_issue) begin
        if (round_start) begin
          rounds++;
          col = 0;
          for (int b = 0; b < NB; b++) begin
            round_rows[b] = -1;
            if (rd_en[b]) begin
              int key;
              round_rows[b] = int'(rd_addr[b]) / cc;
              key = b * 4096 + round_rows[b];
              seen[key] = seen.exists(key) ? seen[key] + 1 : 1;
            end
          end
          if (first_round != (rounds == 1)) fail("first_round flag");
        end
        for (int b = 0; b < NB; b++) begin
          if (rd_en[b] != (round_rows[b] >= 0)) fail("bank set changed inside a round");
          else if (rd_en[b] && int'(rd_addr[b]) != round_rows[b] * cc + col) fail("neighbour address");
        end
        col++;
      end else if (cen_issue) begin
        if (rd_en != (NB'(1) << (cen % NB))) fail("centroid bank");
        if (int'(rd_addr[cen % NB]) != (cen / NB) * cc + cen_cycles) fail("centroid address");
        if (int'(cen_bank) != cen % NB) fail("centroid mux select");
        if (last != (cen_cycles == cc - 1)) fail("last flag");
        cen_cycles++;
      end
    end
    checks += 4;
    if (rounds != exp_rounds) fail($sformatf("rounds %0d exp %0d", rounds, exp_rounds));
    if (cen_cycles != cc) fail("centroid cycles");
    if (cycles - 1 != (exp_rounds + 1) * cc) fail($sformatf("cycles %0d exp %0d", cycles - 1, (exp_rounds + 1) * cc));
    if (seen != want) fail("neighbour set");
  endtask

  initial begin
    int idx [K];
    for (int n = 0; n < K; n++) nbr[n] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // 32 neighbours in 32 different banks: one round
    for (int n = 0; n < K; n++) idx[n] = (n < 32) ? (n * 33) % 1024 : 0;
    run_entry(32, 16, 77, idx);
    // all neighbours in bank 3: one round each
    for (int n = 0; n < K; n++) idx[n] = 3 + 32 * n;
    run_entry(5, 8, 900, idx);
    // single neighbour
    run_entry(1, 1, 0, idx);
    // random entries, k up to 64, several partition widths
    for (int t = 0; t < 60; t++) begin
      int kk, cc;
      kk = $urandom_range(1, 64);
      cc = (t % 3 == 0) ? 16 : $urandom_range(1, 8);
      for (int n = 0; n < K; n++) idx[n] = $urandom_range(0, 1023);
      run_entry(kk, cc, $urandom_range(0, 1023), idx);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
