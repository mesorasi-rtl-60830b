// tb_aggregation_unit: a global buffer holding a random point feature table
// and the aggregation unit (with 8-entry NIT halves, so the halves swap
// often). The NIT is streamed once per partition with random gaps. Checks:
//  - every output word equals max over the entry's neighbours of PFT[n][j]
//    minus PFT[centroid][j], computed here;
//  - statistics: entries, partitions, rounds (the per-window largest bank
//    multiplicity, computed here) and ideal rounds;
//  - run time lies between the pure aggregation time
//    P * sum((rounds+1)*cols) and that plus fills and a small per-partition
//    overhead (fill, first NIT fetch, last write-back); with conflict-free neighbours each entry takes 2*cols cycles.
module tb_aggregation_unit;
  import mesorasi_pkg::*;
  localparam int LW = 16, NB = 32, K = 64;
  logic clk = 0, rst_n = 0;
  au_cfg_t cfg;
  logic start = 0, busy, done;
  logic nit_valid = 0, nit_ready, nit_last = 0;
  logic [IDX_W-1:0] nit_centroid = 0;
  logic [IDX_W-1:0] nit_nbr [K];
  logic a_en, a_we, h_en = 0, h_we = 0, en, we;
  logic [LW-1:0] a_wmask, h_wmask = '1, wmask;
  logic [GB_ADDR_W-1:0] a_addr, h_addr = 0, addr;
  logic [31:0] a_wdata [LW];
  logic [31:0] h_wdata [LW];
  logic [31:0] wdata [LW];
  logic [31:0] rdata [LW];
  logic [31:0] st_r, st_i, st_e, st_p;
  int checks = 0, failures = 0;

  global_buffer u_gb (.clk, .rst_n, .en, .we, .wmask, .addr, .wdata, .rdata);
  aggregation_unit #(.NIT_DEPTH(8)) dut (
    .clk, .rst_n, .cfg, .start, .busy, .done,
    .nit_valid, .nit_ready, .nit_last, .nit_centroid, .nit_nbr,
    .gb_en(a_en), .gb_we(a_we), .gb_wmask(a_wmask), .gb_addr(a_addr),
    .gb_wdata(a_wdata), .gb_rdata(rdata),
    .stat_rounds(st_r), .stat_ideal_rounds(st_i), .stat_entries(st_e), .stat_partitions(st_p));

  always_comb begin
    en = busy ? a_en : h_en;   we = busy ? a_we : h_we;
    wmask = busy ? a_wmask : h_wmask; addr = busy ? a_addr : h_addr;
    wdata = busy ? a_wdata : h_wdata;
  end
  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fail(input string s);
    failures++;
    if (failures < 15) $display("FAIL: %s", s);
  endtask

  task automatic hwrite(input int a, input logic [31:0] line [LW]);
    @(negedge clk);
    h_en = 1; h_we = 1; h_addr = GB_ADDR_W'(a); h_wdata = line; h_wmask = '1;
    @(negedge clk);
    h_en = 0; h_we = 0;
  endtask

  task automatic hread(input int a, output logic [31:0] line [LW]);
    @(negedge clk);
    h_en = 1; h_we = 0; h_addr = GB_ADDR_W'(a);
    @(negedge clk);
    h_en = 0;
    line = rdata;
  endtask

  int pft [1024][64];
  int ent_c [256];
  int ent_n [256][K];

  function automatic int rounds_of(int e, int kk);
    int r;
    r = 0;
    for (int w = 0; w * NB < kk; w++) begin
      int mult [NB];
      int mx;
      mx = 0;
      for (int b = 0; b < NB; b++) mult[b] = 0;
      for (int s = 0; s < NB && w * NB + s < kk; s++) mult[ent_n[e][w*NB+s] % NB]++;
      for (int b = 0; b < NB; b++) if (mult[b] > mx) mx = mult[b];
      r += mx;
    end
    return r;
  endfunction

  task automatic stream_nit(input int nout, input int parts, input bit gaps);
    for (int p = 0; p < parts; p++)
      for (int e = 0; e < nout; e++) begin
        @(negedge clk);
        while (gaps && $urandom_range(0, 3) == 0) @(negedge clk);
        nit_valid = 1; nit_last = (e == nout - 1);
        nit_centroid = IDX_W'(ent_c[e]);
        for (int n = 0; n < K; n++) nit_nbr[n] = IDX_W'(ent_n[e][n]);
        @(posedge clk);
        while (!nit_ready) @(posedge clk);
        #1 nit_valid = 0; nit_last = 0;
      end
  endtask

  task automatic run(input int nin, input int mout, input int cc, input int nout, input int kk,
                     input bit conflict_free, input bit gaps);
    logic [31:0] line [LW];
    int parts, cyc, tot_rounds, tot_ideal, agg_cycles, nrb;
    parts = mout / cc;
    nrb = (nin + LW - 1) / LW;
    for (int i = 0; i < nin; i++)
      for (int j = 0; j < mout; j++) pft[i][j] = $urandom_range(0, 2000) - 1000;
    tot_rounds = 0; tot_ideal = 0; agg_cycles = 0;
    for (int e = 0; e < nout; e++) begin
      ent_c[e] = $urandom_range(0, nin - 1);
      for (int n = 0; n < K; n++)
        ent_n[e][n] = conflict_free ? ((n + e) % NB) + NB * $urandom_range(0, (nin / NB) - 1)
                                    : $urandom_range(0, nin - 1);
      tot_rounds += rounds_of(e, kk);
      tot_ideal  += (kk + NB - 1) / NB;
      agg_cycles += (rounds_of(e, kk) + 1) * cc;
    end
    for (int rb = 0; rb < nrb; rb++)
      for (int j = 0; j < mout; j++) begin
        for (int r = 0; r < LW; r++) line[r] = (rb * LW + r < nin) ? pft[rb*LW+r][j] : 32'hdead;
        hwrite(64 + rb * mout + j, line);
      end
    cfg = '0;
    cfg.n_in = 13'(nin); cfg.n_out = 13'(nout); cfg.k = 7'(kk); cfg.m_out = 9'(mout);
    cfg.cols = 9'(cc); cfg.pft_base = 64; cfg.out_base = 12000;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    cyc = 1;
    fork
      stream_nit(nout, parts, gaps);
      begin while (!done) begin @(negedge clk); cyc++; end end
    join
    checks += 5;
    if (int'(st_e) != nout * parts) fail($sformatf("entries %0d", st_e));
    if (int'(st_p) != parts) fail("partitions");
    if (int'(st_r) != tot_rounds * parts) fail($sformatf("rounds %0d exp %0d", st_r, tot_rounds * parts));
    if (int'(st_i) != tot_ideal * parts) fail("ideal rounds");
    if (cyc < parts * agg_cycles ||
        (!gaps && cyc > parts * (agg_cycles + nrb * cc + cc + 24)))
      fail($sformatf("cycles %0d, aggregation alone %0d, fills %0d", cyc, parts * agg_cycles, parts * nrb * cc));
    for (int e = 0; e < nout; e++)
      for (int j = 0; j < mout; j++) begin
        int mx, expv;
        if (e % LW == 0 || j == 0) ;
        mx = pft[ent_n[e][0]][j];
        for (int n = 1; n < kk; n++) if (pft[ent_n[e][n]][j] > mx) mx = pft[ent_n[e][n]][j];
        expv = mx - pft[ent_c[e]][j];
        hread(12000 + (e / LW) * mout + j, line);
        checks++;
        if ($signed(line[e % LW]) != expv)
          fail($sformatf("out[%0d][%0d]=%0d exp %0d", e, j, $signed(line[e % LW]), expv));
      end
    $display("run nin=%0d mout=%0d cols=%0d nout=%0d k=%0d: %0d cycles, rounds %0d (ideal %0d)",
             nin, mout, cc, nout, kk, cyc, st_r, st_i);
  endtask

  initial begin
    cfg = '0;
    for (int n = 0; n < K; n++) nit_nbr[n] = 0;
    for (int r = 0; r < LW; r++) h_wdata[r] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    run(100, 32, 8, 20, 40, 0, 1);    // 4 partitions, two windows, conflicts, NIT gaps
    run(128, 16, 16, 12, 32, 1, 0);   // conflict-free: one round per entry
    run(64, 24, 24, 9, 64, 0, 0);     // one partition, k = 64
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
