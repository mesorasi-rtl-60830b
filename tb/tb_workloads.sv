// tb_workloads: the NPU at its default sizes on the point-feature and
// aggregation shapes of several point-cloud networks, beyond the PointNet++
// module covered end to end by tb_mesorasi_npu.
//
// Each workload runs one shared-MLP layer (16 input features -> M_out, ReLU)
// once per input point, which gives the point feature table, and then one
// aggregation pass with K neighbours per centroid and the column partition
// width that the 512-word PFT banks allow (cols * n_in / 32 <= 512):
//   PointNet++ (c), module 2: 512 points, 128 centroids, K = 64, M_out = 256, cols 32
//   DGCNN (c) / LDGCNN:      1024 points, every point a centroid, K = 20, M_out = 64, cols 16
//   DGCNN (s):               2048 points, every point a centroid, K = 40, M_out = 64, cols 8
//   PointNet++ (s), module 1: 2048 points, 512 centroids, K = 32, M_out = 128, cols 8
// These sizes are typical values of the public networks, not measurements.
// Only the delayed-aggregation form max(PFT[n]) - PFT[c] is exercised; the
// extra centroid term of an EdgeConv layer would be a second MLP pass.
// Neighbours are drawn from a window of 256 point indices around the
// centroid, a crude stand-in for the spatial locality of real neighbour
// search. Every PFT and output word is checked against a reference computed
// here, as are the round counts the aggregation unit reports (per window, the
// largest number of neighbours sharing a bank) and the aggregation time
// against its lower bound, the sum over entries of (rounds + 1) * cols.
module tb_workloads;
  import mesorasi_pkg::*;
  localparam int LW = LINE_WORDS, NB = PFT_BANKS, K = MAX_K;
  localparam int KIN = 16;
  localparam int XB = 0, WB = 2100, BNB = 2400, YB = 4096;

  logic clk = 0, rst_n = 0;
  logic host_en = 0, host_we = 0;
  logic [LW-1:0] host_wmask = '1;
  logic [GB_ADDR_W-1:0] host_addr = 0;
  logic [WORD_W-1:0] host_wdata [LW];
  logic [WORD_W-1:0] host_rdata [LW];
  mlp_cfg_t mlp_cfg;
  logic mlp_start = 0, mlp_busy, mlp_done;
  au_cfg_t au_cfg;
  logic au_start = 0, au_busy, au_done;
  logic nit_valid = 0, nit_ready, nit_last = 0;
  logic [IDX_W-1:0] nit_centroid = 0;
  logic [IDX_W-1:0] nit_nbr [K];
  logic [31:0] stat_rounds, stat_ideal_rounds, stat_entries, stat_partitions;
  int checks = 0, failures = 0;

  mesorasi_npu dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (4000000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fail(input string s);
    failures++;
    if (failures < 15) $display("FAIL: %s", s);
  endtask

  task automatic hwrite(input int a, input logic [31:0] line [LW]);
    @(negedge clk);
    host_en = 1; host_we = 1; host_addr = GB_ADDR_W'(a); host_wdata = line; host_wmask = '1;
    @(negedge clk);
    host_en = 0; host_we = 0;
  endtask

  task automatic hread(input int a, output logic [31:0] line [LW]);
    @(negedge clk);
    host_en = 1; host_we = 0; host_addr = GB_ADDR_W'(a);
    @(negedge clk);
    host_en = 0;
    line = host_rdata;
  endtask

  int X   [2048][KIN];
  int Wt  [KIN][256];
  int S   [256], Bi [256];
  int pft [2048][256];
  int cen [2048];
  int nbr [2048][K];

  function automatic int rounds_of(int e, int kk);
    int r;
    r = 0;
    for (int w = 0; w * NB < kk; w++) begin
      int mult [NB];
      int mx;
      mx = 0;
      for (int b = 0; b < NB; b++) mult[b] = 0;
      for (int s = 0; s < NB && w * NB + s < kk; s++) mult[nbr[e][w*NB+s] % NB]++;
      for (int b = 0; b < NB; b++) if (mult[b] > mx) mx = mult[b];
      r += mx;
    end
    return r;
  endfunction

  task automatic stream_nit(input int nout, input int parts);
    for (int p = 0; p < parts; p++)
      for (int e = 0; e < nout; e++) begin
        @(negedge clk);
        nit_valid = 1; nit_last = (e == nout - 1);
        nit_centroid = IDX_W'(cen[e]);
        for (int n = 0; n < K; n++) nit_nbr[n] = IDX_W'(nbr[e][n]);
        @(posedge clk);
        while (!nit_ready) @(posedge clk);
        #1 nit_valid = 0; nit_last = 0;
      end
  endtask

  task automatic workload(input string name, input int nin, input int nout, input int kk,
                          input int mout, input int cols);
    logic [31:0] line [LW];
    int ncb, parts, outb, cyc, exp_rounds, min_cyc;
    ncb = mout / LW;
    parts = mout / cols;
    outb = YB + (nin / LW) * mout;
    // data
    for (int i = 0; i < nin; i++) for (int c = 0; c < KIN; c++) X[i][c] = $urandom_range(0, 2000) - 1000;
    for (int c = 0; c < KIN; c++) for (int j = 0; j < mout; j++) Wt[c][j] = $urandom_range(0, 200) - 100;
    for (int j = 0; j < mout; j++) begin S[j] = $urandom_range(16, 64); Bi[j] = $urandom_range(0, 400) - 100; end
    for (int i = 0; i < nin; i++)
      for (int j = 0; j < mout; j++) begin
        longint acc, t, v;
        acc = 0;
        for (int c = 0; c < KIN; c++) acc += longint'(X[i][c]) * longint'(Wt[c][j]);
        t = longint'(int'(acc >>> 4));
        v = longint'(int'((t * S[j]) >>> 8)) + Bi[j];
        v = longint'(int'(v));
        pft[i][j] = (v < 0) ? 0 : int'(v);
      end
    exp_rounds = 0;
    min_cyc = 0;
    for (int e = 0; e < nout; e++) begin
      int lo;
      cen[e] = e * (nin / nout);
      lo = cen[e] - 128;
      if (lo < 0) lo = 0;
      if (lo > nin - 256) lo = nin - 256;
      for (int n = 0; n < K; n++) nbr[e][n] = lo + $urandom_range(0, 255);
      exp_rounds += rounds_of(e, kk);
      min_cyc += (rounds_of(e, kk) + 1) * cols;
    end
    // load
    for (int rb = 0; rb < nin / LW; rb++)
      for (int c = 0; c < KIN; c++) begin
        for (int r = 0; r < LW; r++) line[r] = X[rb*LW+r][c];
        hwrite(XB + rb * KIN + c, line);
      end
    for (int c = 0; c < KIN; c++)
      for (int cb = 0; cb < ncb; cb++) begin
        for (int r = 0; r < LW; r++) line[r] = Wt[c][cb*LW+r];
        hwrite(WB + c * ncb + cb, line);
      end
    for (int cb = 0; cb < ncb; cb++) begin
      for (int r = 0; r < LW; r++) line[r] = S[cb*LW+r];
      hwrite(BNB + 2 * cb, line);
      for (int r = 0; r < LW; r++) line[r] = Bi[cb*LW+r];
      hwrite(BNB + 2 * cb + 1, line);
    end
    // feature computation
    mlp_cfg = '0;
    mlp_cfg.x_base = GB_ADDR_W'(XB); mlp_cfg.w_base = GB_ADDR_W'(WB);
    mlp_cfg.y_base = GB_ADDR_W'(YB); mlp_cfg.bn_base = GB_ADDR_W'(BNB);
    mlp_cfg.n_rb = 12'(nin / LW); mlp_cfg.k_in = 12'(KIN); mlp_cfg.n_cb = 8'(ncb);
    mlp_cfg.shift = 6'(4); mlp_cfg.relu_en = 1;
    @(negedge clk); mlp_start = 1;
    @(negedge clk); mlp_start = 0;
    while (!mlp_done) @(negedge clk);
    for (int rb = 0; rb < nin / LW; rb += 5) begin
      hread(YB + rb * mout + (rb % mout), line);
      for (int r = 0; r < LW; r++) begin
        checks++;
        if ($signed(line[r]) != pft[rb*LW+r][rb % mout]) fail($sformatf("%s: PFT word", name));
      end
    end
    // aggregation
    au_cfg = '0;
    au_cfg.n_in = 13'(nin); au_cfg.n_out = 13'(nout); au_cfg.k = 7'(kk);
    au_cfg.m_out = COL_W'(mout); au_cfg.cols = COL_W'(cols);
    au_cfg.pft_base = GB_ADDR_W'(YB); au_cfg.out_base = GB_ADDR_W'(outb);
    @(negedge clk); au_start = 1;
    @(negedge clk); au_start = 0;
    cyc = 1;
    fork
      stream_nit(nout, parts);
      begin while (!au_done) begin @(negedge clk); cyc++; end end
    join
    checks += 4;
    if (int'(stat_entries) != nout * parts) fail($sformatf("%s: entries %0d", name, stat_entries));
    if (int'(stat_partitions) != parts) fail($sformatf("%s: partitions %0d", name, stat_partitions));
    if (int'(stat_rounds) != exp_rounds * parts)
      fail($sformatf("%s: rounds %0d exp %0d", name, stat_rounds, exp_rounds * parts));
    if (cyc < min_cyc * parts) fail($sformatf("%s: %0d cycles, below %0d", name, cyc, min_cyc * parts));
    $display("%s: %0d points, %0d centroids, K=%0d, M_out=%0d: aggregation %0d cycles (lower bound %0d), %0d partitions, rounds %0d vs %0d without conflicts",
             name, nin, nout, kk, mout, cyc, min_cyc * parts, stat_partitions, stat_rounds, stat_ideal_rounds);
    for (int rb = 0; rb < nout / LW; rb++)
      for (int j = 0; j < mout; j++) begin
        hread(outb + rb * mout + j, line);
        for (int r = 0; r < LW; r++) begin
          int e, mx, ev;
          e = rb * LW + r;
          mx = pft[nbr[e][0]][j];
          for (int n = 1; n < kk; n++) if (pft[nbr[e][n]][j] > mx) mx = pft[nbr[e][n]][j];
          ev = mx - pft[cen[e]][j];
          checks++;
          if ($signed(line[r]) != ev)
            fail($sformatf("%s: out[%0d][%0d]=%0d exp %0d", name, e, j, $signed(line[r]), ev));
        end
      end
  endtask

  initial begin
    mlp_cfg = '0; au_cfg = '0;
    for (int n = 0; n < K; n++) nit_nbr[n] = 0;
    for (int r = 0; r < LW; r++) host_wdata[r] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    workload("PointNet++ (c) module 2", 512, 128, 64, 256, 32);
    workload("DGCNN (c) / LDGCNN", 1024, 1024, 20, 64, 16);
    workload("DGCNN (s)", 2048, 2048, 40, 64, 8);
    workload("PointNet++ (s) module 1", 2048, 512, 32, 128, 8);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
