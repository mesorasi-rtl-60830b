// tb_mesorasi_npu: end-to-end run of the first PointNet++ module with delayed
// aggregation on the NPU at its default sizes:
//   1024 input points x 3 coordinates
//   shared MLP 3 -> 64 -> 64 -> 128 with ReLU, computed once per input point,
//     giving the 1024 x 128 point feature table (PFT)
//   512 centroids (the first 512 points) with 32 neighbours each
//   aggregation: out[e] = max_n PFT[n] - PFT[centroid(e)], 512 x 128
// followed by a second aggregation over the same PFT with 64 neighbours per
// centroid (two AGU windows). Between the two, a 128 -> 128 layer with
// global max pooling over all 512 aggregated points runs on the first
// aggregation's output, the way a last set-abstraction step or a
// classifier head reduces a whole cloud to one vector. Inputs and weights are loaded through the host
// port, the NIT is streamed like a DRAM transfer with random gaps, and every
// output word is compared with a reference computed here with the same
// integer arithmetic. Mechanisms counted (each must occur): ReLU clipping,
// layer chaining, max pooling, PFT partitions, bank-conflict rounds, multi-window entries,
// NIT half swaps, NIT back-pressure, and buffer-port hand-over.
module tb_mesorasi_npu;
  import mesorasi_pkg::*;
  localparam int LW = LINE_WORDS, NB = PFT_BANKS, K = MAX_K;
  localparam int NIN = 1024, NOUT = 512;
  localparam int L = 3;
  localparam int DIMS [L+1] = '{3, 64, 64, 128};
  localparam int XB = 0, WB [L] = '{1000, 1100, 1500}, BNB [L] = '{2100, 2120, 2140};
  localparam int YB [L] = '{4096, 8192, 12288};
  localparam int OUTB = 20480, OUT2B = 4096;
  localparam int WPB = 2200, BNPB = 2160, POOLB = 3300;   // pooling layer

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
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fail(input string s);
    failures++;
    if (failures < 15) $display("FAIL: %s", s);
  endtask

  // ---------------- mechanism counters
  int n_relu_clip = 0, n_layers = 0, n_conflict_rounds = 0, n_multiwin = 0;
  int n_nit_swaps = 0, n_nit_stall = 0, n_handover = 0, n_partitions = 0;
  int n_pool_writes = 0;
  logic busy_q = 0;
  always @(posedge clk) begin
    if (nit_valid && !nit_ready) n_nit_stall++;
    if ((mlp_busy || au_busy) != busy_q) n_handover++;
    busy_q <= mlp_busy || au_busy;
    if (dut.u_mlp.state == dut.u_mlp.S_POOL) n_pool_writes++;
    if (dut.u_au.u_nit.rd_req && dut.u_au.u_nit.rd_avail &&
        dut.u_au.u_nit.rptr + 1'b1 == dut.u_au.u_nit.count[dut.u_au.u_nit.rsel]) n_nit_swaps++;
  end

  // ---------------- host port
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

  // ---------------- data and reference
  int X  [NIN][3];
  int Wt [L][128][128];
  int S  [L][128];
  int Bi [L][128];
  int WP [128][128];
  int SP [128], BP [128];
  int agg [NOUT][128];
  int act [NIN][128];
  int nxt [NIN][128];
  int cen [NOUT];
  int nbr [NOUT][K];
  localparam int SHIFT [L] = '{0, 6, 6};

  task automatic reference_mlp();
    for (int i = 0; i < NIN; i++) for (int c = 0; c < 3; c++) act[i][c] = X[i][c];
    for (int l = 0; l < L; l++) begin
      for (int i = 0; i < NIN; i++)
        for (int j = 0; j < DIMS[l+1]; j++) begin
          longint acc, t, e;
          acc = 0;
          for (int c = 0; c < DIMS[l]; c++) acc += longint'(act[i][c]) * longint'(Wt[l][c][j]);
          t = longint'(int'(acc >>> SHIFT[l]));
          e = longint'(int'((t * S[l][j]) >>> 8)) + Bi[l][j];
          e = longint'(int'(e));
          if (e < 0) begin e = 0; n_relu_clip++; end
          nxt[i][j] = int'(e);
        end
      for (int i = 0; i < NIN; i++) for (int j = 0; j < DIMS[l+1]; j++) act[i][j] = nxt[i][j];
    end
  endtask

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
        while ($urandom_range(0, 7) == 0) @(negedge clk);
        nit_valid = 1; nit_last = (e == nout - 1);
        nit_centroid = IDX_W'(cen[e]);
        for (int n = 0; n < K; n++) nit_nbr[n] = IDX_W'(nbr[e][n]);
        @(posedge clk);
        while (!nit_ready) @(posedge clk);
        #1 nit_valid = 0; nit_last = 0;
      end
  endtask

  task automatic aggregate(input int nout, input int kk, input int outb);
    logic [31:0] line [LW];
    int parts, exp_rounds, exp_ideal, cyc;
    parts = 128 / 16;
    exp_rounds = 0; exp_ideal = 0;
    for (int e = 0; e < nout; e++) begin
      exp_rounds += rounds_of(e, kk);
      exp_ideal  += (kk + NB - 1) / NB;
      if (kk > NB) n_multiwin++;
    end
    au_cfg = '0;
    au_cfg.n_in = 13'(NIN); au_cfg.n_out = 13'(nout); au_cfg.k = 7'(kk);
    au_cfg.m_out = 9'(128); au_cfg.cols = 9'(16);
    au_cfg.pft_base = GB_ADDR_W'(YB[L-1]); au_cfg.out_base = GB_ADDR_W'(outb);
    @(negedge clk); au_start = 1;
    @(negedge clk); au_start = 0;
    cyc = 1;
    fork
      stream_nit(nout, parts);
      begin while (!au_done) begin @(negedge clk); cyc++; end end
    join
    n_partitions += int'(stat_partitions);
    n_conflict_rounds += int'(stat_rounds) - int'(stat_ideal_rounds);
    checks += 3;
    if (int'(stat_entries) != nout * parts) fail("entry count");
    if (int'(stat_rounds) != exp_rounds * parts) fail($sformatf("rounds %0d exp %0d", stat_rounds, exp_rounds * parts));
    if (int'(stat_ideal_rounds) != exp_ideal * parts) fail("ideal rounds");
    $display("aggregation k=%0d: %0d cycles, %0d rounds (%0d without conflicts), %0d partitions",
             kk, cyc, stat_rounds, stat_ideal_rounds, stat_partitions);
    for (int rb = 0; rb < nout / LW; rb++)
      for (int j = 0; j < 128; j++) begin
        hread(outb + rb * 128 + j, line);
        for (int r = 0; r < LW; r++) begin
          int e, mx, ev;
          e = rb * LW + r;
          mx = act[nbr[e][0]][j];
          for (int n = 1; n < kk; n++) if (act[nbr[e][n]][j] > mx) mx = act[nbr[e][n]][j];
          ev = mx - act[cen[e]][j];
          checks++;
          if ($signed(line[r]) != ev) fail($sformatf("out[%0d][%0d]=%0d exp %0d", e, j, $signed(line[r]), ev));
        end
      end
  endtask

  // 128 -> 128 layer on the 512 x 128 aggregation output (32 neighbours),
  // max pooled over all 32 row blocks into one 1 x 128 row
  task automatic pool_layer();
    logic [31:0] line [LW];
    int cyc;
    for (int c = 0; c < 128; c++)
      for (int j = 0; j < 128; j++) WP[c][j] = $urandom_range(0, 200) - 100;
    for (int j = 0; j < 128; j++) begin SP[j] = $urandom_range(16, 64); BP[j] = $urandom_range(0, 400) - 100; end
    for (int c = 0; c < 128; c++)
      for (int cb = 0; cb < 8; cb++) begin
        for (int r = 0; r < LW; r++) line[r] = WP[c][cb*LW+r];
        hwrite(WPB + c * 8 + cb, line);
      end
    for (int cb = 0; cb < 8; cb++) begin
      for (int r = 0; r < LW; r++) line[r] = SP[cb*LW+r];
      hwrite(BNPB + 2 * cb, line);
      for (int r = 0; r < LW; r++) line[r] = BP[cb*LW+r];
      hwrite(BNPB + 2 * cb + 1, line);
    end
    mlp_cfg = '0;
    mlp_cfg.x_base = GB_ADDR_W'(OUTB); mlp_cfg.w_base = GB_ADDR_W'(WPB);
    mlp_cfg.y_base = GB_ADDR_W'(POOLB); mlp_cfg.bn_base = GB_ADDR_W'(BNPB);
    mlp_cfg.n_rb = 12'(NOUT / LW); mlp_cfg.k_in = 12'(128); mlp_cfg.n_cb = 8'(8);
    mlp_cfg.shift = 6'(8); mlp_cfg.relu_en = 1; mlp_cfg.pool_rb = 12'(NOUT / LW);
    @(negedge clk); mlp_start = 1;
    @(negedge clk); mlp_start = 0;
    cyc = 1;
    while (!mlp_done) begin @(negedge clk); cyc++; end
    $display("MLP layer 128 -> 128 with global max pooling: %0d cycles", cyc);
    for (int e = 0; e < NOUT; e++)
      for (int c = 0; c < 128; c++) begin
        int mx;
        mx = act[nbr[e][0]][c];
        for (int n = 1; n < 32; n++) if (act[nbr[e][n]][c] > mx) mx = act[nbr[e][n]][c];
        agg[e][c] = mx - act[cen[e]][c];
      end
    for (int j = 0; j < 128; j++) begin
      int mxp;
      mxp = 0;
      for (int e = 0; e < NOUT; e++) begin
        longint acc, t, v;
        acc = 0;
        for (int c = 0; c < 128; c++) acc += longint'(agg[e][c]) * longint'(WP[c][j]);
        t = longint'(int'(acc >>> 8));
        v = longint'(int'((t * SP[j]) >>> 8)) + BP[j];
        v = longint'(int'(v));
        if (v < 0) v = 0;
        if (e == 0 || int'(v) > mxp) mxp = int'(v);
      end
      hread(POOLB + j, line);
      checks++;
      if ($signed(line[0]) != mxp) fail($sformatf("pooled[%0d]=%0d exp %0d", j, $signed(line[0]), mxp));
    end
  endtask

  initial begin
    logic [31:0] line [LW];
    int cyc;
    mlp_cfg = '0; au_cfg = '0;
    for (int n = 0; n < K; n++) nit_nbr[n] = 0;
    for (int r = 0; r < LW; r++) host_wdata[r] = 0;
    // data
    for (int i = 0; i < NIN; i++) for (int c = 0; c < 3; c++) X[i][c] = $urandom_range(0, 2000) - 1000;
    for (int l = 0; l < L; l++) begin
      for (int c = 0; c < DIMS[l]; c++)
        for (int j = 0; j < DIMS[l+1]; j++) Wt[l][c][j] = $urandom_range(0, 200) - 100;
      for (int j = 0; j < DIMS[l+1]; j++) begin
        S[l][j] = $urandom_range(16, 64); Bi[l][j] = $urandom_range(0, 400) - 100;
      end
    end
    for (int e = 0; e < NOUT; e++) begin
      cen[e] = e;
      for (int n = 0; n < K; n++) nbr[e][n] = $urandom_range(0, NIN - 1);
    end
    reference_mlp();
    repeat (2) @(posedge clk);
    rst_n = 1;
    // load X, W, BN through the host port
    for (int rb = 0; rb < NIN / LW; rb++)
      for (int c = 0; c < 3; c++) begin
        for (int r = 0; r < LW; r++) line[r] = X[rb*LW+r][c];
        hwrite(XB + rb * 3 + c, line);
      end
    for (int l = 0; l < L; l++) begin
      for (int c = 0; c < DIMS[l]; c++)
        for (int cb = 0; cb < DIMS[l+1] / LW; cb++) begin
          for (int r = 0; r < LW; r++) line[r] = Wt[l][c][cb*LW+r];
          hwrite(WB[l] + c * (DIMS[l+1] / LW) + cb, line);
        end
      for (int cb = 0; cb < DIMS[l+1] / LW; cb++) begin
        for (int r = 0; r < LW; r++) line[r] = S[l][cb*LW+r];
        hwrite(BNB[l] + 2 * cb, line);
        for (int r = 0; r < LW; r++) line[r] = Bi[l][cb*LW+r];
        hwrite(BNB[l] + 2 * cb + 1, line);
      end
    end
    // feature computation: three layers, each output is the next input
    for (int l = 0; l < L; l++) begin
      mlp_cfg = '0;
      mlp_cfg.x_base = GB_ADDR_W'(l == 0 ? XB : YB[l-1]);
      mlp_cfg.w_base = GB_ADDR_W'(WB[l]); mlp_cfg.y_base = GB_ADDR_W'(YB[l]);
      mlp_cfg.bn_base = GB_ADDR_W'(BNB[l]);
      mlp_cfg.n_rb = 12'(NIN / LW); mlp_cfg.k_in = 12'(DIMS[l]); mlp_cfg.n_cb = 8'(DIMS[l+1] / LW);
      mlp_cfg.shift = 6'(SHIFT[l]); mlp_cfg.relu_en = 1;
      @(negedge clk); mlp_start = 1;
      @(negedge clk); mlp_start = 0;
      cyc = 1;
      while (!mlp_done) begin @(negedge clk); cyc++; end
      n_layers++;
      $display("MLP layer %0d (%0d -> %0d): %0d cycles", l, DIMS[l], DIMS[l+1], cyc);
    end
    // spot-check the PFT
    for (int rb = 0; rb < NIN / LW; rb += 7) begin
      hread(YB[L-1] + rb * 128 + (rb % 128), line);
      for (int r = 0; r < LW; r++) begin
        checks++;
        if ($signed(line[r]) != act[rb*LW+r][rb % 128]) fail("PFT word");
      end
    end
    // aggregation, 32 neighbours (the paper's module) then 64 neighbours
    aggregate(NOUT, 32, OUTB);
    pool_layer();
    aggregate(128, 64, OUT2B);
    // every mechanism must have occurred
    checks += 9;
    if (n_pool_writes != 128)   fail("max pooling");
    if (n_relu_clip == 0)       fail("no ReLU clipping");
    if (n_layers != L)          fail("layer chaining");
    if (n_partitions != 16)     fail("partitions");
    if (n_conflict_rounds == 0) fail("no bank-conflict rounds");
    if (n_multiwin == 0)        fail("no multi-window entry");
    if (n_nit_swaps < 8)        fail("NIT halves not swapped");
    if (n_nit_stall == 0)       fail("no NIT back-pressure");
    if (n_handover < 10)        fail("buffer port hand-over");
    $display("mechanisms: relu_clip=%0d layers=%0d partitions=%0d conflict_rounds=%0d multiwindow_entries=%0d pool_writes=%0d nit_swaps=%0d nit_stall_cycles=%0d port_handovers=%0d",
             n_relu_clip, n_layers, n_partitions, n_conflict_rounds, n_multiwin, n_pool_writes, n_nit_swaps, n_nit_stall, n_handover);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
