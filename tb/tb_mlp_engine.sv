// tb_mlp_engine: loads X, W and BN parameters into a global buffer, runs
// layers on the engine and checks every output word against a matrix product
// with the same rescale/BN/ReLU computed here, and the run time against
// n_rb * n_cb * (3 + 2k + 3*DIM) cycles. Pooling layers are checked against
// the per-group maximum of the same reference, with DIM extra cycles per group
// and column block, and the words of the last output line beyond the last
// pooled row must keep the marker value written before the run.
module tb_mlp_engine;
  import mesorasi_pkg::*;
  localparam int DIM = 16;
  logic clk = 0, rst_n = 0;
  mlp_cfg_t cfg;
  logic start = 0, busy, done;
  logic m_en, m_we, h_en = 0, h_we = 0, en, we;
  logic [DIM-1:0] m_wmask, h_wmask = '1, wmask;
  logic [GB_ADDR_W-1:0] m_addr, h_addr = 0, addr;
  logic [31:0] m_wdata [DIM];
  logic [31:0] h_wdata [DIM];
  logic [31:0] wdata [DIM];
  logic [31:0] rdata [DIM];
  int checks = 0, failures = 0;

  global_buffer u_gb (.clk, .rst_n, .en, .we, .wmask, .addr, .wdata, .rdata);
  mlp_engine dut (.clk, .rst_n, .cfg, .start, .busy, .done,
                  .gb_en(m_en), .gb_we(m_we), .gb_wmask(m_wmask), .gb_addr(m_addr),
                  .gb_wdata(m_wdata), .gb_rdata(rdata));

  always_comb begin
    en = busy ? m_en : h_en;   we = busy ? m_we : h_we;
    wmask = busy ? m_wmask : h_wmask; addr = busy ? m_addr : h_addr;
    wdata = busy ? m_wdata : h_wdata;
  end
  always #5 clk = ~clk;

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic hwrite(input int a, input logic [31:0] line [DIM]);
    @(negedge clk);
    h_en = 1; h_we = 1; h_addr = GB_ADDR_W'(a); h_wdata = line;
    @(negedge clk);
    h_en = 0; h_we = 0;
  endtask

  task automatic hread(input int a, output logic [31:0] line [DIM]);
    @(negedge clk);
    h_en = 1; h_we = 0; h_addr = GB_ADDR_W'(a);
    @(negedge clk);
    h_en = 0;
    line = rdata;
  endtask

  int X [64][40];
  int Wt [40][64];
  int S [64], Bi [64];
  int E [64][64];

  task automatic layer(input int nrb, input int kin, input int ncb, input int sh, input bit relu,
                       input int prb = 0);
    logic [31:0] line [DIM];
    int cyc, exp_cyc;
    cfg = '0;
    cfg.x_base = 100; cfg.w_base = 4000; cfg.y_base = 9000; cfg.bn_base = 20000;
    cfg.n_rb = 12'(nrb); cfg.k_in = 12'(kin); cfg.n_cb = 8'(ncb); cfg.shift = 6'(sh); cfg.relu_en = relu;
    cfg.pool_rb = 12'(prb);
    for (int i = 0; i < nrb * DIM; i++)
      for (int c = 0; c < kin; c++) X[i][c] = $urandom_range(0, 400) - 200;
    for (int c = 0; c < kin; c++)
      for (int j = 0; j < ncb * DIM; j++) Wt[c][j] = $urandom_range(0, 200) - 100;
    for (int j = 0; j < ncb * DIM; j++) begin S[j] = $urandom_range(0, 512); Bi[j] = $urandom_range(0, 2000) - 1000; end
    for (int rb = 0; rb < nrb; rb++)
      for (int c = 0; c < kin; c++) begin
        for (int r = 0; r < DIM; r++) line[r] = X[rb*DIM+r][c];
        hwrite(100 + rb * kin + c, line);
      end
    for (int c = 0; c < kin; c++)
      for (int cb = 0; cb < ncb; cb++) begin
        for (int r = 0; r < DIM; r++) line[r] = Wt[c][cb*DIM+r];
        hwrite(4000 + c * ncb + cb, line);
      end
    for (int cb = 0; cb < ncb; cb++) begin
      for (int r = 0; r < DIM; r++) line[r] = S[cb*DIM+r];
      hwrite(20000 + 2 * cb, line);
      for (int r = 0; r < DIM; r++) line[r] = Bi[cb*DIM+r];
      hwrite(20000 + 2 * cb + 1, line);
    end
    if (prb != 0)
      for (int a = 0; a < ncb * DIM; a++) begin
        for (int r = 0; r < DIM; r++) line[r] = 32'hDEAD_BEEF;
        hwrite(9000 + a, line);
      end
    // reference result
    for (int i = 0; i < nrb * DIM; i++)
      for (int j = 0; j < ncb * DIM; j++) begin
        longint acc, t, e;
        acc = 0;
        for (int c = 0; c < kin; c++) acc += longint'(X[i][c]) * longint'(Wt[c][j]);
        t = longint'(int'(acc >>> sh));
        e = longint'(int'((t * S[j]) >>> 8)) + Bi[j];
        e = longint'(int'(e));
        if (relu && e < 0) e = 0;
        E[i][j] = int'(e);
      end
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    // done is a registered pulse, one cycle after the last write
    exp_cyc = nrb * ncb * (3 + 2 * kin + 3 * DIM) + (prb != 0 ? (nrb / prb) * ncb * DIM : 0);
    if (cyc - 1 != exp_cyc)
      begin failures++; $display("cycles %0d exp %0d", cyc - 1, exp_cyc); end
    if (prb == 0) begin
      for (int rb = 0; rb < nrb; rb++)
        for (int j = 0; j < ncb * DIM; j++) begin
          hread(9000 + rb * ncb * DIM + j, line);
          for (int r = 0; r < DIM; r++) begin
            checks++;
            if ($signed(line[r]) != E[rb*DIM+r][j]) begin
              failures++;
              if (failures < 10) $display("Y[%0d][%0d]=%0d exp %0d", rb*DIM+r, j, $signed(line[r]), E[rb*DIM+r][j]);
            end
          end
        end
    end else begin
      // fewer than DIM groups here, so all output rows share one line per channel
      for (int j = 0; j < ncb * DIM; j++) begin
        hread(9000 + j, line);
        for (int g = 0; g < nrb / prb; g++) begin
          int m;
          m = E[g*prb*DIM][j];
          for (int i = g * prb * DIM; i < (g + 1) * prb * DIM; i++) if (E[i][j] > m) m = E[i][j];
          checks++;
          if ($signed(line[g]) != m) begin
            failures++;
            if (failures < 10) $display("pool[%0d][%0d]=%0d exp %0d", g, j, $signed(line[g]), m);
          end
        end
        for (int r = nrb / prb; r < DIM; r++) begin
          checks++;
          if (line[r] != 32'hDEAD_BEEF) begin
            failures++;
            if (failures < 10) $display("pool line %0d word %0d overwritten", j, r);
          end
        end
      end
    end
  endtask

  initial begin
    cfg = '0;
    for (int r = 0; r < DIM; r++) h_wdata[r] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    layer(2, 5, 2, 2, 1);
    layer(1, 1, 1, 0, 0);
    layer(3, 37, 4, 4, 1);
    layer(4, 6, 2, 2, 1, 2);    // two groups of 32 points
    layer(3, 9, 3, 3, 0, 3);    // one global group, no ReLU
    layer(4, 3, 1, 1, 1, 1);    // one group per row block
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
