// mlp_engine: runs one shared-MLP layer Y = act(X * W) on the systolic array.
//
// In a point cloud module the same MLP is applied to every point, so a layer is
// a matrix-matrix product of the (n x k) point matrix X with the (k x m) weight
// matrix W. The engine walks the output in DIM x DIM tiles (row block rb of
// DIM points, column block cb of DIM channels). For every tile it
//   1. reads the BN scale and bias lines of column block cb,
//   2. clears the array and, for c = 0..k-1, reads the X line (rb, c) and the
//      W line (c, cb) from the global buffer and presents them to the array
//      (two cycles per step, since both come through the one buffer port),
//   3. waits 2*DIM cycles for the array to drain,
//   4. writes the DIM result columns, passed through bn_relu_unit, as DIM lines.
// Max pooling (cfg.pool_rb != 0): the tile loop runs column block outermost,
// the write step keeps a running per-channel maximum of bn_relu_unit's lane
// maximum instead of writing, and after every pool_rb row blocks the DIM
// maxima are written (S_POOL, one masked word per cycle) as one output row.
// Matrix layouts in the global buffer are given in mesorasi_pkg. The output
// layout equals the input layout, so a layer's output feeds the next layer and
// is the point feature table read by the aggregation unit.
// Interface: start (one cycle, cfg held stable while busy), busy, done (one
// cycle pulse); a global-buffer master port with one-cycle read latency.
// Timing per tile: 3 + 2k + 2*DIM + DIM cycles, plus DIM cycles per pooling
// group when pooling.
// That the NPU runs the MLP on a 16x16 systolic array is from the paper; the
// tile loop, the layouts, the BN step and pooling whole row blocks are this
// design's own.
module mlp_engine
  import mesorasi_pkg::*;
#(
  parameter int DIM    = SA_DIM,
  parameter int DATA_W = WORD_W,
  parameter int AW     = GB_ADDR_W
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  mlp_cfg_t             cfg,
  input  logic                 start,
  output logic                 busy,
  output logic                 done,
  // global-buffer master port
  output logic                 gb_en,
  output logic                 gb_we,
  output logic [DIM-1:0]       gb_wmask,
  output logic [AW-1:0]        gb_addr,
  output logic [DATA_W-1:0]    gb_wdata [DIM],
  input  logic [DATA_W-1:0]    gb_rdata [DIM]
);
  typedef enum logic [2:0] {S_IDLE, S_BN_S, S_BN_B, S_CLR, S_FEED, S_DRAIN, S_WRITE, S_POOL} state_t;
  state_t state;

  logic [11:0] rb;
  logic [7:0]  cb;
  logic [12:0] kk;        // reduction step
  logic        phase;     // 0: X read, 1: W read
  logic [6:0]  cnt;
  logic        pool;      // pooling layer
  logic [11:0] grp;       // pooling group (output row)
  logic [11:0] in_grp;    // row block within the group
  logic signed [DATA_W-1:0] run_max [DIM];
  logic        resp_a, resp_w, resp_s, resp_b;
  logic signed [DATA_W-1:0] a_hold [DIM];
  logic signed [DATA_W-1:0] scale_l [DIM];
  logic signed [DATA_W-1:0] bias_l  [DIM];

  // array
  logic                     sa_clr;
  logic signed [DATA_W-1:0] sa_a [DIM];
  logic signed [DATA_W-1:0] sa_b [DIM];
  logic signed [ACC_W-1:0]  sa_acc [DIM][DIM];

  systolic_array #(.DIM(DIM), .DATA_W(DATA_W), .ACC_W(ACC_W)) u_sa (
    .clk, .rst_n, .clr(sa_clr), .a_left(sa_a), .b_top(sa_b), .acc(sa_acc)
  );

  always_comb begin
    for (int i = 0; i < DIM; i++) begin
      sa_a[i] = resp_w ? a_hold[i] : '0;
      sa_b[i] = resp_w ? $signed(gb_rdata[i]) : '0;
    end
  end

  // post-processing of output column cnt of the tile
  logic signed [ACC_W-1:0]  col_acc [DIM];
  logic signed [DATA_W-1:0] col_y   [DIM];
  logic signed [DATA_W-1:0] col_max;

  always_comb begin
    for (int i = 0; i < DIM; i++) col_acc[i] = sa_acc[i][cnt[$clog2(DIM)-1:0]];
  end

  bn_relu_unit #(.LANES(DIM), .ACC_W(ACC_W), .DATA_W(DATA_W)) u_bn (
    .acc(col_acc), .shift(cfg.shift),
    .scale(scale_l[cnt[$clog2(DIM)-1:0]]), .bias(bias_l[cnt[$clog2(DIM)-1:0]]),
    .relu_en(cfg.relu_en), .y(col_y), .y_max(col_max)
  );

  // global-buffer requests
  always_comb begin
    gb_en    = 1'b0;
    gb_we    = 1'b0;
    gb_wmask = '1;
    gb_addr  = '0;
    for (int i = 0; i < DIM; i++) gb_wdata[i] = col_y[i];
    unique case (state)
      S_BN_S: begin gb_en = 1'b1; gb_addr = AW'(int'(cfg.bn_base) + 2 * int'(cb)); end
      S_BN_B: begin gb_en = 1'b1; gb_addr = AW'(int'(cfg.bn_base) + 2 * int'(cb) + 1); end
      S_FEED: begin
        gb_en   = 1'b1;
        gb_addr = phase ? AW'(int'(cfg.w_base) + int'(kk) * int'(cfg.n_cb) + int'(cb))
                        : AW'(int'(cfg.x_base) + int'(rb) * int'(cfg.k_in) + int'(kk));
      end
      S_WRITE: begin
        gb_en   = !pool;
        gb_we   = !pool;
        gb_addr = AW'(int'(cfg.y_base) + int'(rb) * int'(cfg.n_cb) * DIM + int'(cb) * DIM + int'(cnt));
      end
      S_POOL: begin
        gb_en    = 1'b1;
        gb_we    = 1'b1;
        gb_wmask = DIM'(1) << grp[$clog2(DIM)-1:0];
        gb_addr  = AW'(int'(cfg.y_base) + (int'(grp) / DIM) * int'(cfg.n_cb) * DIM
                       + int'(cb) * DIM + int'(cnt));
        for (int i = 0; i < DIM; i++) gb_wdata[i] = run_max[cnt[$clog2(DIM)-1:0]];
      end
      default: ;
    endcase
  end

  assign busy   = (state != S_IDLE);
  assign sa_clr = (state == S_CLR);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      rb     <= '0;
      cb     <= '0;
      kk     <= '0;
      phase  <= 1'b0;
      cnt    <= '0;
      done   <= 1'b0;
      resp_a <= 1'b0;
      resp_w <= 1'b0;
      resp_s <= 1'b0;
      resp_b <= 1'b0;
      pool   <= 1'b0;
      grp    <= '0;
      in_grp <= '0;
    end else begin
      done   <= 1'b0;
      resp_a <= (state == S_FEED) && !phase;
      resp_w <= (state == S_FEED) && phase;
      resp_s <= (state == S_BN_S);
      resp_b <= (state == S_BN_B);
      if (resp_a) for (int i = 0; i < DIM; i++) a_hold[i]  <= gb_rdata[i];
      if (resp_s) for (int i = 0; i < DIM; i++) scale_l[i] <= gb_rdata[i];
      if (resp_b) for (int i = 0; i < DIM; i++) bias_l[i]  <= gb_rdata[i];
      unique case (state)
        S_IDLE: if (start) begin
          rb     <= '0;
          cb     <= '0;
          pool   <= (cfg.pool_rb != 0);
          grp    <= '0;
          in_grp <= '0;
          state  <= S_BN_S;
        end
        S_BN_S: state <= S_BN_B;
        S_BN_B: state <= S_CLR;
        S_CLR: begin
          kk    <= '0;
          phase <= 1'b0;
          state <= S_FEED;
        end
        S_FEED: begin
          phase <= !phase;
          if (phase) begin
            if (int'(kk) == int'(cfg.k_in) - 1) begin
              state <= S_DRAIN;
              cnt   <= '0;
            end
            kk <= kk + 1'b1;
          end
        end
        S_DRAIN: begin
          cnt <= cnt + 1'b1;
          if (int'(cnt) == 2 * DIM - 1) begin
            cnt   <= '0;
            state <= S_WRITE;
          end
        end
        S_WRITE: begin
          cnt <= cnt + 1'b1;
          if (pool) begin
            if (in_grp == 0 || col_max > run_max[cnt[$clog2(DIM)-1:0]])
              run_max[cnt[$clog2(DIM)-1:0]] <= col_max;
          end
          if (int'(cnt) == DIM - 1) begin
            cnt <= '0;
            if (pool) begin
              // column block outermost; a full group goes to S_POOL
              if (int'(in_grp) == int'(cfg.pool_rb) - 1) begin
                state <= S_POOL;
              end else begin
                in_grp <= in_grp + 1'b1;
                rb     <= rb + 1'b1;
                state  <= S_BN_S;
              end
            end else if (int'(cb) == int'(cfg.n_cb) - 1) begin
              cb <= '0;
              if (int'(rb) == int'(cfg.n_rb) - 1) begin
                state <= S_IDLE;
                done  <= 1'b1;
              end else begin
                rb    <= rb + 1'b1;
                state <= S_BN_S;
              end
            end else begin
              cb    <= cb + 1'b1;
              state <= S_BN_S;
            end
          end
        end
        S_POOL: begin
          cnt <= cnt + 1'b1;
          if (int'(cnt) == DIM - 1) begin
            cnt    <= '0;
            in_grp <= '0;
            if (int'(rb) == int'(cfg.n_rb) - 1) begin
              rb  <= '0;
              grp <= '0;
              if (int'(cb) == int'(cfg.n_cb) - 1) begin
                state <= S_IDLE;
                done  <= 1'b1;
              end else begin
                cb    <= cb + 1'b1;
                state <= S_BN_S;
              end
            end else begin
              rb    <= rb + 1'b1;
              grp   <= grp + 1'b1;
              state <= S_BN_S;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_k_nonzero: assert property (@(posedge clk) disable iff (!rst_n)
                                (start && state == S_IDLE) |-> (cfg.k_in != 0 && cfg.n_cb != 0 && cfg.n_rb != 0));
  a_pool_groups: assert property (@(posedge clk) disable iff (!rst_n)
                                  (start && state == S_IDLE && cfg.pool_rb != 0)
                                  |-> (int'(cfg.n_rb) % int'(cfg.pool_rb) == 0));
endmodule
