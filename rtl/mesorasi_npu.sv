// mesorasi_npu: a systolic-array DNN accelerator (NPU) extended with an
// aggregation unit for delayed-aggregation point cloud networks.
//
// A point cloud module computes, for every centroid, max over its neighbours
// of MLP(neighbour - centroid). Delayed aggregation instead runs the MLP once
// per input point and aggregates afterwards:
//   1. the MLP engine (16x16 systolic array + BN/ReLU) computes the point
//      feature table PFT = MLP(X) layer by layer in the global buffer;
//   2. meanwhile a neighbour search outside the NPU writes the neighbour index
//      table (NIT) to DRAM;
//   3. the aggregation unit streams the NIT in, gathers the PFT rows of every
//      centroid's neighbours from its banked PFT buffer, takes the column-wise
//      maximum and subtracts the centroid's own row. The result lands in the
//      global buffer as the input of the next module.
// The global buffer (1.5 MB, one line port) is shared: while the MLP engine
// runs it owns the port, else while the aggregation unit runs it owns it,
// otherwise the host port (the DMA path from DRAM) does. The controlling
// processor starts one engine at a time with its configuration.
// Interface: host line port with one-cycle read latency; mlp_cfg/start/busy/
// done; au_cfg/start/busy/done; NIT stream (valid/ready/last) from DRAM;
// aggregation statistics.
// The block structure follows the NPU of the paper with its aggregation unit;
// the sharing of the buffer port and the host port are this design's choice,
// standing in for the NPU's controller and DMA, which are not modelled.
module mesorasi_npu
  import mesorasi_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  // host / DMA port into the global buffer
  input  logic                 host_en,
  input  logic                 host_we,
  input  logic [LINE_WORDS-1:0] host_wmask,
  input  logic [GB_ADDR_W-1:0] host_addr,
  input  logic [WORD_W-1:0]    host_wdata [LINE_WORDS],
  output logic [WORD_W-1:0]    host_rdata [LINE_WORDS],
  // feature computation
  input  mlp_cfg_t             mlp_cfg,
  input  logic                 mlp_start,
  output logic                 mlp_busy,
  output logic                 mlp_done,
  // aggregation
  input  au_cfg_t              au_cfg,
  input  logic                 au_start,
  output logic                 au_busy,
  output logic                 au_done,
  input  logic                 nit_valid,
  output logic                 nit_ready,
  input  logic                 nit_last,
  input  logic [IDX_W-1:0]     nit_centroid,
  input  logic [IDX_W-1:0]     nit_nbr [MAX_K],
  output logic [31:0]          stat_rounds,
  output logic [31:0]          stat_ideal_rounds,
  output logic [31:0]          stat_entries,
  output logic [31:0]          stat_partitions
);
  // global-buffer port signals of each master
  logic                  gb_en, gb_we, m_en, m_we, a_en, a_we;
  logic [LINE_WORDS-1:0] gb_wmask, m_wmask, a_wmask;
  logic [GB_ADDR_W-1:0]  gb_addr, m_addr, a_addr;
  logic [WORD_W-1:0]     gb_wdata [LINE_WORDS];
  logic [WORD_W-1:0]     m_wdata  [LINE_WORDS];
  logic [WORD_W-1:0]     a_wdata  [LINE_WORDS];
  logic [WORD_W-1:0]     gb_rdata [LINE_WORDS];

  global_buffer #(.BANKS(GB_BANKS), .BANK_LINES(GB_BANK_LINES),
                  .LINE_WORDS(LINE_WORDS), .WORD_W(WORD_W)) u_gb (
    .clk, .rst_n, .en(gb_en), .we(gb_we), .wmask(gb_wmask), .addr(gb_addr),
    .wdata(gb_wdata), .rdata(gb_rdata)
  );

  mlp_engine u_mlp (
    .clk, .rst_n, .cfg(mlp_cfg), .start(mlp_start), .busy(mlp_busy), .done(mlp_done),
    .gb_en(m_en), .gb_we(m_we), .gb_wmask(m_wmask), .gb_addr(m_addr),
    .gb_wdata(m_wdata), .gb_rdata(gb_rdata)
  );

  aggregation_unit u_au (
    .clk, .rst_n, .cfg(au_cfg), .start(au_start), .busy(au_busy), .done(au_done),
    .nit_valid, .nit_ready, .nit_last, .nit_centroid, .nit_nbr,
    .gb_en(a_en), .gb_we(a_we), .gb_wmask(a_wmask), .gb_addr(a_addr),
    .gb_wdata(a_wdata), .gb_rdata(gb_rdata),
    .stat_rounds, .stat_ideal_rounds, .stat_entries, .stat_partitions
  );

  always_comb begin
    if (mlp_busy) begin
      gb_en = m_en; gb_we = m_we; gb_wmask = m_wmask; gb_addr = m_addr; gb_wdata = m_wdata;
    end else if (au_busy) begin
      gb_en = a_en; gb_we = a_we; gb_wmask = a_wmask; gb_addr = a_addr; gb_wdata = a_wdata;
    end else begin
      gb_en = host_en; gb_we = host_we; gb_wmask = host_wmask; gb_addr = host_addr;
      gb_wdata = host_wdata;
    end
  end

  assign host_rdata = gb_rdata;

  a_one_engine: assert property (@(posedge clk) disable iff (!rst_n) !(mlp_busy && au_busy));
  a_host_idle:  assert property (@(posedge clk) disable iff (!rst_n)
                                 (mlp_busy || au_busy) |-> !host_en);
endmodule
