// aggregation_unit: gathers, reduces and normalises point features by the
// neighbour index table (the "A" step of delayed aggregation).
//
// Input: the point feature table (PFT, n_in points x m_out features) that the
// MLP wrote into the global buffer, and a stream of n_out NIT entries, each a
// centroid and its k neighbour indices. Output: for NIT entry e,
//   out[e][j] = max over neighbours n of PFT[n][j]  -  PFT[centroid][j],
// written to the global buffer in the same layout as an MLP output.
//
// Column partitioning: the PFT buffer holds only cols columns of the PFT at a
// time. The unit processes partition p = 0 .. m_out/cols - 1 in turn:
//   FILL  read the partition's lines from the global buffer and write each word
//         to the bank of its point (point i -> bank i mod NB, word
//         (i div NB)*cols + column);
//   RUN   for each of the n_out NIT entries (the NIT is streamed again for every
//         partition) the AGU issues neighbour reads round by round; the bank
//         words of a round and the partial result from the top shift register
//         go through the max unit back into that register; then the centroid's
//         words go through the bank MUX into the bottom shift register. Two
//         cycles after the last centroid read the 256 subtractors form the
//         result, which is latched and written out, one column per cycle,
//         while the next entry is already running.
// A partition is complete when all n_out results are written.
// Interface: start (one cycle; cfg held stable while busy), busy, done (one
// cycle pulse); NIT stream (valid/ready, last closes a half of the NIT
// buffer); global-buffer master port (one-cycle read latency); statistics.
// Timing: an entry takes (rounds + 1) * cols cycles back to back, where
// rounds >= ceil(k / NB) grows with bank conflicts; a fill takes
// ceil(n_in/16) * cols + 1 cycles.
// The structure (double-buffered NIT, AGU, banked PFT buffer without output
// crossbar, max unit with feedback, two shift registers, subtractors, column
// partitioning, one pass over the NIT per partition) follows the paper; the
// fill order, the output write and the statistics are this design's own.
module aggregation_unit
  import mesorasi_pkg::*;
#(
  parameter int NB          = PFT_BANKS,
  parameter int BANK_WORDS  = PFT_BANK_WORDS,
  parameter int MAXK        = MAX_K,
  parameter int NIT_DEPTH   = NIT_ENTRIES,
  parameter int SRL         = SR_LEN,
  parameter int LINE        = LINE_WORDS,
  parameter int AW          = GB_ADDR_W
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  au_cfg_t              cfg,
  input  logic                 start,
  output logic                 busy,
  output logic                 done,
  // NIT stream from DRAM
  input  logic                 nit_valid,
  output logic                 nit_ready,
  input  logic                 nit_last,
  input  logic [IDX_W-1:0]     nit_centroid,
  input  logic [IDX_W-1:0]     nit_nbr [MAXK],
  // global-buffer master port
  output logic                 gb_en,
  output logic                 gb_we,
  output logic [LINE-1:0]      gb_wmask,
  output logic [AW-1:0]        gb_addr,
  output logic [WORD_W-1:0]    gb_wdata [LINE],
  input  logic [WORD_W-1:0]    gb_rdata [LINE],
  // statistics, cleared by start
  output logic [31:0]          stat_rounds,       // neighbour rounds issued
  output logic [31:0]          stat_ideal_rounds, // rounds without bank conflicts
  output logic [31:0]          stat_entries,      // NIT entries aggregated
  output logic [31:0]          stat_partitions    // PFT partitions processed
);
  localparam int BAW = $clog2(BANK_WORDS);
  localparam int SW  = $clog2(NB);
  localparam int LW  = $clog2(SRL + 1);

  typedef enum logic [2:0] {S_IDLE, S_FILL, S_FILL_END, S_RUN, S_PART_END} state_t;
  state_t state;

  logic [LW-1:0]   part;       // current partition
  logic [LW-1:0]   n_part;     // m_out / cols
  logic [12:0]     f_rb;       // fill: row block of LINE points
  logic [LW-1:0]   f_c;        // fill: column within partition
  logic            f_resp;
  logic [12:0]     f_resp_rb;
  logic [LW-1:0]   f_resp_c;
  logic [IDX_W:0]  fetched;    // NIT entries requested this partition
  logic [IDX_W:0]  finished;   // results captured this partition
  logic            have_entry, rd_inflight;

  // ---------------- NIT buffer
  logic             nb_rd_avail, nb_rd_req, nb_rd_valid;
  logic [IDX_W-1:0] nb_centroid;
  logic [IDX_W-1:0] nb_nbr [MAXK];

  nit_buffer #(.ENTRIES(NIT_DEPTH), .MAX_K(MAXK), .IDX_W(IDX_W)) u_nit (
    .clk, .rst_n,
    .wr_valid(nit_valid), .wr_ready(nit_ready), .wr_last(nit_last),
    .wr_centroid(nit_centroid), .wr_nbr(nit_nbr),
    .rd_avail(nb_rd_avail), .rd_req(nb_rd_req), .rd_valid(nb_rd_valid),
    .rd_centroid(nb_centroid), .rd_nbr(nb_nbr)
  );

  // ---------------- AGU
  logic            agu_start, agu_busy, agu_nbr, agu_first, agu_cen, agu_last, agu_round;
  logic [NB-1:0]   agu_en;
  logic [BAW-1:0]  agu_addr [NB];
  logic [SW-1:0]   agu_cen_bank;

  agu #(.NB(NB), .MAX_K(MAXK), .IDX_W(IDX_W), .BANK_AW(BAW), .COL_W(COL_W)) u_agu (
    .clk, .rst_n, .start(agu_start), .centroid(nb_centroid), .nbr(nb_nbr),
    .k(cfg.k), .cols(cfg.cols), .busy(agu_busy), .rd_en(agu_en), .rd_addr(agu_addr),
    .nbr_issue(agu_nbr), .first_round(agu_first), .cen_issue(agu_cen),
    .cen_bank(agu_cen_bank), .last(agu_last), .round_start(agu_round)
  );

  // ---------------- PFT buffer
  logic [NB-1:0]     pw_en;
  logic [BAW-1:0]    pw_addr [NB];
  logic [WORD_W-1:0] pw_data [NB];
  logic [WORD_W-1:0] pr_data [NB];

  pft_buffer #(.NB(NB), .BANK_WORDS(BANK_WORDS), .WORD_W(WORD_W)) u_pft (
    .clk, .rst_n, .rd_en(agu_en), .rd_addr(agu_addr), .rd_data(pr_data),
    .wr_en(pw_en), .wr_addr(pw_addr), .wr_data(pw_data)
  );

  // fill writes: the line read last cycle holds LINE consecutive points of one column
  always_comb begin
    for (int b = 0; b < NB; b++) begin
      pw_en[b]   = 1'b0;
      pw_addr[b] = '0;
      pw_data[b] = '0;
    end
    if (f_resp) begin
      for (int r = 0; r < LINE; r++) begin
        if (int'(f_resp_rb) * LINE + r < int'(cfg.n_in)) begin
          pw_en[(int'(f_resp_rb) * LINE + r) % NB]   = 1'b1;
          pw_addr[(int'(f_resp_rb) * LINE + r) % NB] =
            BAW'(((int'(f_resp_rb) * LINE + r) / NB) * int'(cfg.cols) + int'(f_resp_c));
          pw_data[(int'(f_resp_rb) * LINE + r) % NB] = gb_rdata[r];
        end
      end
    end
  end

  // ---------------- reduction datapath, one cycle behind the AGU
  logic            nbr_d, first_d, cen_d, last_d, last_dd;
  logic [NB-1:0]   en_d;
  logic [SW-1:0]   cbank_d;
  logic [WORD_W-1:0] max_w, top_tap, cen_word;
  logic [WORD_W-1:0] bot_tap;  // the bottom register is read in parallel, its tap is unused
  logic [WORD_W-1:0] top_q [SRL];
  logic [WORD_W-1:0] bot_q [SRL];
  logic [WORD_W-1:0] diff  [SRL];

  reduction_max #(.NB(NB), .WORD_W(WORD_W)) u_max (
    .din(pr_data), .din_en(en_d), .fb(top_tap), .fb_en(!first_d), .max_out(max_w)
  );

  shift_register #(.DEPTH(SRL), .WORD_W(WORD_W)) u_sr_top (
    .clk, .rst_n, .shift(nbr_d), .din(max_w), .len(LW'(cfg.cols)), .tap(top_tap), .q(top_q)
  );

  // the centroid MUX: one bank's word, selected by the AGU
  always_comb cen_word = pr_data[cbank_d];

  shift_register #(.DEPTH(SRL), .WORD_W(WORD_W)) u_sr_bot (
    .clk, .rst_n, .shift(cen_d), .din(cen_word), .len(LW'(cfg.cols)), .tap(bot_tap), .q(bot_q)
  );

  sub_unit #(.N(SRL), .WORD_W(WORD_W)) u_sub (.a(top_q), .b(bot_q), .d(diff));

  // ---------------- result register and writer
  logic [WORD_W-1:0] res_q [SRL];
  logic              w_busy;
  logic [LW-1:0]     w_col;
  logic [IDX_W:0]    w_row;

  // ---------------- global-buffer port
  always_comb begin
    gb_en    = 1'b0;
    gb_we    = 1'b0;
    gb_wmask = '0;
    gb_addr  = '0;
    for (int w = 0; w < LINE; w++) gb_wdata[w] = res_q[int'(cfg.cols) - 1 - int'(w_col)];
    if (state == S_FILL) begin
      gb_en   = 1'b1;
      gb_addr = AW'(int'(cfg.pft_base) + int'(f_rb) * int'(cfg.m_out)
                    + int'(part) * int'(cfg.cols) + int'(f_c));
    end else if (w_busy) begin
      gb_en    = 1'b1;
      gb_we    = 1'b1;
      gb_wmask = LINE'(1) << (int'(w_row) % LINE);
      gb_addr  = AW'(int'(cfg.out_base) + (int'(w_row) / LINE) * int'(cfg.m_out)
                     + int'(part) * int'(cfg.cols) + int'(w_col));
    end
  end

  // ---------------- control
  logic [12:0] n_rb;
  always_comb n_rb = 13'((int'(cfg.n_in) + LINE - 1) / LINE);

  assign busy      = (state != S_IDLE);
  assign nb_rd_req = (state == S_RUN) && !have_entry && !rd_inflight &&
                     (fetched < cfg.n_out) && nb_rd_avail;
  assign agu_start = (state == S_RUN) && have_entry && !agu_busy;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      done        <= 1'b0;
      part        <= '0;
      n_part      <= '0;
      f_rb        <= '0;
      f_c         <= '0;
      f_resp      <= 1'b0;
      f_resp_rb   <= '0;
      f_resp_c    <= '0;
      fetched     <= '0;
      finished    <= '0;
      have_entry  <= 1'b0;
      rd_inflight <= 1'b0;
      nbr_d       <= 1'b0;
      first_d     <= 1'b0;
      cen_d       <= 1'b0;
      last_d      <= 1'b0;
      last_dd     <= 1'b0;
      en_d        <= '0;
      cbank_d     <= '0;
      w_busy      <= 1'b0;
      w_col       <= '0;
      w_row       <= '0;
      stat_rounds       <= '0;
      stat_ideal_rounds <= '0;
      stat_entries      <= '0;
      stat_partitions   <= '0;
    end else begin
      done <= 1'b0;

      // datapath alignment with the one-cycle bank read
      nbr_d   <= agu_nbr;
      first_d <= agu_first;
      cen_d   <= agu_cen;
      last_d  <= agu_last;
      last_dd <= last_d;
      en_d    <= agu_en;
      cbank_d <= agu_cen_bank;

      // fill pipeline
      f_resp    <= (state == S_FILL);
      f_resp_rb <= f_rb;
      f_resp_c  <= f_c;

      // NIT fetch
      if (nb_rd_req) begin
        rd_inflight <= 1'b1;
        fetched     <= fetched + 1'b1;
      end
      if (nb_rd_valid) begin
        rd_inflight <= 1'b0;
        have_entry  <= 1'b1;
      end
      if (agu_start) begin
        have_entry        <= 1'b0;
        stat_ideal_rounds <= stat_ideal_rounds + 32'((int'(cfg.k) + NB - 1) / NB);
      end
      if (agu_round) stat_rounds <= stat_rounds + 1'b1;

      // result capture, two cycles after the last centroid read
      if (last_dd) begin
        for (int i = 0; i < SRL; i++) res_q[i] <= diff[i];
        w_busy       <= 1'b1;
        w_col        <= '0;
        w_row        <= finished;
        finished     <= finished + 1'b1;
        stat_entries <= stat_entries + 1'b1;
      end else if (w_busy && state != S_FILL) begin
        w_col <= w_col + 1'b1;
        if (w_col == cfg.cols - 1'b1) w_busy <= 1'b0;
      end

      unique case (state)
        S_IDLE: if (start) begin
          part              <= '0;
          n_part            <= LW'(int'(cfg.m_out) / int'(cfg.cols));
          f_rb              <= '0;
          f_c               <= '0;
          stat_rounds       <= '0;
          stat_ideal_rounds <= '0;
          stat_entries      <= '0;
          stat_partitions   <= '0;
          state             <= S_FILL;
        end
        S_FILL: begin
          f_c <= f_c + 1'b1;
          if (f_c == cfg.cols - 1'b1) begin
            f_c  <= '0;
            f_rb <= f_rb + 1'b1;
            if (f_rb == n_rb - 1'b1) state <= S_FILL_END;
          end
        end
        S_FILL_END: begin
          fetched  <= '0;
          finished <= '0;
          state    <= S_RUN;
        end
        S_RUN: if (finished == cfg.n_out) state <= S_PART_END;
        S_PART_END: if (!w_busy) begin
          stat_partitions <= stat_partitions + 1'b1;
          if (part == n_part - 1'b1) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else begin
            part  <= part + 1'b1;
            f_rb  <= '0;
            f_c   <= '0;
            state <= S_FILL;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // ---------------- rules
  a_cfg_fits: assert property (@(posedge clk) disable iff (!rst_n)
    (start && state == S_IDLE) |->
      (cfg.cols != 0 && int'(cfg.cols) <= SRL && (int'(cfg.m_out) % int'(cfg.cols)) == 0 &&
       ((int'(cfg.n_in) + NB - 1) / NB) * int'(cfg.cols) <= BANK_WORDS &&
       cfg.k != 0 && int'(cfg.k) <= MAXK && cfg.n_out != 0));
  a_writer_free: assert property (@(posedge clk) disable iff (!rst_n)
    last_dd |-> (!w_busy || (w_col == cfg.cols - 1'b1)));
  a_no_fill_while_busy: assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_FILL) |-> (!agu_busy && !w_busy));
  initial assert (NB % LINE == 0) else $error("NB must be a multiple of LINE");
endmodule
