// agu: address generation unit of the aggregation unit.
//
// Turns one NIT entry (centroid c, neighbours n_0..n_{k-1}) into read
// addresses for the NB banks of the PFT buffer. The PFT is interleaved on the
// low bits of the point index: point i lives in bank (i mod NB), row (i div NB),
// and column j of the current partition is word (row*cols + j) of that bank.
//
// The neighbours are taken in windows of NB indices. For a window, each round
// picks for every bank the first still-pending neighbour that maps to it (one
// NB-input selector per bank), so a round reads at most one word per bank.
// The chosen addresses are then issued for columns 0..cols-1, one column per
// cycle. Neighbours that lost a bank conflict stay pending for the next round;
// when a window is empty the next window starts. After the last neighbour
// round the centroid's own row is read, again one column per cycle.
//
// Outputs per cycle: rd_en/rd_addr for every bank; nbr_issue with first_round
// (no partial maximum exists yet) for neighbour reads; cen_issue with cen_bank
// for centroid reads; last on the final centroid read; round_start at the
// first cycle of every neighbour round. Reads complete in the PFT one cycle
// later. start is accepted only when idle and begins issuing in the same cycle.
// An entry takes (rounds + 1) * cols cycles; with k <= NB and no conflicts,
// rounds = 1. Round-based conflict handling with an address-mod-NB check and
// LSB interleaving follow the paper; the window of NB indices, the
// lowest-slot-first choice and the centroid read after the neighbours are
// this design's reading of it.
module agu #(
  parameter int NB      = 32,
  parameter int MAX_K   = 64,
  parameter int IDX_W   = 12,
  parameter int BANK_AW = 9,
  parameter int COL_W   = 9
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic [IDX_W-1:0]   centroid,
  input  logic [IDX_W-1:0]   nbr [MAX_K],
  input  logic [6:0]         k,
  input  logic [COL_W-1:0]   cols,
  output logic               busy,
  output logic [NB-1:0]      rd_en,
  output logic [BANK_AW-1:0] rd_addr [NB],
  output logic               nbr_issue,
  output logic               first_round,
  output logic               cen_issue,
  output logic [$clog2(NB)-1:0] cen_bank,
  output logic               last,
  output logic               round_start
);
  localparam int NWIN = (MAX_K + NB - 1) / NB;
  localparam int SW   = $clog2(NB);
  localparam int WW   = (NWIN > 1) ? $clog2(NWIN) : 1;

  typedef enum logic [1:0] {S_IDLE, S_NBR, S_CEN} state_t;
  state_t state;

  logic [IDX_W-1:0]   nbr_q [MAX_K];
  logic [IDX_W-1:0]   cen_q;
  logic [6:0]         k_q;
  logic [WW-1:0]      win;
  logic [NB-1:0]      pending;
  logic [NB-1:0]      gnt_en;
  logic [IDX_W-SW-1:0] gnt_row [NB];
  logic [COL_W-1:0]   col;
  logic               first_q;

  // ---- arbitration input: which window and which pending slots
  logic [IDX_W-1:0]   arb_idx [NB];
  logic [NB-1:0]      arb_pend;
  logic [WW-1:0]      arb_win;
  logic               end_round, next_same, next_win;

  function automatic logic [NB-1:0] win_mask(input int w, input logic [6:0] kk);
    logic [NB-1:0] m;
    for (int s = 0; s < NB; s++) m[s] = (w * NB + s) < int'(kk);
    return m;
  endfunction

  always_comb begin
    end_round = (state == S_NBR) && (col == cols - 1'b1);
    next_same = end_round && (pending != '0);
    next_win  = end_round && (pending == '0) && (int'(win) + 1 < (int'(k_q) + NB - 1) / NB);
    arb_win   = win;
    arb_pend  = pending;
    if (state == S_IDLE) begin
      arb_win  = '0;
      arb_pend = win_mask(0, k);
    end else if (next_win) begin
      arb_win  = win + 1'b1;
      arb_pend = win_mask(int'(win) + 1, k_q);
    end
    for (int s = 0; s < NB; s++) begin
      int n;
      n = int'(arb_win) * NB + s;
      if (n >= MAX_K) arb_idx[s] = '0;
      else            arb_idx[s] = (state == S_IDLE) ? nbr[n] : nbr_q[n];
    end
  end

  // ---- one NB-input selector per bank: first pending slot mapping to the bank
  logic [NB-1:0]       sel_en;
  logic [IDX_W-SW-1:0] sel_row [NB];
  logic [NB-1:0]       sel_taken;

  always_comb begin
    sel_taken = '0;
    for (int b = 0; b < NB; b++) begin
      sel_en[b]  = 1'b0;
      sel_row[b] = '0;
      for (int s = NB - 1; s >= 0; s--) begin
        if (arb_pend[s] && int'(arb_idx[s]) % NB == b) begin
          sel_en[b]  = 1'b1;
          sel_row[b] = (IDX_W-SW)'(arb_idx[s] / IDX_W'(NB));
        end
      end
    end
    // a slot is taken when it is the first pending slot of its bank
    for (int s = 0; s < NB; s++) begin
      logic earlier;
      earlier = 1'b0;
      for (int t = 0; t < s; t++)
        if (arb_pend[t] && (arb_idx[t] % IDX_W'(NB)) == (arb_idx[s] % IDX_W'(NB))) earlier = 1'b1;
      sel_taken[s] = arb_pend[s] && !earlier;
    end
  end

  // ---- outputs
  assign busy        = (state != S_IDLE);
  assign nbr_issue   = (state == S_NBR);
  assign cen_issue   = (state == S_CEN);
  assign first_round = (state == S_NBR) && first_q;
  assign cen_bank    = SW'(cen_q % IDX_W'(NB));
  assign last        = (state == S_CEN) && (col == cols - 1'b1);
  assign round_start = (state == S_NBR) && (col == '0);

  always_comb begin
    for (int b = 0; b < NB; b++) begin
      rd_en[b]   = 1'b0;
      rd_addr[b] = '0;
      if (state == S_NBR) begin
        rd_en[b]   = gnt_en[b];
        rd_addr[b] = BANK_AW'(int'(gnt_row[b]) * int'(cols) + int'(col));
      end else if (state == S_CEN && int'(cen_bank) == b) begin
        rd_en[b]   = 1'b1;
        rd_addr[b] = BANK_AW'((int'(cen_q) / NB) * int'(cols) + int'(col));
      end
    end
  end

  // ---- sequencing
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      win     <= '0;
      pending <= '0;
      gnt_en  <= '0;
      col     <= '0;
      first_q <= 1'b0;
      k_q     <= '0;
      cen_q   <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (start) begin
          nbr_q   <= nbr;
          cen_q   <= centroid;
          k_q     <= k;
          win     <= '0;
          gnt_en  <= sel_en;
          gnt_row <= sel_row;
          pending <= arb_pend & ~sel_taken;
          col     <= '0;
          first_q <= 1'b1;
          state   <= S_NBR;
        end
        S_NBR: begin
          col <= col + 1'b1;
          if (end_round) begin
            col     <= '0;
            first_q <= 1'b0;
            if (next_same || next_win) begin
              win     <= arb_win;
              gnt_en  <= sel_en;
              gnt_row <= sel_row;
              pending <= arb_pend & ~sel_taken;
            end else begin
              state <= S_CEN;
            end
          end
        end
        S_CEN: begin
          col <= col + 1'b1;
          if (last) begin
            col   <= '0;
            state <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_k_range: assert property (@(posedge clk) disable iff (!rst_n)
                              (start && state == S_IDLE) |-> (k != 0 && int'(k) <= MAX_K && cols != 0));
endmodule
